// tb_pattern_memory: self-checking test of the pattern store.
//
// A small store (4 pages x 16 digits) is filled with random words through the
// write port while a reference array in the testbench records what was
// written. Every address is then read back and compared one cycle after the
// read; the test also checks that a read issued together with a write of the
// same address returns the old word, and that rdata holds when re is low.
module tb_pattern_memory;
  timeunit 1ns; timeprecision 100ps;

  localparam int unsigned NP = 4, NR = 32, ND = 16;
  localparam int unsigned DEPTH = NP * ND, AW = $clog2(DEPTH);

  logic clk = 1'b0;
  always #6.25 clk = ~clk;

  logic          we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [NR-1:0] wdata = '0, rdata;
  logic [NR-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  pattern_memory #(.N_PAGES(NP), .N_ROWS(NR), .N_DIGITS(ND)) dut (.wclk(clk), .rclk(clk), .*);

  task automatic check(input logic [NR-1:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      ref_mem[a] = $urandom();
      @(negedge clk); we = 1'b1; waddr = AW'(a); wdata = ref_mem[a];
    end
    @(negedge clk); we = 1'b0;
    // read back, random order
    for (int n = 0; n < 3 * DEPTH; n++) begin
      automatic int unsigned a = $urandom_range(DEPTH - 1);
      @(negedge clk); re = 1'b1; raddr = AW'(a);
      @(negedge clk); re = 1'b0;
      check(rdata, ref_mem[a], $sformatf("read addr %0d", a));
      // rdata holds while re is low
      @(negedge clk);
      check(rdata, ref_mem[a], "hold");
    end
    // read-during-write returns the old word
    @(negedge clk); re = 1'b1; raddr = AW'(5); we = 1'b1; waddr = AW'(5); wdata = ~ref_mem[5];
    @(negedge clk); re = 1'b0; we = 1'b0;
    check(rdata, ref_mem[5], "read during write: old data");
    ref_mem[5] = ~ref_mem[5];
    @(negedge clk); re = 1'b1; raddr = AW'(5);
    @(negedge clk); re = 1'b0;
    check(rdata, ref_mem[5], "after write: new data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
