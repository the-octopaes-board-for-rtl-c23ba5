// tb_page_player: self-checking test of page playback.
//
// The player reads from a memory model in the testbench (4 pages x 16
// digits, synchronous read). For each go the testbench expects digit d of the
// page on `rows` exactly 2 + d clocks after the go cycle, `done` with the
// last digit, and zero rows otherwise. It also plays two pages back to back
// (second go in the cycle of done) and checks that stop_play blanks the rows at
// once.
module tb_page_player;
  timeunit 1ns; timeprecision 100ps;

  localparam int unsigned NP = 4, NR = 32, ND = 16, AW = 6;

  logic clk = 1'b0;
  always #6.25 clk = ~clk;

  logic          rst_n = 1'b0, go = 1'b0, stop_play = 1'b0;
  logic [1:0]    page = '0;
  logic          rd_en, busy, done;
  logic [AW-1:0] rd_addr;
  logic [NR-1:0] rd_data, rows;
  logic [NR-1:0] mem [NP * ND];
  int checks = 0, failures = 0;

  page_player #(.N_PAGES(NP), .N_ROWS(NR), .N_DIGITS(ND)) dut (.*);

  always_ff @(posedge clk) if (rd_en) rd_data <= mem[rd_addr];

  task automatic expect_rows(input logic [NR-1:0] e, input logic edone, input string what);
    checks++;
    if (rows !== e || done !== edone) begin
      failures++;
      $display("FAIL %s: rows %h done %0b, expected %h %0b", what, rows, done, e, edone);
    end
  endtask

  // issue go in this cycle (inputs set after negedge), then check the play
  task automatic play(input int p, input bit chain_next, input int next_p);
    @(negedge clk); go = 1'b1; page = 2'(p);
    @(negedge clk); go = 1'b0;
    expect_rows('0, 1'b0, "go+1 idle");
    for (int d = 0; d < ND; d++) begin
      @(negedge clk);
      if (d == ND - 1 && chain_next) begin go = 1'b1; page = 2'(next_p); end
      expect_rows(mem[p * ND + d], d == ND - 1, $sformatf("page %0d digit %0d", p, d));
    end
  endtask

  initial begin
    for (int a = 0; a < NP * ND; a++) mem[a] = $urandom();
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    expect_rows('0, 1'b0, "reset idle");
    play(2, 0, 0);
    @(negedge clk); expect_rows('0, 1'b0, "after play");
    // back to back: page 1 then page 3 (go in the done cycle)
    play(1, 1, 3);
    @(negedge clk); go = 1'b0;
    expect_rows('0, 1'b0, "gap between chained pages");
    for (int d = 0; d < ND; d++) begin
      @(negedge clk);
      expect_rows(mem[3 * ND + d], d == ND - 1, $sformatf("chained digit %0d", d));
    end
    // stop_play in the middle of a play
    @(negedge clk); go = 1'b1; page = 2'd0;
    @(negedge clk); go = 1'b0;
    repeat (5) @(negedge clk);
    stop_play = 1'b1;
    @(negedge clk); stop_play = 1'b0;
    for (int c = 0; c < ND + 4; c++) begin
      expect_rows('0, 1'b0, "after stop_play");
      checks++;
      if (busy) begin failures++; $display("FAIL busy after stop_play"); end
      @(negedge clk);
    end
    play(0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
