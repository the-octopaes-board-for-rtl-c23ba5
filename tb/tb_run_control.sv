// tb_run_control: self-checking test of start/stop control.
//
// External source: run must follow ext_run exactly three clock edges later,
// for rising and falling edges. Button source (debounce shortened to 8
// cycles): short bounces must not change run; a press held long enough must
// toggle run once, the release must not, and a second press must toggle it
// back. The testbench counts edges itself to decide when run may change.
module tb_run_control;
  timeunit 1ns; timeprecision 100ps;

  localparam int DB = 8;

  logic clk = 1'b0;
  always #6.25 clk = ~clk;

  logic rst_n = 1'b0, btn = 1'b0, ext_run = 1'b0, ext_sel = 1'b1, run;
  int checks = 0, failures = 0;

  run_control #(.DEBOUNCE_CYCLES(DB)) dut (.*);

  task automatic expect_run(input logic e, input string what);
    checks++;
    if (run !== e) begin failures++; $display("FAIL %s: run=%0b", what, run); end
  endtask

  // drive ext_run, check run changes exactly 3 edges later
  task automatic ext_edge(input logic v);
    @(negedge clk); ext_run = v;
    for (int e = 1; e <= 5; e++) begin
      @(negedge clk);
      expect_run((e >= 3) ? v : !v, $sformatf("ext %0b edge %0d", v, e));
    end
  endtask

  task automatic bounce(input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); btn = ~btn;
      repeat ($urandom_range(DB - 3)) @(negedge clk);
    end
  endtask

  task automatic press_release(input logic was_run);
    bounce(6);
    @(negedge clk); btn = 1'b1;
    repeat (DB + 5) begin @(negedge clk); end
    expect_run(!was_run, "after press");
    bounce(5);
    @(negedge clk); btn = 1'b0;
    repeat (DB + 5) @(negedge clk);
    expect_run(!was_run, "after release");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); expect_run(1'b0, "reset");
    ext_edge(1'b1);
    ext_edge(1'b0);
    ext_edge(1'b1);
    // switch to the button: run follows the (stopped) button state
    @(negedge clk); ext_sel = 1'b0; ext_run = 1'b0;
    @(negedge clk); @(negedge clk); expect_run(1'b0, "button source idle");
    // bounces alone never reach the debounce time
    bounce(8);
    @(negedge clk); btn = 1'b0;
    repeat (DB + 5) @(negedge clk);
    expect_run(1'b0, "bounce only");
    press_release(1'b0);
    press_release(1'b1);
    press_release(1'b0);
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
