// tb_rate_timer: self-checking test of the period counter.
//
// For several periods (1, 2, 7, 80 and 800 cycles, the last being 100 kHz at
// 80 MHz) the timer is enabled and the testbench counts clock cycles itself:
// a tick is expected in exactly the cycles 0, P, 2P, ... after enable and in
// no others. Disabling the timer must stop ticks and restart the phase.
module tb_rate_timer;
  timeunit 1ns; timeprecision 100ps;

  logic clk = 1'b0;
  always #6.25 clk = ~clk;

  logic        rst_n = 1'b0, en = 1'b0, tick;
  logic [31:0] period = 32'd1;
  int checks = 0, failures = 0;

  rate_timer #(.PERIOD_W(32)) dut (.*);

  task automatic run_period(input int unsigned p, input int unsigned cycles);
    @(negedge clk); period = p; en = 1'b1;
    for (int unsigned c = 0; c < cycles; c++) begin
      #1;
      checks++;
      if (tick !== ((c % p) == 0)) begin
        failures++;
        $display("FAIL period %0d cycle %0d tick=%0b", p, c, tick);
      end
      @(negedge clk);
    end
    en = 1'b0;
    for (int c = 0; c < 5; c++) begin
      #1;
      checks++;
      if (tick) begin failures++; $display("FAIL tick while disabled"); end
      @(negedge clk);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_period(1, 10);
    run_period(2, 20);
    run_period(7, 50);
    run_period(80, 400);
    run_period(800, 2500);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
