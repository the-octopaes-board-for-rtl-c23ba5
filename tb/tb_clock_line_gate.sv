// tb_clock_line_gate: self-checking test of the gated clock line.
//
// The testbench samples clk and clk_line every 1 ns and checks: the line is
// low whenever the gate should be closed; when open it equals clk; every high
// pulse on the line is a full half period (no short pulses); the gate opens
// on the first falling edge with run_req high and, after run_req falls, stays
// open until quiet is seen high at a falling edge. It counts rising edges on
// the line and compares them with the count it expects.
module tb_clock_line_gate;
  timeunit 1ns; timeprecision 100ps;

  logic clk = 1'b0;
  always #5 clk = ~clk;           // 10 ns period for easy sampling

  logic rst_n = 1'b0, run_req = 1'b0, quiet = 1'b0, clk_line;
  int checks = 0, failures = 0;
  bit gate_model = 1'b0;          // expected gate state
  int line_edges = 0, exp_edges = 0;
  realtime rise_t;

  clock_line_gate dut (.*);

  // reference gate: same rule, evaluated on the falling edge
  always @(negedge clk) begin
    if (!rst_n)       gate_model <= 1'b0;
    else if (run_req) gate_model <= 1'b1;
    else if (quiet)   gate_model <= 1'b0;
  end
  always @(posedge clk) if (rst_n && gate_model) exp_edges++;

  always @(posedge clk_line) if (rst_n) begin line_edges++; rise_t = $realtime; end
  always @(negedge clk_line) if (rst_n) begin
    checks++;
    if ($realtime - rise_t < 4.9) begin failures++; $display("FAIL short pulse at %0t", $realtime); end
  end

  // continuous comparison, 1 ns steps, away from the clock edges
  initial begin
    #25.5;
    forever begin
      #1;
      checks++;
      if (clk_line !== (clk & gate_model)) begin
        failures++;
        if (failures < 10) $display("FAIL at %0t: line %0b clk %0b gate %0b", $realtime, clk_line, clk, gate_model);
      end
    end
  end

  initial begin
    #23 rst_n = 1'b1;
    #50 run_req = 1'b1;                // start
    #200 run_req = 1'b0;               // stop requested while busy
    #100 quiet = 1'b1;                 // core goes quiet: gate closes
    #10 quiet = 1'b0;
    #150;
    #3 run_req = 1'b1;                 // restart off-grid
    #97 quiet = 1'b1; run_req = 1'b0;  // stop while already quiet
    #200;
    checks++;
    if (line_edges != exp_edges || exp_edges < 20) begin
      failures++; $display("FAIL line edges %0d expected %0d", line_edges, exp_edges);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
