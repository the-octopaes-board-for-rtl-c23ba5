// tb_channel_select: self-checking test of the Large/Small channel mapping.
//
// Random 32-bit row words are applied in both modes. The expected output is
// built bit by bit in the testbench: Large drives rows 12..30 on outputs
// 0..18, Small drives rows 0..11 on outputs 0..11 with 12..18 low; the output
// follows the input by one clock. A calibration-style word (hits on row 0 and
// row 12 only) must show on output 0 of both boards.
module tb_channel_select;
  timeunit 1ns; timeprecision 100ps;

  logic clk = 1'b0;
  always #6.25 clk = ~clk;

  logic        rst_n = 1'b0, large_mode = 1'b0;
  logic [31:0] rows = '0;
  logic [18:0] pmt_out, exp;
  int checks = 0, failures = 0;

  channel_select dut (.*);

  function automatic logic [18:0] model(input logic [31:0] r, input logic lg);
    logic [18:0] o = '0;
    if (lg) for (int i = 0; i < 19; i++) o[i] = r[12 + i];
    else       for (int i = 0; i < 12; i++) o[i] = r[i];
    return o;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      large_mode = n[0] ^ n[5];
      rows = (n == 7 || n == 8) ? 32'h0000_1001 : $urandom();
      exp = model(rows, large_mode);
      @(negedge clk);
      checks++;
      if (pmt_out !== exp) begin
        failures++;
        $display("FAIL rows=%h large=%0b got %h exp %h", rows, large_mode, pmt_out, exp);
      end
      if (n == 7 || n == 8) begin
        checks++;
        if (pmt_out !== 19'h1) begin failures++; $display("FAIL calibration word"); end
      end
    end
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
