// tb_octopaes_rates: the published emulation rates, at full size.
//
// The top keeps all defaults (80 MHz, 256-digit rows). Page 0 is a background
// page (one 25 ns pulse per row at a random place), page 37 a signal page with
// a known number of pulses per row. Started from the external line on a Large
// board, the test runs:
//   * standalone at 100 kHz, 1 kHz, 10 Hz and 5 Hz: three plays each, whose
//     start cycles must be exactly 800 / 80,000 / 8,000,000 / 16,000,000
//     clocks apart, and every PMT line must show exactly one pulse per play;
//   * muon mode with the signal at 1 Hz for 80,020,000 clocks (1.00025 s):
//     5002 background slots at 5 kHz and two signal plays exactly 80,000,000
//     clocks apart; each line's pulse count must equal the background plays
//     plus the signal page's pulses on that row times the signal plays.
module tb_octopaes_rates;
  timeunit 1ns; timeprecision 100ps;

  logic clk = 1'b0;
  always #6.25 clk = ~clk;

  logic        rst_n = 1'b1, btn_start = 1'b0, ext_run = 1'b0, ext_sel = 1'b1;
  logic        muon_mode = 1'b0, large_mode = 1'b1, sig_rate_sel = 1'b0;
  logic [1:0]  rate_sel = 2'd0;
  logic [11:0] dip_addr = '0;
  logic [6:0]  bg_page = '0;
  logic [1:0]  chain_mode = 2'd0;
  logic        clk_line_in = 1'b0, clk_line_out;
  logic        mem_we = 1'b0;
  logic [14:0] mem_waddr = '0;
  logic [31:0] mem_wdata = '0;
  logic [18:0] pmt_out, pmt_q = '0;
  logic        running, playing, overrun, sig_start, playing_q = 1'b0;

  octopaes_top dut (.*);

  logic [31:0] bg [256], sig [256];
  int checks = 0, failures = 0;
  longint cyc = 0;
  longint play_t[$], sig_t[$];
  int pulses [19];
  int n_ovr = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    playing_q <= playing;
    pmt_q <= pmt_out;
    if (playing && !playing_q) play_t.push_back(cyc);
    if (rst_n && sig_start) sig_t.push_back(cyc);
    if (rst_n && overrun) n_ovr++;
    for (int i = 0; i < 19; i++) if (pmt_out[i] && !pmt_q[i]) pulses[i]++;
  end

  function automatic int row_pulses(input int r);
    int n = 0;
    for (int d = 0; d < 256; d++) if (sig[d][r] && (d == 0 || !sig[d - 1][r])) n++;
    return n;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic clear_counts();
    play_t.delete(); sig_t.delete();
    foreach (pulses[i]) pulses[i] = 0;
  endtask

  task automatic standalone(input logic [1:0] sel, input longint period);
    @(negedge clk); rate_sel = sel; muon_mode = 1'b0; dip_addr = '0;
    clear_counts();
    ext_run = 1'b1;
    repeat (2 * period + 400) @(negedge clk);
    ext_run = 1'b0;
    repeat (20) @(negedge clk);
    check(play_t.size() == 3, $sformatf("rate_sel %0d: %0d plays", sel, play_t.size()));
    if (play_t.size() == 3) begin
      check(play_t[1] - play_t[0] == period, $sformatf("rate_sel %0d spacing %0d", sel, play_t[1] - play_t[0]));
      check(play_t[2] - play_t[1] == period, $sformatf("rate_sel %0d spacing %0d", sel, play_t[2] - play_t[1]));
    end
    foreach (pulses[i]) check(pulses[i] == 3, $sformatf("rate_sel %0d line %0d pulses %0d", sel, i, pulses[i]));
    $display("rate_sel %0d: plays=%0d period=%0d cycles", sel, play_t.size(), period);
  endtask

  initial begin
    // pages: background = one "11" per row; signal = (r % 4) pulses on row r
    foreach (bg[d]) begin bg[d] = '0; sig[d] = '0; end
    for (int r = 0; r < 32; r++) begin
      automatic int pos = $urandom_range(254);
      bg[pos][r] = 1'b1; bg[pos + 1][r] = 1'b1;
      for (int k = 0; k < r % 4; k++) begin
        automatic int p = 20 + 60 * k + r;
        sig[p][r] = 1'b1; sig[p + 1][r] = 1'b1;
      end
    end
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int d = 0; d < 256; d++) begin
      @(negedge clk); mem_we = 1'b1; mem_waddr = {7'd0, 8'(d)};  mem_wdata = bg[d];
      @(negedge clk);                mem_waddr = {7'd37, 8'(d)}; mem_wdata = sig[d];
    end
    @(negedge clk); mem_we = 1'b0;

    standalone(2'd3, 800);
    standalone(2'd2, 80_000);
    standalone(2'd1, 8_000_000);
    standalone(2'd0, 16_000_000);

    // muon mode, signal at 1 Hz
    @(negedge clk); muon_mode = 1'b1; sig_rate_sel = 1'b0; bg_page = 7'd0; dip_addr = {7'd37, 5'd0};
    clear_counts();
    ext_run = 1'b1;
    repeat (80_020_000) @(negedge clk);
    ext_run = 1'b0;
    repeat (20) @(negedge clk);
    check(sig_t.size() == 2, $sformatf("signal plays %0d", sig_t.size()));
    if (sig_t.size() == 2) check(sig_t[1] - sig_t[0] == 80_000_000, "signal spacing 1 Hz");
    check(play_t.size() == 5002 + 2, $sformatf("plays %0d, expected 5002 background + 2 signal", play_t.size()));
    foreach (pulses[i]) begin
      automatic int e = 5002 + 2 * row_pulses(12 + i);
      check(pulses[i] == e, $sformatf("muon line %0d pulses %0d expected %0d", i, pulses[i], e));
    end
    check(n_ovr == 0, "no slot dropped at the published rates");
    $display("muon 1 Hz: plays=%0d signal=%0d", play_t.size(), sig_t.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (160_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
