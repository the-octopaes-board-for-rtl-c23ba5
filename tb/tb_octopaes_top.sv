// tb_octopaes_top: end-to-end test of the emulation firmware at reduced size.
//
// The top runs with a 1.6 MHz "digit clock" rate constant and 16-digit rows,
// so every period shrinks by 50x (5 kHz background = 320 cycles, 10 Hz signal
// = 160,000 cycles, 100 kHz = 16 cycles) while the logic is unchanged. All
// 128 pages are loaded with patterns made in the testbench: page 0 a
// background page (one "11" pulse per row at a random place), page 1 a
// calibration page (one pulse, same place, on rows 0 and 12 only), the rest
// random. A model in the testbench computes, for every clock, which digit of
// which page must be on each PMT output, from the start edge and the periods
// alone, and every clock is compared.
//
// Phases: (A) slave start from the external line, muon mode, Large board,
// signal at 10 Hz: two signal plays (slot 0 and slot 500) and 520 background
// slots are checked, and the start latency of 7 edges; (B) external stop;
// (C) master standalone, button start/stop, 1 kHz, Small board, calibration
// page; (D) standalone 100 kHz with 16-digit pages, which is shorter than a
// play, so every second slot is dropped and flagged as overrun; Large board,
// calibration page; (E) a master board driving a gated clock line and a
// slave run from it: start, pause and resume by the master's button, the
// master checked against the model in clock-line time, the slave required to
// equal the master in every clock, through two signal plays. Each mechanism
// is counted and must occur.
module tb_octopaes_top;
  timeunit 1ns; timeprecision 100ps;

  localparam int unsigned CLK_HZ = 1_600_000;
  localparam int unsigned ND = 16;
  localparam int unsigned DB = 16;
  localparam int unsigned AW = 7 + $clog2(ND);
  localparam int LAT = 7;      // ext_run edge -> digit 0 on pmt_out, clock edges

  logic clk = 1'b0;
  always #6.25 clk = ~clk;

  logic        rst_n = 1'b1, btn_start = 1'b0, ext_run = 1'b0, ext_sel = 1'b1;
  logic        muon_mode = 1'b0, large_mode = 1'b1, sig_rate_sel = 1'b1;
  logic [1:0]  rate_sel = 2'd0;
  logic [11:0] dip_addr = '0;
  logic [6:0]  bg_page = '0;
  logic        mem_we = 1'b0;
  logic [AW-1:0] mem_waddr = '0;
  logic [31:0] mem_wdata = '0;
  logic [18:0] pmt_out;
  logic        running, playing, overrun, sig_start;
  logic [1:0]  chain_mode = 2'd0;
  logic        clk_line_in = 1'b0, clk_line_out;

  octopaes_top #(.CLK_HZ(CLK_HZ), .N_DIGITS_P(ND), .DEBOUNCE_CYCLES(DB)) dut (.*);

  // daisy chain for phase E: a master that gates its clock line, a slave run
  // from that line. Both share the pattern loading and the DIP settings.
  logic        btn_m = 1'b0, m_line, s_line;
  logic [18:0] m_pmt, s_pmt;
  logic        m_running, s_running;
  logic [3:0]  m_unused, s_unused;
  octopaes_top #(.CLK_HZ(CLK_HZ), .N_DIGITS_P(ND), .DEBOUNCE_CYCLES(DB)) u_master (
    .clk, .rst_n, .btn_start(btn_m), .ext_run(1'b0), .ext_sel(1'b0),
    .chain_mode(2'd1), .clk_line_in(1'b0), .clk_line_out(m_line),
    .muon_mode, .large_mode, .rate_sel, .sig_rate_sel, .dip_addr, .bg_page,
    .mem_we, .mem_waddr, .mem_wdata, .pmt_out(m_pmt), .running(m_running),
    .playing(m_unused[0]), .overrun(m_unused[1]), .sig_start(m_unused[2])
  );
  octopaes_top #(.CLK_HZ(CLK_HZ), .N_DIGITS_P(ND), .DEBOUNCE_CYCLES(DB)) u_slave (
    .clk, .rst_n, .btn_start(1'b0), .ext_run(1'b0), .ext_sel(1'b0),
    .chain_mode(2'd2), .clk_line_in(m_line), .clk_line_out(s_line),
    .muon_mode, .large_mode, .rate_sel, .sig_rate_sel, .dip_addr, .bg_page,
    .mem_we, .mem_waddr, .mem_wdata, .pmt_out(s_pmt), .running(s_running),
    .playing(s_unused[0]), .overrun(s_unused[1]), .sig_start(s_unused[2])
  );
  int g_n = 0;                       // rising edges on the master's clock line
  always @(posedge m_line) if (rst_n) g_n <= g_n + 1;
  int n_chain_start = 0, n_chain_pause = 0, n_chain_sig = 0;
  always @(posedge m_line) if (rst_n && m_unused[2]) n_chain_sig++;

  logic [31:0] pages [128][ND];
  int checks = 0, failures = 0;
  int edge_n = 0;
  int n_bg = 0, n_sig = 0, n_ovr = 0, n_plays = 0, n_btn_start = 0, n_ext_start = 0;
  int n_large = 0, n_small = 0, n_calib = 0;

  always @(posedge clk) edge_n <= edge_n + 1;
  always @(posedge clk) begin
    if (rst_n && overrun) n_ovr++;
    if (rst_n && sig_start) n_sig++;
  end

  function automatic logic [18:0] map_rows(input logic [31:0] r, input logic lg);
    logic [18:0] o = '0;
    if (lg) for (int i = 0; i < 19; i++) o[i] = r[12 + i];
    else    for (int i = 0; i < 12; i++) o[i] = r[i];
    return o;
  endfunction

  // expected rows `rel` edges after digit 0 of slot 0
  function automatic logic [31:0] model(input int rel, input int p_slot, input int p_sig,
                                        input bit muon, input int bgp, input int sigp);
    int k, off;
    if (rel < 0) return '0;
    k = rel / p_slot; off = rel % p_slot;
    if (off < ND) return pages[bgp][off];
    if (muon && ((k * p_slot) % p_sig == 0) && off >= ND + 2 && off < 2 * ND + 2)
      return pages[sigp][off - ND - 2];
    return '0;
  endfunction

  task automatic cmp(input logic [18:0] e, input string what);
    checks++;
    if (pmt_out !== e) begin
      failures++;
      if (failures < 20) $display("FAIL %s edge %0d: got %h exp %h", what, edge_n, pmt_out, e);
    end
  endtask

  // run the model against the outputs for `n` clocks from start edge e0
  task automatic check_window(input int e0, input int n, input int p_slot, input int p_sig,
                              input bit muon, input int bgp, input int sigp, input string what);
    for (int c = 0; c < n; c++) begin
      logic [31:0] r;
      int rel;
      @(negedge clk);
      rel = edge_n - e0;
      r = model(rel, p_slot, p_sig, muon, bgp, sigp);
      if (rel >= 0 && (rel % p_slot) == 0) n_plays++;
      if (rel >= 0 && (rel % p_slot) == 0 && muon) n_bg++;
      if (r[0] && r[12] && (r & ~32'h1001) == 0) n_calib++;
      if (large_mode) n_large++; else n_small++;
      cmp(map_rows(r, large_mode), what);
    end
  endtask

  // edge count at which `running` rose; digit 0 of slot 0 follows 4 edges later
  task automatic wait_run_rise(output int e);
    do @(negedge clk); while (!running);
    e = edge_n;
  endtask

  task automatic press_m();
    @(negedge clk); btn_m = 1'b1;
    repeat (DB + 6) @(negedge clk);
    btn_m = 1'b0;
    repeat (DB + 6) @(negedge clk);
  endtask

  // phase E: the master follows the model in line-edge time (digit 0 of slot 0
  // four line edges after the first), the slave equals the master every clock
  bit chain_stop;
  task automatic chain_checker();
    while (!chain_stop) begin
      logic [31:0] r;
      @(negedge clk);
      r = model(g_n - 4, CLK_HZ / 5000, CLK_HZ / 10, 1'b1, 0, 37);
      checks++;
      if (m_pmt !== map_rows(r, 1'b1)) begin
        failures++;
        if (failures < 20) $display("FAIL chain master at line edge %0d: %h exp %h", g_n, m_pmt, map_rows(r, 1'b1));
      end
      checks++;
      if (s_pmt !== m_pmt) begin
        failures++;
        if (failures < 20) $display("FAIL chain slave %h master %h", s_pmt, m_pmt);
      end
    end
  endtask

  task automatic press_button();
    @(negedge clk); btn_start = 1'b1;
    repeat (DB + 6) @(negedge clk);
    btn_start = 1'b0;
    repeat (DB + 6) @(negedge clk);
  endtask

  initial begin
    int e_set;
    // pattern generation
    for (int p = 0; p < 128; p++)
      for (int d = 0; d < ND; d++) pages[p][d] = $urandom();
    for (int d = 0; d < ND; d++) begin pages[0][d] = '0; pages[1][d] = '0; end
    for (int r = 0; r < 32; r++) begin
      automatic int pos = $urandom_range(ND - 2);
      pages[0][pos][r] = 1'b1; pages[0][pos + 1][r] = 1'b1;
    end
    pages[1][5][0] = 1'b1; pages[1][6][0] = 1'b1; pages[1][5][12] = 1'b1; pages[1][6][12] = 1'b1;

    #1 rst_n = 1'b0;   // a falling edge, so the asynchronous resets act on
    repeat (3) @(posedge clk);   // blocks that see no clock edge yet
    rst_n = 1'b1;
    for (int p = 0; p < 128; p++)
      for (int d = 0; d < ND; d++) begin
        @(negedge clk); mem_we = 1'b1; mem_waddr = AW'(p * ND + d); mem_wdata = pages[p][d];
      end
    @(negedge clk); mem_we = 1'b0;

    // (A) slave, muon mode: background page 0 at 5 kHz, signal page 37 at 10 Hz
    ext_sel = 1'b1; muon_mode = 1'b1; large_mode = 1'b1; sig_rate_sel = 1'b1;
    bg_page = 7'd0; dip_addr = {7'd37, 5'd0};
    repeat (10) @(negedge clk);
    ext_run = 1'b1; e_set = edge_n; n_ext_start++;
    check_window(e_set + LAT, 500 * 320 + 20 * 320, CLK_HZ / 5000, CLK_HZ / 10, 1'b1, 0, 37,
                 "A muon");
    checks++;
    if (n_sig != 2) begin failures++; $display("FAIL signal plays %0d, expected 2", n_sig); end

    // (B) external stop: outputs quiet within 8 clocks and stay quiet
    @(negedge clk); ext_run = 1'b0;
    repeat (8) @(negedge clk);
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk); cmp('0, "B stopped");
    end

    // (C) master standalone, button, 1 kHz, Small board, calibration page 1
    ext_sel = 1'b0; muon_mode = 1'b0; large_mode = 1'b0; rate_sel = 2'd2;
    dip_addr = {7'd1, 5'd7};
    press_button();
    checks++;
    if (!running) begin failures++; $display("FAIL button did not start"); end
  end


  // (C)/(D) continue in a second process that waits for run to rise
  initial begin
    int e_run;
    wait (ext_sel == 1'b0);
    wait_run_rise(e_run);
    n_btn_start++;
    check_window(e_run + 4, 3 * 1600 + 100, 1600, 1, 1'b0, 1, 0, "C standalone 1k");
    press_button();
    checks++;
    if (running) begin failures++; $display("FAIL button did not stop"); end
    for (int c = 0; c < 200; c++) begin @(negedge clk); cmp('0, "C stopped"); end
    // (D) 100 kHz = 16 cycles, shorter than a 16-digit play: every 2nd slot drops
    large_mode = 1'b1; rate_sel = 2'd3;
    fork
      press_button();
      begin
        wait_run_rise(e_run);
        n_btn_start++;
        check_window(e_run + 4, 20 * 32, 32, 1, 1'b0, 1, 0, "D 100k overrun");
      end
    join
    checks++;
    if (n_ovr < 15) begin failures++; $display("FAIL overruns %0d", n_ovr); end
    press_button();  // stop standalone board

    // (E) clock-line daisy chain, muon mode, Large: start, pause, resume
    muon_mode = 1'b1; large_mode = 1'b1; sig_rate_sel = 1'b1; bg_page = 7'd0;
    dip_addr = {7'd37, 5'd0};
    chain_stop = 1'b0;
    fork
      chain_checker();
      begin
        press_m();
        checks++;
        if (g_n == 0) begin failures++; $display("FAIL chain did not start"); end
        else n_chain_start++;
        repeat (3000) @(negedge clk);
        press_m();                       // stop: line must go quiet
        begin
          int g0;
          repeat (40) @(negedge clk);
          g0 = g_n;
          repeat (500) @(negedge clk);
          checks++;
          if (g_n != g0) begin failures++; $display("FAIL chain line still running"); end
          else n_chain_pause++;
        end
        press_m();                       // resume, run to the second signal
        wait (g_n > 160_000 + 400);
        chain_stop = 1'b1;
      end
    join
    checks++;
    if (n_chain_sig != 2) begin failures++; $display("FAIL chain signal plays %0d", n_chain_sig); end

    // every mechanism must have happened
    if (n_bg == 0)        begin failures++; $display("FAIL no background plays"); end
    if (n_sig == 0)       begin failures++; $display("FAIL no signal plays"); end
    if (n_ovr == 0)       begin failures++; $display("FAIL no overrun"); end
    if (n_btn_start < 2)  begin failures++; $display("FAIL button starts %0d", n_btn_start); end
    if (n_ext_start == 0) begin failures++; $display("FAIL no external start"); end
    if (n_large == 0 || n_small == 0) begin failures++; $display("FAIL Large/Small not both used"); end
    if (n_calib < 2)      begin failures++; $display("FAIL calibration digits %0d", n_calib); end
    if (n_chain_start == 0 || n_chain_pause == 0) begin failures++; $display("FAIL chain start/pause"); end
    checks += 8;
    $display("chain: starts=%0d pauses=%0d signal=%0d line_edges=%0d", n_chain_start, n_chain_pause, n_chain_sig, g_n);
    $display("mechanisms: bg_slots=%0d signal=%0d overrun=%0d button_starts=%0d ext_starts=%0d large_cycles=%0d small_cycles=%0d calib_digits=%0d plays=%0d",
             n_bg, n_sig, n_ovr, n_btn_start, n_ext_start, n_large, n_small, n_calib, n_plays);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (800_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
