// tb_octopaes_du: a full detection unit of emulation boards.
//
// 18 DOMs, each with a Small and a Large board, are built from 36 copies of
// the top with all defaults (80 MHz, 256-digit rows). They share the clock
// and one start line, as in the parallel master/slave setup. Each board gets
// its own background page 0 (one 25 ns pulse per row at a random place), the
// common calibration page 1 (one pulse on rows 0 and 12), and a signal page 37
// holding a synthetic muon: DOM k (1..18) is hit 4k + 8 digits (50 ns per
// DOM) into the page, with 1 + (k mod 3) pulses on consecutive PMT rows
// starting at row 5k mod 31. This is test data made up for the check, not a
// physical calculation.
//
// Phase 1, muon mode: the signal timer ticks with the first slot, so slot 0
// plays background then signal on every board. Every output of every board
// is compared in every clock, for 16,700 clocks (slot 0 and the start of slot
// 1), with a model working only from the start edge. The test also collects
// the cycle of each DOM's first signal hit and checks that the muon delays
// come out as written: 4 clocks per DOM.
// Phase 2, standalone with the calibration page: output 0 of all 36 boards
// must rise in the same clock (0 ns board-to-board delay in the logic;
// published target below 10 ns).
module tb_octopaes_du;
  timeunit 1ns; timeprecision 100ps;

  localparam int NB = 36;          // board b: DOM b/2 + 1, Large when b is odd
  localparam int LAT = 7;

  logic clk = 1'b0;
  always #6.25 clk = ~clk;

  logic        rst_n = 1'b1, ext_run = 1'b0, muon_mode = 1'b1, sig_rate_sel = 1'b1;
  logic [1:0]  rate_sel = 2'd3;
  logic [11:0] dip_addr = {7'd37, 5'd0};
  logic        mem_we = 1'b0;
  logic [14:0] mem_waddr = '0;
  logic [31:0] mem_wdata [NB];
  logic [18:0] pmt [NB];

  logic [31:0] pg [NB][3][256];    // [board][0 bg, 1 calibration, 2 signal][digit]
  int checks = 0, failures = 0;
  int edge_n = 0;

  for (genvar b = 0; b < NB; b++) begin : g_board
    logic [3:0] unused;
    logic       line;
    octopaes_top u_board (
      .clk, .rst_n, .btn_start(1'b0), .ext_run, .ext_sel(1'b1),
      .chain_mode(2'd0), .clk_line_in(1'b0), .clk_line_out(line),
      .muon_mode, .large_mode(1'(b % 2)), .rate_sel, .sig_rate_sel, .dip_addr,
      .bg_page(7'd0), .mem_we, .mem_waddr, .mem_wdata(mem_wdata[b]),
      .pmt_out(pmt[b]), .running(unused[0]), .playing(unused[1]),
      .overrun(unused[2]), .sig_start(unused[3])
    );
  end

  always @(posedge clk) edge_n <= edge_n + 1;

  function automatic logic [18:0] map_rows(input logic [31:0] r, input logic lg);
    logic [18:0] o = '0;
    if (lg) for (int i = 0; i < 19; i++) o[i] = r[12 + i];
    else    for (int i = 0; i < 12; i++) o[i] = r[i];
    return o;
  endfunction

  // muon mode, slot 0 and following: background at rel, signal 258 later
  function automatic logic [31:0] model(input int b, input int rel);
    int off;
    if (rel < 0) return '0;
    off = rel % 16_000;
    if (off < 256) return pg[b][0][off];
    if (rel < 16_000 && off >= 258 && off < 514) return pg[b][2][off - 258];
    return '0;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    int e0, first_hit [18];
    // pages
    for (int b = 0; b < NB; b++)
      for (int q = 0; q < 3; q++)
        for (int d = 0; d < 256; d++) pg[b][q][d] = '0;
    for (int b = 0; b < NB; b++) begin
      automatic int k = b / 2 + 1;
      for (int r = 0; r < 32; r++) begin
        automatic int pos = $urandom_range(254);
        pg[b][0][pos][r] = 1'b1; pg[b][0][pos + 1][r] = 1'b1;
      end
      pg[b][1][100][0] = 1'b1;  pg[b][1][101][0] = 1'b1;
      pg[b][1][100][12] = 1'b1; pg[b][1][101][12] = 1'b1;
      for (int n = 0; n < 1 + k % 3; n++) begin
        automatic int row = (5 * k + n) % 31;
        pg[b][2][4 * k + 8][row] = 1'b1; pg[b][2][4 * k + 9][row] = 1'b1;
      end
    end
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int q = 0; q < 3; q++)
      for (int d = 0; d < 256; d++) begin
        @(negedge clk);
        mem_we = 1'b1;
        mem_waddr = {(q == 2) ? 7'd37 : 7'(q), 8'(d)};
        for (int b = 0; b < NB; b++) mem_wdata[b] = pg[b][q][d];
      end
    @(negedge clk); mem_we = 1'b0;

    // phase 1: muon
    repeat (5) @(negedge clk);
    ext_run = 1'b1; e0 = edge_n + LAT;
    foreach (first_hit[k]) first_hit[k] = -1;
    for (int c = 0; c < 16_700; c++) begin
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        automatic logic [31:0] r = model(b, edge_n - e0);
        check(pmt[b] === map_rows(r, 1'(b % 2)),
              $sformatf("board %0d edge %0d: %h exp %h", b, edge_n, pmt[b], map_rows(r, 1'(b % 2))));
        // first signal hit of the DOM (either board), inside the signal play
        if (edge_n - e0 >= 258 && edge_n - e0 < 514 && pmt[b] != '0 && first_hit[b / 2] < 0 &&
            (pg[b][2][edge_n - e0 - 258] != '0))
          first_hit[b / 2] = edge_n - e0 - 258;
      end
    end
    for (int k = 1; k <= 18; k++)
      check(first_hit[k - 1] == 4 * k + 8,
            $sformatf("DOM %0d first signal hit at digit %0d, expected %0d", k, first_hit[k - 1], 4 * k + 8));
    @(negedge clk); ext_run = 1'b0;
    repeat (20) @(negedge clk);

    // phase 2: calibration page on every board
    muon_mode = 1'b0; dip_addr = {7'd1, 5'd0};
    @(negedge clk); ext_run = 1'b1;
    begin
      int rise [NB];
      foreach (rise[b]) rise[b] = -1;
      for (int c = 0; c < 400; c++) begin
        @(negedge clk);
        for (int b = 0; b < NB; b++) begin
          if (pmt[b][0] && rise[b] < 0) rise[b] = edge_n;
          check(pmt[b][18:1] == '0, $sformatf("board %0d calibration: other lines active", b));
        end
      end
      for (int b = 0; b < NB; b++)
        check(rise[b] >= 0 && rise[b] == rise[0], $sformatf("board %0d calibration pulse at %0d, board 0 at %0d", b, rise[b], rise[0]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
