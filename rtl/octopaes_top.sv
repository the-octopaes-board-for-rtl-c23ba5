// octopaes_top: OctoPAES photon-emulation firmware.
//
// The board replaces the 31 PMTs of a KM3NeT optical module: it plays stored
// hit patterns onto LVDS lines that the module's TDCs read as PMT hits. A page
// of the pattern store gives every PMT a row of 256 digits; the page is played
// at 80 MHz, so a 1 is 12.5 ns above threshold and "11" is the 25 ns pulse of a
// single photo-electron. The chain is
//
//   run_control -> rate_timer (slot, signal) -> emulation_fsm -> page_player
//               -> pattern_memory -> page_player -> channel_select -> pmt_out
//
// Modes (inputs, static while running):
//   ext_sel    0: master standalone, panel button starts/stops;
//              1: slave, run follows the external start/stop line.
//   muon_mode  0: the DIP-selected page is played at the rate chosen by
//                 rate_sel (5 Hz, 10 Hz, 1 kHz, 100 kHz);
//              1: the background page bg_page is played at 5 kHz and the
//                 DIP-selected signal page is added at 1 Hz or 10 Hz
//                 (sig_rate_sel).
//   large_mode 1: Large board, rows 12..30 on pmt_out[18:0];
//              0: Small board, rows 0..11 on pmt_out[11:0].
//   chain_mode CHAIN_OFF: everything runs from clk;
//              CHAIN_MASTER: the button (ext_sel = 0) or start line starts
//                 and stops a gated copy of clk, sent out on clk_line_out;
//                 the emulation core runs from that line as well;
//              CHAIN_SLAVE: the core runs from clk_line_in and is always
//                 enabled; the line is passed on through clk_line_out.
// In both chain modes the boards pause and resume on the same clock edges,
// so start and stop need no wire of their own (see clock_line_gate). The
// pattern store is always written from clk.
// The 12-bit DIP address is a row address in the 4096-row store; its upper 7
// bits select the page.
//
// The rates, page geometry, 80 MHz digit clock, Large/Small split and the
// 12-bit page address follow the paper. The paper describes standalone,
// slave and background/signal operation as separate firmware builds; here
// they are modes of one design; the clock-line chain uses a gated clock,
// which is this design's reading of "start and stop propagated through the
// clock line". The clock multiplexer below is static: chain_mode must only
// change while the board is held in reset. How a rate is produced (one page play per
// period), the pattern loading port (mem_*), bg_page as an input, and the
// rate_sel encoding are this design's choices. The clock (internal
// oscillator or external reference) is chosen on the board and arrives on clk.
//
// Timing: from ext_run rising (slave mode) to digit 0 of the first page on
// pmt_out: 7 clock edges (87.5 ns: 3 in run_control, 1 in emulation_fsm, 2 in
// page_player and memory, 1 in channel_select), the same on every board that
// shares clock and start line. Later pages start exactly one slot period
// apart; in muon mode the signal page starts N_DIGITS + 2 clocks after the
// background page of its slot.
module octopaes_top
  import octopaes_pkg::*;
#(
  parameter int unsigned CLK_HZ          = CLK_HZ_DEFAULT,
  parameter int unsigned N_DIGITS_P      = N_DIGITS,
  parameter int unsigned DEBOUNCE_CYCLES = 80_000,
  localparam int unsigned DW = $clog2(N_DIGITS_P),
  localparam int unsigned AW = PAGE_W + DW
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // start/stop
  input  logic                  btn_start,
  input  logic                  ext_run,
  input  logic                  ext_sel,
  // daisy-chained clock line carrying start/stop
  input  logic [1:0]            chain_mode,
  input  logic                  clk_line_in,
  output logic                  clk_line_out,
  // configuration (DIP switches)
  input  logic                  muon_mode,
  input  logic                  large_mode,
  input  logic [1:0]            rate_sel,
  input  logic                  sig_rate_sel,
  input  logic [DIP_ADDR_W-1:0] dip_addr,
  input  logic [PAGE_W-1:0]     bg_page,
  // pattern loading
  input  logic                  mem_we,
  input  logic [AW-1:0]         mem_waddr,
  input  logic [N_ROWS-1:0]     mem_wdata,
  // PMT hit lines to the LVDS drivers
  output logic [N_CH_LARGE-1:0] pmt_out,
  // status
  output logic                  running,
  output logic                  playing,
  output logic                  overrun,
  output logic                  sig_start
);

  localparam int unsigned P_5HZ   = CLK_HZ / 5;
  localparam int unsigned P_10HZ  = CLK_HZ / 10;
  localparam int unsigned P_1KHZ  = CLK_HZ / 1_000;
  localparam int unsigned P_100KHZ = CLK_HZ / 100_000;
  localparam int unsigned P_BG    = CLK_HZ / BG_RATE_HZ;
  localparam int unsigned P_SIG1  = CLK_HZ / 1;
  localparam int unsigned P_SIG10 = CLK_HZ / 10;

  logic              run, core_clk, core_run, gated_clk, quiet;
  logic [31:0]       slot_period, sig_period;
  logic              slot_tick, sig_tick;
  logic [PAGE_W-1:0] dip_page, fsm_bg_page;
  logic              play_go, play_done;
  logic [PAGE_W-1:0] play_page;
  logic              rd_en;
  logic [AW-1:0]     rd_addr;
  logic [N_ROWS-1:0] rd_data, rows;

  run_control #(.DEBOUNCE_CYCLES(DEBOUNCE_CYCLES)) u_run (
    .clk, .rst_n, .btn(btn_start), .ext_run, .ext_sel, .run
  );

  // clock line: master gates its clock, slave runs from and forwards the line
  assign quiet = !playing && (pmt_out == '0);

  clock_line_gate u_line (
    .clk, .rst_n, .run_req(run), .quiet, .clk_line(gated_clk)
  );

  always_comb begin
    unique case (chain_mode_e'(chain_mode))
      CHAIN_MASTER: begin core_clk = gated_clk;   clk_line_out = gated_clk;   core_run = 1'b1; end
      CHAIN_SLAVE:  begin core_clk = clk_line_in; clk_line_out = clk_line_in; core_run = 1'b1; end
      default:      begin core_clk = clk;         clk_line_out = 1'b0;        core_run = run;  end
    endcase
  end

  // emulation core, clocked by core_clk
  always_comb begin
    unique case (rate_sel_e'(rate_sel))
      RATE_5HZ:  slot_period = P_5HZ;
      RATE_10HZ: slot_period = P_10HZ;
      RATE_1KHZ: slot_period = P_1KHZ;
      default:   slot_period = P_100KHZ;
    endcase
    if (muon_mode) slot_period = P_BG;
    sig_period = sig_rate_sel ? P_SIG10 : P_SIG1;
  end

  rate_timer #(.PERIOD_W(32)) u_slot_timer (
    .clk(core_clk), .rst_n, .en(core_run), .period(slot_period), .tick(slot_tick)
  );

  rate_timer #(.PERIOD_W(32)) u_sig_timer (
    .clk(core_clk), .rst_n, .en(core_run && muon_mode), .period(sig_period), .tick(sig_tick)
  );

  assign dip_page    = dip_addr[DIP_ADDR_W-1 -: PAGE_W];
  assign fsm_bg_page = muon_mode ? bg_page : dip_page;

  emulation_fsm #(.PAGE_W(PAGE_W)) u_fsm (
    .clk(core_clk), .rst_n, .run(core_run), .muon_mode, .slot_tick, .sig_tick,
    .bg_page(fsm_bg_page), .sig_page(dip_page),
    .play_go, .play_page, .play_done, .overrun, .sig_start
  );

  page_player #(.N_PAGES(N_PAGES), .N_ROWS(N_ROWS), .N_DIGITS(N_DIGITS_P)) u_player (
    .clk(core_clk), .rst_n, .go(play_go), .page(play_page), .stop_play(!core_run),
    .rd_en, .rd_addr, .rd_data, .rows, .busy(playing), .done(play_done)
  );

  pattern_memory #(.N_PAGES(N_PAGES), .N_ROWS(N_ROWS), .N_DIGITS(N_DIGITS_P)) u_mem (
    .wclk(clk), .rclk(core_clk), .we(mem_we), .waddr(mem_waddr), .wdata(mem_wdata),
    .re(rd_en), .raddr(rd_addr), .rdata(rd_data)
  );

  channel_select #(.N_ROWS(N_ROWS), .N_OUT(N_CH_LARGE), .N_SMALL(N_CH_SMALL),
                   .LARGE_FIRST_ROW(LARGE_FIRST_ROW)) u_chsel (
    .clk(core_clk), .rst_n, .large_mode, .rows, .pmt_out
  );

  // started: run request of this board, always 1 for a chained slave
  assign running = (chain_mode_e'(chain_mode) == CHAIN_SLAVE) ? 1'b1 : run;

endmodule
