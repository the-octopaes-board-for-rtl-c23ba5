// octopaes_pkg: constants and types shared by the OctoPAES emulation firmware.
//
// The pattern store (the "MIF" image) holds 128 pages; each page has 32 rows of
// 256 digits. Rows 0..30 are the 31 PMTs of a KM3NeT optical module, row 31 is
// reserved for an acoustic waveform. Digits are played at 80 MHz, one per
// 12.5 ns. These numbers follow the published description of the board; the
// rate-select encoding and the page/row split of the 12-bit DIP address are
// this design's choices.
package octopaes_pkg;

  localparam int unsigned CLK_HZ_DEFAULT = 80_000_000;  // digit clock
  localparam int unsigned N_PAGES        = 128;
  localparam int unsigned N_ROWS         = 32;
  localparam int unsigned N_DIGITS       = 256;
  // rows 0..30 are PMTs, row 31 (acoustic) is not played out by this design
  localparam int unsigned N_CH_LARGE     = 19;          // PMTs emulated by a Large board
  localparam int unsigned N_CH_SMALL     = 12;          // PMTs emulated by a Small board
  localparam int unsigned LARGE_FIRST_ROW = N_CH_SMALL; // Large board starts at row 12

  localparam int unsigned PAGE_W     = $clog2(N_PAGES);      // 7
  localparam int unsigned ROWSEL_W   = $clog2(N_ROWS);       // 5
  localparam int unsigned DIP_ADDR_W = PAGE_W + ROWSEL_W;    // 12-bit DIP address

  // Emulation rates (Hz)
  localparam int unsigned BG_RATE_HZ = 5_000;     // background in muon mode

  // Standalone single-rate selection
  typedef enum logic [1:0] {
    RATE_5HZ   = 2'd0,
    RATE_10HZ  = 2'd1,
    RATE_1KHZ  = 2'd2,
    RATE_100KHZ = 2'd3
  } rate_sel_e;

  function automatic int unsigned rate_hz(rate_sel_e sel);
    case (sel)
      RATE_5HZ:   return 5;
      RATE_10HZ:  return 10;
      RATE_1KHZ:  return 1_000;
      default:    return 100_000;
    endcase
  endfunction

  // Position of the board in a daisy chain whose clock line carries start/stop
  typedef enum logic [1:0] {
    CHAIN_OFF    = 2'd0,   // board clock, start/stop from button or start line
    CHAIN_MASTER = 2'd1,   // drives the gated clock line, runs from it
    CHAIN_SLAVE  = 2'd2    // runs from the incoming clock line, passes it on
  } chain_mode_e;

  // Signal rate in muon mode: 0 -> 1 Hz, 1 -> 10 Hz
  function automatic int unsigned sig_rate_hz(logic sel);
    return sel ? 10 : 1;
  endfunction

endpackage
