// emulation_fsm: decides which page is played in each time slot.
//
// Standalone mode (muon_mode = 0): every slot_tick plays bg_page, which the top
// connects to the DIP-selected page; the slot rate is the selected single
// rate. Muon mode (muon_mode = 1): every slot_tick (5 kHz) plays the
// background page; a sig_tick (1 or 10 Hz) sets a pending flag, and the next
// background play is followed directly by one play of the signal page, so the
// signal hits are added on top of an unchanged background rate. The paper says
// the state machine alternates background and signal pages; the "background
// then signal in the same slot" order and the pending flag are this design's
// choices.
//
// A slot_tick that arrives while a page is still playing is dropped and
// reported on `overrun` (only possible when the slot period is shorter than
// the page, or than background plus signal page). Dropping run aborts the
// play and clears the pending signal.
//
// Interface: play_go/play_page to the page player, play_done back. Timing:
// play_go is registered, one cycle after slot_tick; the signal play_go is
// is registered in the cycle play_done of the background page is seen, so the
// signal page starts three clocks (37.5 ns) after the last background digit.
module emulation_fsm #(
  parameter int unsigned PAGE_W = 7
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  input  logic              muon_mode,
  input  logic              slot_tick,
  input  logic              sig_tick,
  input  logic [PAGE_W-1:0] bg_page,
  input  logic [PAGE_W-1:0] sig_page,
  output logic              play_go,
  output logic [PAGE_W-1:0] play_page,
  input  logic              play_done,
  output logic              overrun,     // pulse: slot dropped
  output logic              sig_start    // pulse: signal page launched
);

  typedef enum logic [1:0] {S_IDLE, S_PLAY_BG, S_PLAY_SIG} state_e;

  state_e state;
  logic   sig_pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      sig_pending <= 1'b0;
      play_go     <= 1'b0;
      play_page   <= '0;
      overrun     <= 1'b0;
      sig_start   <= 1'b0;
    end else if (!run) begin
      state       <= S_IDLE;
      sig_pending <= 1'b0;
      play_go     <= 1'b0;
      overrun     <= 1'b0;
      sig_start   <= 1'b0;
    end else begin
      play_go   <= 1'b0;
      overrun   <= 1'b0;
      sig_start <= 1'b0;
      if (muon_mode && sig_tick) sig_pending <= 1'b1;

      unique case (state)
        S_IDLE: if (slot_tick) begin
          play_go   <= 1'b1;
          play_page <= bg_page;
          state     <= S_PLAY_BG;
        end
        S_PLAY_BG: begin
          if (slot_tick) overrun <= 1'b1;
          if (play_done) begin
            if (muon_mode && (sig_pending || sig_tick)) begin
              play_go     <= 1'b1;
              play_page   <= sig_page;
              sig_pending <= 1'b0;
              sig_start   <= 1'b1;
              state       <= S_PLAY_SIG;
            end else begin
              state <= S_IDLE;
            end
          end
        end
        S_PLAY_SIG: begin
          if (slot_tick) overrun <= 1'b1;
          if (play_done) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
