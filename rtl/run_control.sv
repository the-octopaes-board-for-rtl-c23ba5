// run_control: start/stop of the emulation.
//
// Two sources, selected by ext_sel. Master standalone (ext_sel = 0): the panel
// button is synchronised, debounced (it must hold a new level for
// DEBOUNCE_CYCLES clocks) and each press toggles run. Slave (ext_sel = 1): run
// follows an external start/stop level from the master logic board through a
// two-flop synchroniser only, so boards that share the clock and the start
// line all start in the same clock cycle. The two sources follow the paper;
// the level encoding of the external line, toggle-per-press and the 1 ms
// debounce are this design's choices.
//
// Timing: external path, ext_run -> run in 3 clocks (2 synchroniser flops +
// output register). Button path: press accepted DEBOUNCE_CYCLES + 3 clocks
// after the level settles. Changing ext_sel changes run at the next clock.
module run_control #(
  parameter int unsigned DEBOUNCE_CYCLES = 80_000   // 1 ms at 80 MHz
) (
  input  logic clk,
  input  logic rst_n,
  input  logic btn,       // panel button, high while pressed
  input  logic ext_run,   // external start/stop level, high = run
  input  logic ext_sel,   // 0 = panel button, 1 = external
  output logic run
);

  localparam int unsigned CW = $clog2(DEBOUNCE_CYCLES + 1);

  logic [1:0]    btn_sync, ext_sync;
  logic          btn_stable, btn_stable_q, run_btn;
  logic [CW-1:0] db_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      btn_sync     <= '0;
      ext_sync     <= '0;
      btn_stable   <= 1'b0;
      btn_stable_q <= 1'b0;
      db_cnt       <= '0;
      run_btn      <= 1'b0;
      run          <= 1'b0;
    end else begin
      btn_sync <= {btn_sync[0], btn};
      ext_sync <= {ext_sync[0], ext_run};

      // debounce: accept a new button level after it held DEBOUNCE_CYCLES
      if (btn_sync[1] == btn_stable) begin
        db_cnt <= '0;
      end else if (db_cnt == CW'(DEBOUNCE_CYCLES - 1)) begin
        db_cnt     <= '0;
        btn_stable <= btn_sync[1];
      end else begin
        db_cnt <= db_cnt + 1'b1;
      end

      btn_stable_q <= btn_stable;
      if (btn_stable && !btn_stable_q) run_btn <= !run_btn;

      run <= ext_sel ? ext_sync[1] : run_btn;
    end
  end

endmodule
