// clock_line_gate: master end of a daisy-chained clock line that also carries
// start and stop.
//
// In the daisy-chain setup the master board sends its 80 MHz clock to the
// first slave, each slave passes it on, and start/stop travel on the same
// line. Here the line simply carries the clock while the emulation runs and
// is held low while it is stopped: every board in the chain, the master's
// own emulation core included, is clocked by the line, so all of them advance
// and pause on the same edges and stay in step without a separate start
// signal. The paper states only that start and stop are propagated through
// the clock line; this gating scheme is this design's choice.
//
// The gate opens as soon as run_req is high and closes, after run_req falls,
// at the first point where `quiet` is high (no page playing and all PMT lines
// low), so a pause never freezes a line in the middle of a hit. The gate
// register changes on the falling clock edge, while clk is low, so clk_line
// has no short pulses. A resumed chain continues where it paused.
//
// Interface: clk is the free-running board clock, clk_line the gated line.
// Timing: the first rising edge on clk_line is the first rising edge of clk
// that follows the falling edge at which run_req is seen high.
module clock_line_gate (
  input  logic clk,
  input  logic rst_n,
  input  logic run_req,   // start/stop request, clk domain
  input  logic quiet,     // emulation core idle with all outputs low
  output logic clk_line
);

  logic gate_q;

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n)       gate_q <= 1'b0;
    else if (run_req) gate_q <= 1'b1;
    else if (quiet)   gate_q <= 1'b0;
  end

  assign clk_line = clk & gate_q;

endmodule
