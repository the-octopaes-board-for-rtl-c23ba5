// rate_timer: programmable period counter that paces the page plays.
//
// While en is high the counter runs from 0 to period-1 and wraps; tick is high
// in every cycle the counter is 0, so the first tick comes on the first
// enabled cycle and then one every `period` cycles. Dropping en clears the
// counter, so boards that are enabled in the same cycle tick in step.
// The paper lists the rates (5 Hz, 10 Hz, 1 kHz, 100 kHz standalone; 5 kHz
// background and 1 or 10 Hz signal in muon mode); producing a rate as "one
// page play per period" is this design's choice. At 80 MHz a period of
// 16,000,000 cycles is 5 Hz and 800 cycles is 100 kHz.
//
// Timing: tick is combinational from the counter register; a change of period
// takes effect at the next wrap or at once if the counter is already past it.
module rate_timer #(
  parameter int unsigned PERIOD_W = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic [PERIOD_W-1:0] period,   // cycles, >= 1
  output logic                tick
);

  logic [PERIOD_W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  cnt <= '0;
    else if (!en)                cnt <= '0;
    else if (cnt + 1'b1 >= period) cnt <= '0;
    else                         cnt <= cnt + 1'b1;
  end

  assign tick = en && (cnt == '0);

endmodule
