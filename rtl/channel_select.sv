// channel_select: maps the page rows to the board's PMT outputs.
//
// Two boards sit on each DOM-emulating CLB: a Small board for 12 PMTs and a
// Large board for 19, chosen by a DIP switch. Both play the same page layout
// with 31 PMT rows; the Small board drives rows 0..11 on outputs 0..11 (outputs
// 12..18 held low), the Large board drives rows 12..30 on outputs 0..18. This
// split follows the paper's calibration page, which marks channel 0 for the
// Small and channel 12 for the Large board; that reading, the unused-output
// level and the output register are this design's choices. Row 31 (acoustic)
// is not routed here.
//
// Timing: one register stage, pmt_out follows rows by one clock. pmt_out goes
// to the LVDS drivers; a high level is a hit above the TDC threshold.
module channel_select #(
  parameter int unsigned N_ROWS          = 32,
  parameter int unsigned N_OUT           = 19,
  parameter int unsigned N_SMALL         = 12,
  parameter int unsigned LARGE_FIRST_ROW = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              large_mode,
  input  logic [N_ROWS-1:0] rows,
  output logic [N_OUT-1:0]  pmt_out
);

  logic [N_OUT-1:0] sel;

  always_comb begin
    for (int i = 0; i < N_OUT; i++) begin
      if (large_mode) sel[i] = rows[LARGE_FIRST_ROW + i];
      else            sel[i] = (i < N_SMALL) ? rows[i] : 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pmt_out <= '0;
    else        pmt_out <= sel;
  end

  initial begin
    if (LARGE_FIRST_ROW + N_OUT > N_ROWS)
      $fatal(1, "channel_select: Large rows exceed the page");
  end

endmodule
