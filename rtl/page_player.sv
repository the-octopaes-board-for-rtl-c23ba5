// page_player: plays one page of the pattern store onto the row outputs.
//
// A go pulse (accepted only when idle) latches the page number and starts a
// digit counter at 0. Each clock the player reads word {page, digit} from the
// pattern memory and advances the digit, so the N_DIGITS digits of every row
// come out one per clock: at 80 MHz a digit lasts 12.5 ns, a 1 keeps the PMT
// line above threshold for that time and "11" makes the 25 ns single
// photo-electron pulse. Outside a play the rows are forced to 0. stop_play stops a
// play at once (emulation stopped).
//
// Timing: go in cycle t -> read address issued from the register in t+1 ->
// first digit on `rows` in t+2. `done` is high with the last digit. A new go
// is accepted in the cycle done is high, so pages can follow back to back
// without a gap. Reading one column per clock follows the paper; the
// latency and the idle-zero behaviour are this design's choices.
module page_player #(
  parameter int unsigned N_PAGES  = 128,
  parameter int unsigned N_ROWS   = 32,
  parameter int unsigned N_DIGITS = 256,
  localparam int unsigned PW = $clog2(N_PAGES),
  localparam int unsigned DW = (N_DIGITS > 1) ? $clog2(N_DIGITS) : 1,
  localparam int unsigned AW = PW + DW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              go,
  input  logic [PW-1:0]     page,
  input  logic              stop_play,
  // pattern memory read port
  output logic              rd_en,
  output logic [AW-1:0]     rd_addr,
  input  logic [N_ROWS-1:0] rd_data,
  // played digits
  output logic [N_ROWS-1:0] rows,
  output logic              busy,
  output logic              done
);

  localparam logic [DW-1:0] LAST = DW'(N_DIGITS - 1);

  logic [PW-1:0] page_q;
  logic [DW-1:0] digit_q;
  logic          valid_q;   // rd_data holds a digit of the current play
  logic          last_q;    // ... and it is the last one

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      page_q  <= '0;
      digit_q <= '0;
      valid_q <= 1'b0;
      last_q  <= 1'b0;
    end else if (stop_play) begin
      busy    <= 1'b0;
      valid_q <= 1'b0;
      last_q  <= 1'b0;
    end else begin
      valid_q <= busy;
      last_q  <= busy && (digit_q == LAST);
      if (busy) begin
        if (digit_q == LAST) busy <= 1'b0;
        digit_q <= digit_q + 1'b1;
      end else if (go) begin
        busy    <= 1'b1;
        page_q  <= page;
        digit_q <= '0;
      end
    end
  end

  assign rd_en   = busy;
  assign rd_addr = {page_q, digit_q};
  assign rows    = valid_q ? rd_data : '0;
  assign done    = last_q;

  // A go while a page is still being read is ignored; the controller must not
  // issue one.
  a_go_when_idle: assert property (@(posedge clk) disable iff (!rst_n || stop_play)
                                   go |-> !busy)
    else $error("page_player: go while busy");

endmodule
