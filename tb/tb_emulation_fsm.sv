// tb_emulation_fsm: self-checking test of the page-scheduling state machine.
//
// A scripted sequence of slot and signal ticks is applied, and a player model
// in the testbench answers each play_go with play_done ten cycles later. The
// testbench records every play_go (cycle, page), every overrun and sig_start
// pulse, and compares them with a list written out by hand from the intended
// behaviour: standalone plays on every slot and ignores signal ticks; a slot
// during a play is dropped and flagged; in muon mode a signal tick makes the
// next background play be followed, one cycle after its done, by the signal
// page; stopping clears the pending signal.
module tb_emulation_fsm;
  timeunit 1ns; timeprecision 100ps;

  localparam int L = 10;     // player model: done L cycles after go

  logic clk = 1'b0;
  always #6.25 clk = ~clk;

  logic       rst_n = 1'b0, run = 1'b0, muon_mode = 1'b0;
  logic       slot_tick = 1'b0, sig_tick = 1'b0;
  logic [6:0] bg_page = 7'd5, sig_page = 7'd9;
  logic       play_go, play_done = 1'b0, overrun, sig_start;
  logic [6:0] play_page;
  int checks = 0, failures = 0;
  int cyc = 0;
  int go_cyc[$], go_page[$], ovr_cyc[$], sig_cyc[$];
  int done_at = -1;

  emulation_fsm #(.PAGE_W(7)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  // player model and monitors, sampled mid-cycle
  always @(negedge clk) begin
    if (play_go) begin
      go_cyc.push_back(cyc); go_page.push_back(int'(play_page));
      done_at = cyc + L;
    end
    if (overrun)   ovr_cyc.push_back(cyc);
    if (sig_start) sig_cyc.push_back(cyc);
  end
  always @(negedge clk) play_done <= (cyc + 1 == done_at);

  // stimulus: a tick listed for cycle c is sampled by the clock edge that
  // starts cycle c, so a play_go it causes is seen in cycle c and a done seen
  // in cycle d causes a play_go seen in cycle d
  function automatic bit is_slot(int c);
    return c inside {10, 40, 70, 75, 120, 160, 200, 250, 280};
  endfunction
  function automatic bit is_sig(int c);
    return c inside {20, 100, 200, 245};
  endfunction

  always @(negedge clk) begin
    slot_tick <= is_slot(cyc + 1);
    sig_tick  <= is_sig(cyc + 1);
    muon_mode <= (cyc + 1 >= 90);
    run       <= (cyc + 1 >= 5) && !((cyc + 1) inside {[254:258]});
  end

  // one check per expected entry, plus one for the list length
  task automatic check_list(input string what, input int got[$], input int exp[$]);
    checks++;
    if (got.size() != exp.size()) begin
      failures++;
      $display("FAIL %s: %0d entries, expected %0d (%p)", what, got.size(), exp.size(), got);
    end
    foreach (exp[i]) begin
      checks++;
      if (i >= got.size() || got[i] != exp[i]) begin
        failures++;
        $display("FAIL %s[%0d]: expected %0d", what, i, exp[i]);
      end
    end
  endtask

  initial begin
    int exp_go_cyc[$]  = '{10, 40, 70, 120, 130, 160, 200, 210, 250, 280};
    int exp_go_page[$] = '{5, 5, 5, 5, 9, 5, 5, 9, 5, 5};
    int exp_ovr[$]     = '{75};
    int exp_sig[$]     = '{130, 210};
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    wait (cyc == 330);
    check_list("play_go cycles", go_cyc, exp_go_cyc);
    check_list("play_go pages", go_page, exp_go_page);
    check_list("overrun cycles", ovr_cyc, exp_ovr);
    check_list("sig_start cycles", sig_cyc, exp_sig);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
