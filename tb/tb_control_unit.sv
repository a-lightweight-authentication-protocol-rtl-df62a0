// tb_control_unit: drives the control unit with random C2 and Base and
// plays the APUF and vote/mask unit itself (a launch on each rising S_A, the
// voted bit one cycle after the NV-th launch, taken from a random pattern).
// Checks: one LFSR load per start; exactly C2*Base S_L pulses before the
// first S_A; one extra S_L between sub-challenges and none while S_A is
// high; NV S_A rising edges per sub-challenge; the collected response and
// stable mask; and that `done` is seen 1 + C2*Base + NSUB*(2*NV+1) edges
// after the edge that takes `start`.
module tb_control_unit;
  localparam int NSUB = 4, NV = 3, C2W = 4, BW = 8;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            start, r_valid, r_bit, r_stable, vote_clear;
  logic            lfsr_load, sl, sa, busy, done;
  logic [C2W-1:0]  c2;
  logic [BW-1:0]   base;
  logic [NSUB-1:0] resp, stable_mask;

  control_unit #(.NSUB(NSUB), .NV(NV), .C2_W(C2W), .BASE_W(BW)) dut (.*);

  // stand-in for APUF + vote unit
  logic [NSUB-1:0] pat_r, pat_s;
  logic sa_q, launch;
  int   votes, subs_answered;
  always_ff @(posedge clk) begin
    sa_q    <= sa;
    launch  <= sa && !sa_q;
    r_valid <= 1'b0;
    if (vote_clear) votes <= 0;
    else if (launch) begin
      if (votes == NV - 1) begin
        r_valid  <= 1'b1;
        r_bit    <= pat_r[NSUB-1-subs_answered];
        r_stable <= pat_s[NSUB-1-subs_answered];
        subs_answered <= subs_answered + 1;
      end
      votes <= votes + 1;
    end
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_load, n_sl_before, n_sl_after, n_sa_rise, cyc, expect_cyc;
    logic seen_sa, prev_sa;
    start = 0; c2 = 0; base = 0; votes = 0; subs_answered = 0;
    r_bit = 0; r_stable = 0; pat_r = 0; pat_s = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      c2 = 4'($urandom); base = (t < 3) ? 8'(t) : 8'($urandom % 24);
      if (t == 3) begin c2 = 4'hF; base = 8'd255; end
      pat_r = NSUB'($urandom); pat_s = NSUB'($urandom);
      subs_answered = 0;
      @(negedge clk);
      check("idle before start", !busy);
      start = 1;
      #1;
      n_load = 0; n_sl_before = 0; n_sl_after = 0; n_sa_rise = 0;
      seen_sa = 0; prev_sa = 0; cyc = 0;
      expect_cyc = 2 + int'(c2) * int'(base) + NSUB * (2 * NV + 1);
      do begin
        if (lfsr_load) n_load++;
        if (sl && !seen_sa) n_sl_before++;
        if (sl && seen_sa) n_sl_after++;
        if (sa && sl) check("no shift during launch", 1'b0);
        if (sa && !prev_sa) n_sa_rise++;
        if (sa) seen_sa = 1;
        prev_sa = sa;
        @(negedge clk);
        start = 0;
        cyc++;
      end while (!done && cyc < 5000);
      check("done latency", cyc == expect_cyc);
      if (cyc != expect_cyc) $display("cyc=%0d expect=%0d", cyc, expect_cyc);
      check("one load", n_load == 1);
      check("C2*Base shifts", n_sl_before == int'(c2) * int'(base));
      check("shift per later sub-challenge", n_sl_after == NSUB - 1);
      check("NV launches per sub-challenge", n_sa_rise == NSUB * NV);
      check("response", resp == pat_r);
      check("stable mask", stable_mask == pat_s);
      @(negedge clk);
      check("back to idle", !busy && !done);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
