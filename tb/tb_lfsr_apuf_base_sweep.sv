// tb_lfsr_apuf_base_sweep: the Base sweep the design is meant to be judged
// on, run on simulated chips. Five 64-stage LFSR-APUFs at their default
// parameters (one-bit response, 5 votes, jitter on) stand for five chips
// (SEED 1..5), and a sixth instance is the 32-stage variant with a 32-bit
// primitive polynomial. All six get the same random challenges (the 32-stage
// one gets the low 32 bits of C1 and the same C2) for every Base in
// {0, 1, 3, 5, 8, 10, 20}, and each challenge is applied twice.
//
// Before the sweep every instance is tuned the way the tuning blocks are
// meant to be used: with Base = 0 (plain APUF) the share of ones over 100
// random challenges is measured; while it is above 55 % the upper path is
// lengthened by one tuning step (set one more upper tuning bit, or first
// clear a lower one), while it is below 45 % the lower path is. The tuned share must be no further from one half
// than the untuned share, allowing for measurement noise, and at least one
// tuning bit must have been set on some instance.
//
// Checks, per challenge and instance: the latency 2 + C2*Base + (2*NV+1)
// cycles from the start cycle; the obfuscated challenge equals C1 stepped
// C2*Base times through the reference Galois LFSR; every bit whose delay
// difference lies outside the jitter range matches the reference delay model
// and is flagged stable. With Base = 0 the obfuscated challenge must be C1
// itself (plain APUF); with Base > 0 and C2 > 0 it must differ from C1. The
// chips must not all answer alike.
//
// Printed per Base, as figures of the behavioural model only: share of ones
// (randomness), mean pairwise Hamming distance between the five chips
// (uniqueness), agreement of the two applications (reliability), and the
// share of challenges where the LFSR-APUF answers differently from a plain
// APUF fed with C1 (how much the obfuscation changes the mapping).
module tb_lfsr_apuf_base_sweep;
  import tb_ref_pkg::*;
  import lfsr_apuf_pkg::*;
  localparam int N = PUF_STAGES, N32 = 32, C2W = C2_WIDTH, BW = BASE_WIDTH, K = 8, NV = VOTE_COUNT;
  localparam int NOISE = 8, CHIPS = 5, NCHAL = 300, NBASE = 7;
  localparam logic [N-1:0]   POLY   = POLY64_DEFAULT;
  localparam logic [N32-1:0] POLY_S = POLY32_DEFAULT;
  localparam int BASES [NBASE] = '{0, 1, 3, 5, 8, 10, 20};
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               start;
  logic [N+C2W-1:0]   chal;
  logic [N32+C2W-1:0] chal_s;
  logic [BW-1:0]      base;
  logic [K-1:0]       tu [CHIPS+1];
  logic [K-1:0]       td [CHIPS+1];

  logic [CHIPS:0]     busy, done, rst_ok, bad;
  logic [CHIPS:0]     resp, smask;
  logic [N-1:0]       co    [CHIPS];
  logic [N-1:0]       rco   [CHIPS];
  logic [N32-1:0]     co_s, rco_s;

  assign chal_s = {chal[N+C2W-1:N], chal[N32-1:0]};

  for (genvar g = 0; g < CHIPS; g++) begin : g_chip
    lfsr_apuf #(.SEED(g + 1)) dut (
      .clk, .rst_n, .start, .chal, .base, .poly(POLY), .tune_u(tu[g]), .tune_d(td[g]),
      .busy(busy[g]), .done(done[g]), .resp(resp[g +: 1]), .stable_mask(smask[g +: 1]),
      .resp_stable(rst_ok[g]), .c1_invalid(bad[g]), .co(co[g]), .resp_co(rco[g]));
  end
  lfsr_apuf #(.N(N32), .SEED(1)) dut32 (
    .clk, .rst_n, .start, .chal(chal_s), .base, .poly(POLY_S), .tune_u(tu[CHIPS]), .tune_d(td[CHIPS]),
    .busy(busy[CHIPS]), .done(done[CHIPS]), .resp(resp[CHIPS +: 1]),
    .stable_mask(smask[CHIPS +: 1]), .resp_stable(rst_ok[CHIPS]), .c1_invalid(bad[CHIPS]),
    .co(co_s), .resp_co(rco_s));

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one evaluation of all instances; returns the cycles from start to done
  task automatic run_once(output int cyc);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done[0] && cyc < 1000) begin
      @(negedge clk);
      cyc++;
    end
  endtask

  initial begin
    vec_t c1, c1s, cob, cobs;
    int shifts, cyc, d, ds, dplain;
    int ones, hd, agree, changed, evals, clear_bits, total_hd;
    logic [CHIPS:0] first;
    int cnt [CHIPS+1];
    int cnt0 [CHIPS+1];
    int lvl [CHIPS+1];
    int tuned_bits;
    start = 0; chal = '0; base = '0;
    for (int g = 0; g <= CHIPS; g++) begin
      tu[g] = '0; td[g] = '0; lvl[g] = 0;
    end
    total_hd = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // tuning with the plain APUF (Base = 0)
    tuned_bits = 0;
    for (int round = 0; round <= 2 * K; round++) begin
      for (int g = 0; g <= CHIPS; g++) cnt[g] = 0;
      for (int t = 0; t < 100; t++) begin
        chal = (N+C2W)'({$urandom, $urandom, $urandom});
        run_once(cyc);
        for (int g = 0; g <= CHIPS; g++) cnt[g] += int'(resp[g]);
      end
      if (round == 0) for (int g = 0; g <= CHIPS; g++) cnt0[g] = cnt[g];
      for (int g = 0; g <= CHIPS; g++) begin
        // lvl > 0: lvl upper bits set; lvl < 0: -lvl lower bits set
        if (cnt[g] > 55 && lvl[g] < K) begin
          lvl[g]++; tuned_bits++;
        end else if (cnt[g] < 45 && lvl[g] > -K) begin
          lvl[g]--; tuned_bits++;
        end
        tu[g] = (lvl[g] > 0) ? K'((1 << lvl[g]) - 1) : '0;
        td[g] = (lvl[g] < 0) ? K'((1 << -lvl[g]) - 1) : '0;
      end
    end
    for (int g = 0; g <= CHIPS; g++) begin
      $display("instance %0d: ones %0d%% untuned, %0d%% tuned (upper bits %b, lower bits %b)",
               g, cnt0[g], cnt[g], tu[g], td[g]);
      check("tuning moves the share of ones toward one half",
            (cnt[g] > 50 ? cnt[g] - 50 : 50 - cnt[g]) <=
            (cnt0[g] > 50 ? cnt0[g] - 50 : 50 - cnt0[g]) + 8);
    end
    check("tuning bits were set", tuned_bits > 0);
    for (int b = 0; b < NBASE; b++) begin
      ones = 0; hd = 0; agree = 0; changed = 0; evals = 0; clear_bits = 0;
      base = BW'(BASES[b]);
      for (int t = 0; t < NCHAL; t++) begin
        // C1 (both widths) neither all zeros nor all ones, as the server ensures
        do chal = (N+C2W)'({$urandom, $urandom, $urandom});
        while (chal[N-1:0] == '0 || chal[N-1:0] == '1 ||
               chal[N32-1:0] == '0 || chal[N32-1:0] == '1);
        c1  = vec_t'(chal[N-1:0]);
        c1s = vec_t'(chal[N32-1:0]);
        shifts = int'(chal[N+C2W-1:N]) * BASES[b];
        cob  = lfsr_steps(c1, vec_t'(POLY), N, shifts);
        cobs = lfsr_steps(c1s, vec_t'(POLY_S), N32, shifts);
        for (int rep = 0; rep < 2; rep++) begin
          run_once(cyc);
          check("latency", cyc == 2 + shifts + (2 * NV + 1));
          check("all instances done together", &done);
          for (int g = 0; g < CHIPS; g++) begin
            d = apuf_delta(g + 1, 0, cob, N, 32'(tu[g]), 32'(td[g]), K, 16);
            check("obfuscated challenge", rco[g] == cob[N-1:0]);
            if (d > NOISE || d < -NOISE) begin
              check("response bit", resp[g] == (d < 0));
              check("clear bit is stable", smask[g]);
              clear_bits++;
            end
            if (rep == 0) begin
              first[g] = resp[g];
              ones += int'(resp[g]);
              dplain = apuf_delta(g + 1, 0, c1, N, 32'(tu[g]), 32'(td[g]), K, 16);
              if (resp[g] != (dplain < 0)) changed++;
              evals++;
            end else if (resp[g] == first[g]) agree++;
          end
          ds = apuf_delta(1, 0, cobs, N32, 32'(tu[CHIPS]), 32'(td[CHIPS]), K, 16);
          check("32-stage obfuscated challenge", rco_s == cobs[N32-1:0]);
          if (ds > NOISE || ds < -NOISE) check("32-stage response bit", resp[CHIPS] == (ds < 0));
          if (rep == 0) begin
            for (int i = 0; i < CHIPS; i++)
              for (int j = i + 1; j < CHIPS; j++)
                if (resp[i] != resp[j]) hd++;
          end
        end
        if (BASES[b] == 0) check("Base 0 leaves C1 unchanged", cob == c1);
        else if (chal[N+C2W-1:N] != '0) check("Base > 0 moves the challenge", cob != c1);
      end
      total_hd += hd;
      check("clear bits were checked", clear_bits > 0);
      $display("Base=%0d: ones %0d/%0d, pairwise HD %0d/%0d, repeat agreement %0d/%0d, differs from plain APUF %0d/%0d",
               BASES[b], ones, evals, hd, NCHAL * CHIPS * (CHIPS - 1) / 2, agree, evals, changed, evals);
    end
    check("chips differ", total_hd > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
