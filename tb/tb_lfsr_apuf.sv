// tb_lfsr_apuf: runs the complete LFSR-APUF on random challenges and Base
// values and checks each response against an independent model: seed C1
// shifted C2*Base times through the reference Galois LFSR gives C_O, and the
// reference delay model gives the bit. Three instances: the stand-alone
// one-bit LFSR-APUF without jitter; an 8-bit-response instance (8
// sub-challenges, each one LFSR step after the previous); and a one-bit
// instance with jitter, where a bit whose delay difference is outside the
// jitter range must always come out right and stable. Also checks the
// latency formula, the obfuscated challenge output and the seed flag.
module tb_lfsr_apuf;
  import tb_ref_pkg::*;
  localparam int N = 64, C2W = 4, BW = 8, K = 8, NV = 5, NS = 8, NOISE = 8;
  localparam logic [N-1:0] POLY = 64'hD800_0000_0000_0000;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             start;
  logic [N+C2W-1:0] chal;
  logic [BW-1:0]    base;
  logic [K-1:0]     tu, td;

  logic busy1, done1, st1, bad1, busy8, done8, st8, bad8, busyn, donen, stn, badn;
  logic [0:0]   resp1, sm1, respn, smn;
  logic [NS-1:0] resp8, sm8;
  logic [N-1:0] co1, rco1, co8, rco8, con, rcon;

  lfsr_apuf #(.NOISE(0), .SEED(3)) dut1 (
    .clk, .rst_n, .start, .chal, .base, .poly(POLY), .tune_u(tu), .tune_d(td),
    .busy(busy1), .done(done1), .resp(resp1), .stable_mask(sm1), .resp_stable(st1),
    .c1_invalid(bad1), .co(co1), .resp_co(rco1));
  lfsr_apuf #(.NOISE(0), .SEED(3), .NSUB(NS)) dut8 (
    .clk, .rst_n, .start, .chal, .base, .poly(POLY), .tune_u(tu), .tune_d(td),
    .busy(busy8), .done(done8), .resp(resp8), .stable_mask(sm8), .resp_stable(st8),
    .c1_invalid(bad8), .co(co8), .resp_co(rco8));
  lfsr_apuf #(.NOISE(NOISE), .SEED(3)) dutn (
    .clk, .rst_n, .start, .chal, .base, .poly(POLY), .tune_u(tu), .tune_d(td),
    .busy(busyn), .done(donen), .resp(respn), .stable_mask(smn), .resp_stable(stn),
    .c1_invalid(badn), .co(con), .resp_co(rcon));

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t c1, cob, sub;
    int shifts, d, cyc, cyc1, cycn, ones;
    start = 0; chal = '0; base = '0; tu = '0; td = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    ones = 0;
    for (int t = 0; t < 60; t++) begin
      chal = {$urandom, $urandom, $urandom} & {(N+C2W){1'b1}};
      if (t == 0) chal[N-1:0] = '0;
      base = (t < 21) ? 8'(t) : 8'($urandom % 21);
      @(negedge clk);
      check("seed flag", bad1 == ((chal[N-1:0] == '0) || (chal[N-1:0] == '1)));
      start = 1;
      @(negedge clk);
      start = 0;
      c1 = vec_t'(chal[N-1:0]);
      shifts = int'(chal[N+C2W-1:N]) * int'(base);
      cob = lfsr_steps(c1, vec_t'(POLY), N, shifts);
      cyc = 1; cyc1 = 0; cycn = 0;
      while (!done8 && cyc < 5000) begin
        if (done1) cyc1 = cyc;
        if (donen) cycn = cyc;
        @(negedge clk);
        cyc++;
      end
      check("latency 1-bit", cyc1 == 2 + shifts + (2 * NV + 1));
      check("latency jitter instance", cycn == cyc1);
      check("latency 8-bit", cyc == 2 + shifts + NS * (2 * NV + 1));
      d = apuf_delta(3, 0, cob, N, 0, 0, K, 16);
      check("obfuscated challenge", rco1 == cob[N-1:0]);
      check("1-bit response", resp1[0] == (d < 0));
      check("1-bit stable without jitter", st1);
      if (resp1[0]) ones++;
      if (d > NOISE || d < -NOISE) begin
        check("jitter instance clear bit", respn[0] == (d < 0));
        check("jitter instance stable", stn);
      end
      sub = cob;
      for (int j = 0; j < NS; j++) begin
        d = apuf_delta(3, 0, sub, N, 0, 0, K, 16);
        check("sub-challenge bit", resp8[NS-1-j] == (d < 0));
        sub = lfsr_step(sub, vec_t'(POLY), N);
      end
      check("last sub-challenge", rco8 == lfsr_steps(cob, vec_t'(POLY), N, NS - 1));
    end
    $display("ones among 60 one-bit responses: %0d", ones);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
