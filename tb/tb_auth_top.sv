// tb_auth_top: end-to-end run of one authentication link at the design's
// default sizes (64-stage LFSR-APUF with 64-bit responses, 140-bit covered
// messages with 10 filler bits). The testbench plays the parts of the
// server and database that are not logic: it picks challenges and Base
// values, keeps the CRPs the device reports as fully stable, and feeds the
// decrypted entries back during authentication.
//
// Sequence: registration of CRPs (checking every response bit outside the
// jitter range against an independent model of LFSR obfuscation and PUF delays); honest
// rounds, where the device must accept the server and the server must
// accept the device; rounds where the server offers a wrong r_i (the device
// must abort); rounds where the server expects a different r_j (the server
// must reject the device). Counted mechanisms, each required at least once:
// registration, masked (unstable) CRP, invalid seed flag, LFSR shifting with
// Base > 0, Base = 0, device accepts server, device aborts, server accepts
// device, server rejects device.
module tb_auth_top;
  import tb_ref_pkg::*;
  import lfsr_apuf_pkg::*;
  localparam int N = 64, C2W = 4, BW = 8, L = 140, T = 10, IDW = 32, INDW = 138, K = 8;
  localparam int NOISE = 8;
  localparam logic [N-1:0] POLY = 64'hD800_0000_0000_0000;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [IDW-1:0]   dev_id;
  logic [N-1:0]     dev_poly;
  logic [L+T-1:0]   dev_fill_mask;
  logic [K-1:0]     dev_tune_u, dev_tune_d;
  logic             reg_start, auth_start, srv_send;
  logic [N+C2W-1:0] reg_chal, srv_nc_i, srv_nc_j;
  logic [BW-1:0]    reg_base, srv_base_i, srv_base_j;
  logic [L-1:0]     dev_trng_nd, srv_ns;
  logic [INDW-1:0]  dev_trng_ind, tx_ind;
  logic [N-1:0]     srv_r_i, srv_r_j, tx_resp;
  logic [T-1:0]     srv_fill_i, srv_fill_j;
  logic             tx_valid, tx_resp_stable;
  dev_msg_e         tx_kind;
  logic [IDW-1:0]   tx_id;
  logic [L+T-1:0]   srv_ndc, srv_nsc;
  logic             dev_busy, dev_result_valid, dev_c1_invalid, srv_dev_ok, srv_dev_fail;
  dev_result_e      dev_result;

  auth_top dut (.*);

  // mechanism counters
  int n_reg, n_masked, n_c1_bad, n_shifted, n_base0, n_dev_ok, n_dev_abort,
      n_srv_ok, n_srv_fail;

  // registered CRPs
  logic [N+C2W-1:0] crp_c[$];
  logic [BW-1:0]    crp_b[$];
  logic [N-1:0]     crp_r[$];

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // server-side observation of device messages
  logic [N-1:0] last_resp;
  logic         last_stable;
  int           msg_count;
  dev_msg_e     last_kind;
  always_ff @(posedge clk) if (tx_valid) begin
    last_resp   <= tx_resp;
    last_stable <= tx_resp_stable;
    last_kind   <= tx_kind;
    msg_count   <= msg_count + 1;
  end
  int srv_ok_seen, srv_fail_seen;
  always_ff @(posedge clk) begin
    if (srv_dev_ok)   srv_ok_seen   <= srv_ok_seen + 1;
    if (srv_dev_fail) srv_fail_seen <= srv_fail_seen + 1;
  end

  task automatic wait_result(output dev_result_e res);
    int c;
    c = 0;
    while (!dev_result_valid && c < 20000) begin @(negedge clk); c++; end
    check("device finished", c < 20000);
    res = dev_result;
    @(negedge clk);
    @(negedge clk);
  endtask

  // Reference response bits of a challenge; also reports marginal bits.
  task automatic reference(logic [N+C2W-1:0] c, logic [BW-1:0] b,
                           output logic [N-1:0] r, output logic [N-1:0] clear);
    vec_t s;
    int d;
    s = lfsr_steps(vec_t'(c[N-1:0]), vec_t'(POLY), N, int'(c[N+C2W-1:N]) * int'(b));
    for (int j = 0; j < N; j++) begin
      d = apuf_delta(1, 0, s, N, 0, 0, K, 16);
      r[N-1-j]     = (d < 0);
      clear[N-1-j] = (d > NOISE) || (d < -NOISE);
      s = lfsr_step(s, vec_t'(POLY), N);
    end
  endtask

  task automatic register_one(logic [N+C2W-1:0] c, logic [BW-1:0] b);
    dev_result_e res;
    logic [N-1:0] r_ref, clear;
    reg_chal = c; reg_base = b;
    @(negedge clk);
    if (dev_c1_invalid) n_c1_bad++;
    reg_start = 1; @(negedge clk); reg_start = 0;
    wait_result(res);
    check("registration result", res == RES_REGISTERED);
    check("registration reply", last_kind == MSG_RESP_R);
    n_reg++;
    if (b == 0 || c[N+C2W-1:N] == 0) n_base0++; else n_shifted++;
    reference(c, b, r_ref, clear);
    check("clear bits match model", ((last_resp ^ r_ref) & clear) == '0);
    // Keep what the device reports stable. To make the run repeatable the
    // testbench also drops CRPs with a bit inside the jitter range, which a
    // real server could only learn by repeated measurement.
    if (last_stable && clear == '1) begin
      crp_c.push_back(c); crp_b.push_back(b); crp_r.push_back(last_resp);
    end
    if (!last_stable) n_masked++;
  endtask

  // One authentication round. mode 0: honest; 1: server offers wrong r_i;
  // 2: server expects a different r_j.
  task automatic auth_round(int i, int j, int mode);
    dev_result_e res;
    int ok0, fail0, m0;
    ok0 = srv_ok_seen; fail0 = srv_fail_seen; m0 = msg_count;
    dev_trng_nd  = L'(rand_vec(L));
    dev_trng_ind = INDW'(rand_vec(INDW));
    auth_start = 1; @(negedge clk); auth_start = 0;
    repeat (3) @(negedge clk);
    check("ID and n_d||ind sent", msg_count == m0 + 2 && last_kind == MSG_ND_IND);
    check("ID on link", tx_id == dev_id);
    check("ind on link", tx_ind == dev_trng_ind);
    // server: decrypted entries, its TRNG values
    srv_nc_i = crp_c[i]; srv_base_i = crp_b[i];
    srv_r_i  = (mode == 1) ? ~crp_r[i] : crp_r[i];
    srv_nc_j = crp_c[j]; srv_base_j = crp_b[j];
    srv_r_j  = (mode == 2) ? crp_r[i] ^ crp_r[j] ^ 64'h1 : crp_r[j];
    srv_ns   = L'(rand_vec(L));
    srv_fill_i = T'($urandom); srv_fill_j = T'($urandom);
    #1;
    check("n_dc is Cover(entry i, n_d)", srv_ndc == (L+T)'(cover_ref(
          vec_t'({srv_nc_i, srv_base_i, srv_r_i}), vec_t'(dev_trng_nd),
          vec_t'(srv_fill_i), vec_t'(dev_fill_mask), L, T)));
    srv_send = 1; @(negedge clk); srv_send = 0;
    wait_result(res);
    if (mode == 1) begin
      check("device aborts a wrong server", res == RES_ABORT);
      check("no r_j' after abort", msg_count == m0 + 2);
      if (res == RES_ABORT) n_dev_abort++;
    end else begin
      check("device accepts server", res == RES_SERVER_OK);
      if (res == RES_SERVER_OK) n_dev_ok++;
      check("r_j' sent", last_kind == MSG_RESP_RJ);
      if (mode == 0) begin
        check("server accepts device", srv_ok_seen == ok0 + 1 && srv_fail_seen == fail0);
        check("r_j' equals r_j", last_resp == crp_r[j]);
        n_srv_ok += srv_ok_seen - ok0;
      end else begin
        check("server rejects device", srv_fail_seen == fail0 + 1 && srv_ok_seen == ok0);
        n_srv_fail += srv_fail_seen - fail0;
      end
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N+C2W-1:0] c;
    int tries;
    n_reg = 0; n_masked = 0; n_c1_bad = 0; n_shifted = 0; n_base0 = 0;
    n_dev_ok = 0; n_dev_abort = 0; n_srv_ok = 0; n_srv_fail = 0;
    msg_count = 0; srv_ok_seen = 0; srv_fail_seen = 0;
    dev_id = 32'hC0DE_0001; dev_poly = POLY;
    dev_fill_mask = (L+T)'(rand_mask(L, T));
    dev_tune_u = '0; dev_tune_d = '0;
    reg_start = 0; auth_start = 0; srv_send = 0;
    reg_chal = '0; reg_base = '0; dev_trng_nd = '0; dev_trng_ind = '0;
    srv_nc_i = '0; srv_nc_j = '0; srv_base_i = '0; srv_base_j = '0;
    srv_r_i = '0; srv_r_j = '0; srv_ns = '0; srv_fill_i = '0; srv_fill_j = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // the server never registers a stuck seed, but the device flags one
    reg_chal = {4'h3, {N{1'b1}}};
    @(negedge clk);
    check("all-ones seed flagged", dev_c1_invalid);
    if (dev_c1_invalid) n_c1_bad++;
    // registration: Base 0 once, then the paper's recommended 10 and others
    register_one({4'h5, 64'h0123_4567_89AB_CDEF}, 8'd0);
    tries = 0;
    while ((crp_c.size() < 4 || n_masked == 0) && tries < 400) begin
      c = {$urandom, $urandom, $urandom} & {(N+C2W){1'b1}};
      if (c[N-1:0] == '0 || c[N-1:0] == '1) continue;
      register_one(c, (tries % 2 == 0) ? 8'd10 : 8'($urandom_range(20, 1)));
      tries++;
    end
    check("enough stable CRPs", crp_c.size() >= 4);
    if (crp_c.size() >= 4) begin
      auth_round(0, 1, 0);
      auth_round(2, 3, 0);
      auth_round(1, 2, 1);
      auth_round(3, 0, 2);
      auth_round(1, 3, 0);
    end
    $display("registrations=%0d masked=%0d c1_invalid=%0d shifted=%0d base0=%0d",
             n_reg, n_masked, n_c1_bad, n_shifted, n_base0);
    $display("device_accepts=%0d device_aborts=%0d server_accepts=%0d server_rejects=%0d",
             n_dev_ok, n_dev_abort, n_srv_ok, n_srv_fail);
    check("mechanism: registration", n_reg > 0);
    check("mechanism: masked CRP", n_masked > 0);
    check("mechanism: invalid seed flag", n_c1_bad > 0);
    check("mechanism: LFSR shifted", n_shifted > 0);
    check("mechanism: Base 0", n_base0 > 0);
    check("mechanism: device accepts", n_dev_ok > 0);
    check("mechanism: device aborts", n_dev_abort > 0);
    check("mechanism: server accepts", n_srv_ok > 0);
    check("mechanism: server rejects", n_srv_fail > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
