// tb_device_ctrl: exercises the device protocol sequencer at a small size
// (8-stage PUF, 28-bit messages, 4 filler bits) with the real uncover unit
// and a stand-in for the LFSR-APUF (a fixed hash of challenge and Base,
// answered a few cycles after each start). The testbench plays the server,
// covering its messages with the reference Cover of tb_ref_pkg. Checks the
// registration reply; the message order of an honest authentication round
// (ID, then n_d || ind, then r_j'), the challenges handed to the PUF and the
// returned r_j'; and that a server sending a wrong r_i makes the device
// abort without answering.
module tb_device_ctrl;
  import tb_ref_pkg::*;
  import lfsr_apuf_pkg::*;
  localparam int N = 8, C2W = 4, BW = 8, L = 28, T = 4, IDW = 8, INDW = 12;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [IDW-1:0]   id;
  logic             reg_start, auth_start, srv_valid;
  logic [N+C2W-1:0] reg_chal;
  logic [BW-1:0]    reg_base;
  logic [L-1:0]     trng_nd, srv_ns, unc_y, unc_x, tx_nd;
  logic [INDW-1:0]  trng_ind, tx_ind;
  logic [L+T-1:0]   srv_ndc, srv_nsc, unc_o, fill_mask;
  logic             puf_start, puf_done, puf_resp_stable;
  logic [N+C2W-1:0] puf_chal;
  logic [BW-1:0]    puf_base;
  logic [N-1:0]     puf_resp, tx_resp;
  logic             tx_valid, tx_resp_stable, busy, result_valid;
  dev_msg_e         tx_kind;
  logic [IDW-1:0]   tx_id;
  dev_result_e      result;

  device_ctrl #(.N(N), .C2_W(C2W), .BASE_W(BW), .L(L), .T(T), .ID_W(IDW), .IND_W(INDW)) dut (.*);
  uncover #(.L(L), .T(T)) u_unc (.o(unc_o), .y(unc_y), .fill_mask(fill_mask), .x(unc_x));

  function automatic logic [N-1:0] fake_puf(logic [N+C2W-1:0] c, logic [BW-1:0] b);
    return N'(mix(32'(c), 32'(b)));
  endfunction

  // PUF stand-in: answers 6 cycles after start
  int puf_cnt = 0, puf_starts = 0;
  logic [N+C2W-1:0] seen_chal[$];
  logic [BW-1:0]    seen_base[$];
  always_ff @(posedge clk) begin
    puf_done <= 1'b0;
    if (puf_start) begin
      puf_cnt  <= 6;
      puf_resp <= fake_puf(puf_chal, puf_base);
      seen_chal.push_back(puf_chal);
      seen_base.push_back(puf_base);
      puf_starts <= puf_starts + 1;
    end else if (puf_cnt > 1) puf_cnt <= puf_cnt - 1;
    else if (puf_cnt == 1) begin
      puf_cnt  <= 0;
      puf_done <= 1'b1;
    end
  end
  assign puf_resp_stable = 1'b1;

  // message log
  dev_msg_e kinds[$];
  logic [N-1:0] resps[$];
  always_ff @(posedge clk) if (tx_valid) begin
    kinds.push_back(tx_kind);
    resps.push_back(tx_resp);
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic wait_result(output dev_result_e res);
    int c;
    c = 0;
    while (!result_valid && c < 500) begin @(negedge clk); c++; end
    res = result;
    @(negedge clk);
  endtask

  task automatic auth_round(bit honest);
    logic [N+C2W-1:0] nci, ncj;
    logic [BW-1:0]    bi, bj;
    logic [N-1:0]     ri;
    vec_t msg_i, msg_j;
    dev_result_e res;
    nci = 12'($urandom); ncj = 12'($urandom); bi = 8'($urandom % 21); bj = 8'($urandom % 21);
    ri = fake_puf(nci, bi);
    if (!honest) ri ^= 8'h01;
    kinds.delete(); resps.delete(); seen_chal.delete(); seen_base.delete();
    trng_nd = 28'($urandom); trng_ind = 12'($urandom);
    auth_start = 1; @(negedge clk); auth_start = 0;
    repeat (3) @(negedge clk);
    check("ID sent first", kinds.size() >= 1 && kinds[0] == MSG_ID);
    check("n_d || ind second", kinds.size() >= 2 && kinds[1] == MSG_ND_IND);
    check("ID value", tx_id == id);
    check("n_d value", tx_nd == trng_nd);
    check("ind value", tx_ind == trng_ind);
    msg_i = vec_t'({nci, bi, ri});
    msg_j = vec_t'({ncj, bj, {N{1'b0}}});
    srv_ndc = (L+T)'(cover_ref(msg_i, vec_t'(trng_nd), rand_vec(T), vec_t'(fill_mask), L, T));
    srv_ns  = L'($urandom);
    srv_nsc = (L+T)'(cover_ref(msg_j, vec_t'(srv_ns), rand_vec(T), vec_t'(fill_mask), L, T));
    trng_nd = '0;     // the device must have kept its own copy
    srv_valid = 1; @(negedge clk); srv_valid = 0;
    wait_result(res);
    check("PUF run on n_ci, Base_i", seen_chal.size() >= 1 && seen_chal[0] == nci && seen_base[0] == bi);
    if (honest) begin
      check("server accepted", res == RES_SERVER_OK);
      check("PUF run on n_cj, Base_j", seen_chal.size() == 2 && seen_chal[1] == ncj && seen_base[1] == bj);
      check("r_j' sent", kinds.size() == 3 && kinds[2] == MSG_RESP_RJ);
      check("r_j' value", resps.size() == 3 && resps[2] == fake_puf(ncj, bj));
    end else begin
      check("server rejected", res == RES_ABORT);
      check("no second PUF run", seen_chal.size() == 1);
      check("no r_j' sent", kinds.size() == 2);
    end
    check("idle after round", !busy);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dev_result_e res;
    id = 8'hA5; reg_start = 0; auth_start = 0; srv_valid = 0;
    reg_chal = '0; reg_base = '0; trng_nd = '0; trng_ind = '0;
    srv_ndc = '0; srv_ns = '0; srv_nsc = '0;
    fill_mask = (L+T)'(rand_mask(L, T));
    repeat (2) @(negedge clk);
    rst_n = 1;
    // registration
    for (int t = 0; t < 5; t++) begin
      kinds.delete(); resps.delete();
      reg_chal = 12'($urandom); reg_base = 8'(t * 3);
      reg_start = 1; @(negedge clk); reg_start = 0;
      wait_result(res);
      check("registered", res == RES_REGISTERED);
      check("one reply", kinds.size() == 1 && kinds[0] == MSG_RESP_R);
      check("reply is the PUF response", resps.size() == 1 && resps[0] == fake_puf(reg_chal, reg_base));
      check("stable flag passed on", tx_resp_stable);
    end
    for (int t = 0; t < 20; t++) begin
      auth_round(t % 3 != 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
