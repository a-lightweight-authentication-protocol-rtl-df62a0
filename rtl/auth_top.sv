// auth_top: one authentication link of the PUF-based protocol.
//
// Joins Device_k (auth_device: LFSR-APUF, Uncover_k, protocol sequencer) to
// the parts of the server that are logic: its two Cover_k engines and its
// final response check. The server's key PUFs, its decryption of database
// entries, its TRNG and the database itself are not logic this design can
// give, so what they produce enters as ports:
//   * srv_nc_i / srv_base_i / srv_r_i = (n_ci || Base_i || r_i) and
//     srv_nc_j / srv_base_j / srv_r_j = (n_cj || Base_j || r_j) are the two
//     CRP entries the server has decrypted;
//   * srv_ns, srv_fill_i and srv_fill_j are the server TRNG's nonce n_s and
//     the random filler bits F of the two Cover operations.
// The server latches the device's nonce n_d from message 3, covers entry i
// with it (n_dc) and (n_cj || Base_j) with n_s (n_sc), and on `srv_send`
// delivers message 6 (n_dc || n_s || n_sc) to the device. When the device
// answers with r_j' (message 9) the server compares it with r_j and raises
// `srv_dev_ok` or `srv_dev_fail` for one cycle.
//
// Field layout inside each covered L-bit message: {n_c (N+C2_W), Base
// (BASE_W), r (N), zero padding}. With the paper's 64-stage PUF this message
// is 140 bits, longer than the paper's l = 128, so L defaults to 140 here;
// see the documentation. T = 10 filler bits as in the paper.
module auth_top
  import lfsr_apuf_pkg::*;
#(
  parameter int unsigned N          = PUF_STAGES,
  parameter int unsigned C2_W       = C2_WIDTH,
  parameter int unsigned BASE_W     = BASE_WIDTH,
  parameter int unsigned L          = MSG_WIDTH,
  parameter int unsigned T          = COVER_T,
  parameter int unsigned ID_W       = ID_WIDTH,
  parameter int unsigned IND_W      = IND_WIDTH,
  parameter int unsigned K          = 8,
  parameter int unsigned NV         = VOTE_COUNT,
  parameter int unsigned STABLE_MIN = VOTE_STABLE_MIN,
  parameter int unsigned SEED       = 1,
  parameter int          BIAS       = 0,
  parameter int unsigned NOISE      = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // Device_k configuration (ID_k, p_k, Cover_k filler positions, tuning)
  input  logic [ID_W-1:0]   dev_id,
  input  logic [N-1:0]      dev_poly,
  input  logic [L+T-1:0]    dev_fill_mask,
  input  logic [K-1:0]      dev_tune_u,
  input  logic [K-1:0]      dev_tune_d,
  // registration: server sends (n_ci || Base_i) in the clear
  input  logic              reg_start,
  input  logic [N+C2_W-1:0] reg_chal,
  input  logic [BASE_W-1:0] reg_base,
  // authentication: device request and device TRNG
  input  logic              auth_start,
  input  logic [L-1:0]      dev_trng_nd,
  input  logic [IND_W-1:0]  dev_trng_ind,
  // server side: decrypted CRP entries, TRNG values, send strobe
  input  logic [N+C2_W-1:0] srv_nc_i,
  input  logic [BASE_W-1:0] srv_base_i,
  input  logic [N-1:0]      srv_r_i,
  input  logic [N+C2_W-1:0] srv_nc_j,
  input  logic [BASE_W-1:0] srv_base_j,
  input  logic [N-1:0]      srv_r_j,
  input  logic [L-1:0]      srv_ns,
  input  logic [T-1:0]      srv_fill_i,
  input  logic [T-1:0]      srv_fill_j,
  input  logic              srv_send,
  // device messages as seen on the link
  output logic              tx_valid,
  output dev_msg_e          tx_kind,
  output logic [ID_W-1:0]   tx_id,
  output logic [IND_W-1:0]  tx_ind,
  output logic [N-1:0]      tx_resp,
  output logic              tx_resp_stable,
  // message 6 as sent by the server
  output logic [L+T-1:0]    srv_ndc,
  output logic [L+T-1:0]    srv_nsc,
  // outcomes
  output logic              dev_busy,
  output dev_result_e       dev_result,
  output logic              dev_result_valid,
  output logic              dev_c1_invalid,
  output logic              srv_dev_ok,
  output logic              srv_dev_fail
);

  localparam int unsigned PAD_W = L - (N + C2_W + BASE_W + N);

  logic [L-1:0] dev_nd, srv_nd;
  logic [L-1:0] msg_i, msg_j;

  // Server: remember n_d from message 3.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) srv_nd <= '0;
    else if (tx_valid && tx_kind == MSG_ND_IND) srv_nd <= dev_nd;
  end

  if (PAD_W > 0) begin : g_pad
    assign msg_i = {srv_nc_i, srv_base_i, srv_r_i, {PAD_W{1'b0}}};
    assign msg_j = {srv_nc_j, srv_base_j, {N{1'b0}}, {PAD_W{1'b0}}};
  end else begin : g_nopad
    assign msg_i = {srv_nc_i, srv_base_i, srv_r_i};
    assign msg_j = {srv_nc_j, srv_base_j, {N{1'b0}}};
  end

  cover_enc #(.L(L), .T(T)) u_srv_cover_i (
    .x(msg_i), .y(srv_nd), .f(srv_fill_i), .fill_mask(dev_fill_mask),
    .z(), .w(), .o(srv_ndc)
  );

  cover_enc #(.L(L), .T(T)) u_srv_cover_j (
    .x(msg_j), .y(srv_ns), .f(srv_fill_j), .fill_mask(dev_fill_mask),
    .z(), .w(), .o(srv_nsc)
  );

  auth_device #(
    .N(N), .C2_W(C2_W), .BASE_W(BASE_W), .L(L), .T(T), .ID_W(ID_W),
    .IND_W(IND_W), .K(K), .NV(NV), .STABLE_MIN(STABLE_MIN), .SEED(SEED),
    .BIAS(BIAS), .NOISE(NOISE)
  ) u_dev (
    .clk(clk), .rst_n(rst_n),
    .id(dev_id), .poly(dev_poly), .fill_mask(dev_fill_mask),
    .tune_u(dev_tune_u), .tune_d(dev_tune_d),
    .reg_start(reg_start), .reg_chal(reg_chal), .reg_base(reg_base),
    .auth_start(auth_start), .trng_nd(dev_trng_nd), .trng_ind(dev_trng_ind),
    .srv_valid(srv_send), .srv_ndc(srv_ndc), .srv_ns(srv_ns), .srv_nsc(srv_nsc),
    .tx_valid(tx_valid), .tx_kind(tx_kind), .tx_id(tx_id), .tx_nd(dev_nd),
    .tx_ind(tx_ind), .tx_resp(tx_resp), .tx_resp_stable(tx_resp_stable),
    .busy(dev_busy), .result(dev_result), .result_valid(dev_result_valid),
    .c1_invalid(dev_c1_invalid)
  );

  // Server: step 9, compare r_j' with r_j.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      srv_dev_ok   <= 1'b0;
      srv_dev_fail <= 1'b0;
    end else begin
      srv_dev_ok   <= tx_valid && (tx_kind == MSG_RESP_RJ) && (tx_resp == srv_r_j);
      srv_dev_fail <= tx_valid && (tx_kind == MSG_RESP_RJ) && (tx_resp != srv_r_j);
    end
  end

endmodule
