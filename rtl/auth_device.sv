// auth_device: the authenticating IoT device, Device_k.
//
// Holds the device's three pieces of hardware: the LFSR-APUF producing an
// N-bit response (NSUB = N sub-challenges per challenge), the Uncover_k unit
// that opens messages covered by the server, and the protocol sequencer
// (device_ctrl). The device-specific configuration comes in as ports: the
// identity ID_k, the LFSR tap polynomial p_k, the filler positions of
// Cover_k and the APUF tuning bits. The device TRNG is outside (its nonce
// and index arrive on trng_nd / trng_ind). SEED selects which simulated
// silicon instance the behavioural APUF stands for. Protocol and timing are
// described in device_ctrl and lfsr_apuf.
module auth_device
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
  // device configuration
  input  logic [ID_W-1:0]   id,
  input  logic [N-1:0]      poly,
  input  logic [L+T-1:0]    fill_mask,
  input  logic [K-1:0]      tune_u,
  input  logic [K-1:0]      tune_d,
  // requests
  input  logic              reg_start,
  input  logic [N+C2_W-1:0] reg_chal,
  input  logic [BASE_W-1:0] reg_base,
  input  logic              auth_start,
  input  logic [L-1:0]      trng_nd,
  input  logic [IND_W-1:0]  trng_ind,
  // from the server
  input  logic              srv_valid,
  input  logic [L+T-1:0]    srv_ndc,
  input  logic [L-1:0]      srv_ns,
  input  logic [L+T-1:0]    srv_nsc,
  // to the server
  output logic              tx_valid,
  output dev_msg_e          tx_kind,
  output logic [ID_W-1:0]   tx_id,
  output logic [L-1:0]      tx_nd,
  output logic [IND_W-1:0]  tx_ind,
  output logic [N-1:0]      tx_resp,
  output logic              tx_resp_stable,
  // status
  output logic              busy,
  output dev_result_e       result,
  output logic              result_valid,
  output logic              c1_invalid
);

  logic [L+T-1:0]    unc_o;
  logic [L-1:0]      unc_y, unc_x;
  logic              puf_start, puf_done, puf_busy, puf_resp_stable;
  logic [N+C2_W-1:0] puf_chal;
  logic [BASE_W-1:0] puf_base;
  logic [N-1:0]      puf_resp;

  uncover #(.L(L), .T(T)) u_uncover (
    .o(unc_o), .y(unc_y), .fill_mask(fill_mask), .x(unc_x)
  );

  lfsr_apuf #(
    .N(N), .C2_W(C2_W), .BASE_W(BASE_W), .NSUB(N), .K(K), .NV(NV),
    .STABLE_MIN(STABLE_MIN), .SEED(SEED), .BIAS(BIAS), .NOISE(NOISE)
  ) u_puf (
    .clk(clk), .rst_n(rst_n), .start(puf_start), .chal(puf_chal),
    .base(puf_base), .poly(poly), .tune_u(tune_u), .tune_d(tune_d),
    .busy(puf_busy), .done(puf_done), .resp(puf_resp),
    .stable_mask(), .resp_stable(puf_resp_stable),
    .c1_invalid(c1_invalid), .co(), .resp_co()
  );

  device_ctrl #(
    .N(N), .C2_W(C2_W), .BASE_W(BASE_W), .L(L), .T(T), .ID_W(ID_W), .IND_W(IND_W)
  ) u_ctrl (
    .clk(clk), .rst_n(rst_n), .id(id),
    .reg_start(reg_start), .reg_chal(reg_chal), .reg_base(reg_base),
    .auth_start(auth_start), .trng_nd(trng_nd), .trng_ind(trng_ind),
    .srv_valid(srv_valid), .srv_ndc(srv_ndc), .srv_ns(srv_ns), .srv_nsc(srv_nsc),
    .unc_o(unc_o), .unc_y(unc_y), .unc_x(unc_x),
    .puf_start(puf_start), .puf_chal(puf_chal), .puf_base(puf_base),
    .puf_done(puf_done), .puf_resp(puf_resp), .puf_resp_stable(puf_resp_stable),
    .tx_valid(tx_valid), .tx_kind(tx_kind), .tx_id(tx_id), .tx_nd(tx_nd),
    .tx_ind(tx_ind), .tx_resp(tx_resp), .tx_resp_stable(tx_resp_stable),
    .busy(busy), .result(result), .result_valid(result_valid)
  );

  // The LFSR-APUF is only started when it is idle.
  a_puf_idle_at_start: assert property (@(posedge clk) disable iff (!rst_n)
    puf_start |-> !puf_busy);

endmodule
