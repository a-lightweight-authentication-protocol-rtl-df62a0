// device_ctrl: protocol sequencer of the authenticating device (Device_k).
//
// Registration (paper Fig. 10): on `reg_start` the device feeds the
// server's (n_ci || Base_i) to its LFSR-APUF and returns the N-bit response
// r_i with a flag saying whether every bit was stable, so the server can
// keep only reliable CRPs.
//
// Authentication (paper Fig. 11), on `auth_start`:
//   1. send ID_k (MSG_ID);
//   3. send the nonce n_d and database index ind_i1 drawn from the device
//      TRNG, sampled from `trng_nd` / `trng_ind` at auth_start (MSG_ND_IND);
//   6. wait for the server's (n_dc || n_s || n_sc), uncover n_dc with n_d to
//      get (n_ci || Base_i || r_i), run the LFSR-APUF on (n_ci, Base_i) and
//      compare its response r_i' with r_i. A mismatch aborts the round
//      (RES_ABORT): the server is not trusted;
//   9. otherwise uncover n_sc with n_s to get (n_cj || Base_j), run the
//      LFSR-APUF again and send r_j' (MSG_RESP_RJ), ending with
//      RES_SERVER_OK. The server then decides whether the device is genuine.
// The device holds no secret state between rounds: everything it needs
// arrives covered, as the paper intends.
//
// Message layout (this design's choice; the paper does not fix field sizes):
// the covered L-bit message X is {n_c (N+C2_W bits, the full external
// challenge), Base (BASE_W bits), r (N bits), zero padding}, most significant
// field first. For n_sc the r field is zero. The uncover unit and the
// LFSR-APUF are outside this module and shared through the unc_* and puf_*
// ports. Each tx_* message is valid for the single cycle `tx_valid` is high.
module device_ctrl
  import lfsr_apuf_pkg::*;
#(
  parameter int unsigned N      = 64,
  parameter int unsigned C2_W   = 4,
  parameter int unsigned BASE_W = 8,
  parameter int unsigned L      = 140,
  parameter int unsigned T      = 10,
  parameter int unsigned ID_W   = 32,
  parameter int unsigned IND_W  = 138
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [ID_W-1:0]     id,
  // registration request
  input  logic                reg_start,
  input  logic [N+C2_W-1:0]   reg_chal,
  input  logic [BASE_W-1:0]   reg_base,
  // authentication request and device TRNG
  input  logic                auth_start,
  input  logic [L-1:0]        trng_nd,
  input  logic [IND_W-1:0]    trng_ind,
  // server message 6: n_dc || n_s || n_sc
  input  logic                srv_valid,
  input  logic [L+T-1:0]      srv_ndc,
  input  logic [L-1:0]        srv_ns,
  input  logic [L+T-1:0]      srv_nsc,
  // shared uncover unit
  output logic [L+T-1:0]      unc_o,
  output logic [L-1:0]        unc_y,
  input  logic [L-1:0]        unc_x,
  // LFSR-APUF
  output logic                puf_start,
  output logic [N+C2_W-1:0]   puf_chal,
  output logic [BASE_W-1:0]   puf_base,
  input  logic                puf_done,
  input  logic [N-1:0]        puf_resp,
  input  logic                puf_resp_stable,
  // messages to the server
  output logic                tx_valid,
  output dev_msg_e            tx_kind,
  output logic [ID_W-1:0]     tx_id,
  output logic [L-1:0]        tx_nd,
  output logic [IND_W-1:0]    tx_ind,
  output logic [N-1:0]        tx_resp,
  output logic                tx_resp_stable,
  // status
  output logic                busy,
  output dev_result_e         result,
  output logic                result_valid
);

  localparam int unsigned CW    = N + C2_W;
  localparam int unsigned PAY_W = CW + BASE_W + N;

  typedef enum logic [3:0] {
    D_IDLE, D_REG_RUN, D_SEND_ID, D_SEND_ND, D_WAIT_SRV,
    D_UNC_I, D_RUN_I, D_UNC_J, D_RUN_J
  } dstate_e;

  dstate_e             state;
  logic [L-1:0]        nd, ns;
  logic [L+T-1:0]      ndc, nsc;
  logic [IND_W-1:0]    ind;
  logic [N-1:0]        r_expect;
  logic                puf_go;
  logic [CW-1:0]       chal_q;
  logic [BASE_W-1:0]   base_q;

  // Fields of the uncovered message
  logic [CW-1:0]       x_nc;
  logic [BASE_W-1:0]   x_base;
  logic [N-1:0]        x_r;
  assign x_nc   = unc_x[L-1 -: CW];
  assign x_base = unc_x[L-1-CW -: BASE_W];
  assign x_r    = unc_x[L-1-CW-BASE_W -: N];

  always_comb begin
    unc_o     = (state == D_UNC_J) ? nsc : ndc;
    unc_y     = (state == D_UNC_J) ? ns  : nd;
    puf_start = puf_go;
    puf_chal  = chal_q;
    puf_base  = base_q;
    busy      = (state != D_IDLE);
    tx_id     = id;
    tx_nd     = nd;
    tx_ind    = ind;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= D_IDLE;
      nd             <= '0;
      ns             <= '0;
      ndc            <= '0;
      nsc            <= '0;
      ind            <= '0;
      r_expect       <= '0;
      puf_go         <= 1'b0;
      chal_q         <= '0;
      base_q         <= '0;
      tx_valid       <= 1'b0;
      tx_kind        <= MSG_ID;
      tx_resp        <= '0;
      tx_resp_stable <= 1'b0;
      result         <= RES_NONE;
      result_valid   <= 1'b0;
    end else begin
      puf_go       <= 1'b0;
      tx_valid     <= 1'b0;
      result_valid <= 1'b0;
      unique case (state)
        D_IDLE: begin
          if (reg_start) begin
            chal_q <= reg_chal;
            base_q <= reg_base;
            puf_go <= 1'b1;
            state  <= D_REG_RUN;
          end else if (auth_start) begin
            nd       <= trng_nd;
            ind      <= trng_ind;
            tx_valid <= 1'b1;
            tx_kind  <= MSG_ID;
            state    <= D_SEND_ID;
          end
        end
        D_REG_RUN: if (puf_done) begin
          tx_valid       <= 1'b1;
          tx_kind        <= MSG_RESP_R;
          tx_resp        <= puf_resp;
          tx_resp_stable <= puf_resp_stable;
          result         <= RES_REGISTERED;
          result_valid   <= 1'b1;
          state          <= D_IDLE;
        end
        D_SEND_ID: begin
          tx_valid <= 1'b1;
          tx_kind  <= MSG_ND_IND;
          state    <= D_SEND_ND;
        end
        D_SEND_ND: state <= D_WAIT_SRV;
        D_WAIT_SRV: if (srv_valid) begin
          ndc   <= srv_ndc;
          ns    <= srv_ns;
          nsc   <= srv_nsc;
          state <= D_UNC_I;
        end
        D_UNC_I: begin
          chal_q   <= x_nc;
          base_q   <= x_base;
          r_expect <= x_r;
          puf_go   <= 1'b1;
          state    <= D_RUN_I;
        end
        D_RUN_I: if (puf_done && !puf_go) begin
          if (puf_resp == r_expect) state <= D_UNC_J;
          else begin
            result       <= RES_ABORT;
            result_valid <= 1'b1;
            state        <= D_IDLE;
          end
        end
        D_UNC_J: begin
          chal_q <= x_nc;
          base_q <= x_base;
          puf_go <= 1'b1;
          state  <= D_RUN_J;
        end
        D_RUN_J: if (puf_done && !puf_go) begin
          tx_valid       <= 1'b1;
          tx_kind        <= MSG_RESP_RJ;
          tx_resp        <= puf_resp;
          tx_resp_stable <= puf_resp_stable;
          result         <= RES_SERVER_OK;
          result_valid   <= 1'b1;
          state          <= D_IDLE;
        end
        default: state <= D_IDLE;
      endcase
    end
  end

  // The covered message must fit the Cover block.
  if (PAY_W > L) begin : g_bad_size
    $error("device_ctrl: L (%0d) is smaller than the message (%0d bits)", L, PAY_W);
  end

  // A new request is only taken while idle.
  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (state != D_IDLE) |-> !(reg_start || auth_start));

endmodule
