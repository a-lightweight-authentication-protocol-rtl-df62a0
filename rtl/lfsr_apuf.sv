// lfsr_apuf: the LFSR-obfuscated arbiter PUF.
//
// An (N+C2_W)-bit external challenge C is split into the N-bit seed C1 and
// the 4-bit selector C2 (challenge_seg). C1 is loaded into an N-stage Galois
// LFSR (galois_lfsr), which the control unit then shifts C2 * Base times;
// the resulting state is the obfuscated challenge C_O that drives the N-stage
// arbiter PUF (apuf_model). The control unit fires the PUF NV times per
// challenge, and vote_mask turns the NV raw bits R_O into the voted bit R and
// a stability flag. Because the shift count depends on the challenge itself,
// the challenge-to-PUF mapping changes with every challenge, which is what
// hides the PUF's linear delay model from an attacker who only sees C and R.
// The wiring follows the paper's block diagram; see each sub-block for what
// is the paper's and what is this design's choice.
//
// NSUB = 1 (default) is the stand-alone LFSR-APUF with a one-bit response.
// With NSUB = N the block produces the N-bit response used by the
// authentication protocol: sub-challenge 1 is C_O, each later one is one
// more LFSR step, and the bit of sub-challenge 1 lands in resp's MSB.
//
// Interface: pulse `start` with `chal` and `base` valid (sampled on that
// edge, `poly` and the tuning bits held steady). `done` is high for one cycle
// 1 + C2*Base + NSUB*(2*NV+1) clock edges later (see control_unit); `resp`,
// `stable_mask` and `resp_stable` (all bits stable) then hold until the next
// start. `co` is the live LFSR state and `resp_co` the obfuscated challenge
// of the last voted bit. `c1_invalid` flags a seed the protocol must never use.
module lfsr_apuf #(
  parameter int unsigned N          = 64,
  parameter int unsigned C2_W       = 4,
  parameter int unsigned BASE_W     = 8,
  parameter int unsigned NSUB       = 1,
  parameter int unsigned K          = 8,
  parameter int unsigned NV         = 5,
  parameter int unsigned STABLE_MIN = 4,
  parameter int unsigned SEED       = 1,
  parameter int          BIAS       = 0,
  parameter int unsigned NOISE      = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [N+C2_W-1:0]   chal,
  input  logic [BASE_W-1:0]   base,
  input  logic [N-1:0]        poly,
  input  logic [K-1:0]        tune_u,
  input  logic [K-1:0]        tune_d,
  output logic                busy,
  output logic                done,
  output logic [NSUB-1:0]     resp,
  output logic [NSUB-1:0]     stable_mask,
  output logic                resp_stable,
  output logic                c1_invalid,
  output logic [N-1:0]        co,
  output logic [N-1:0]        resp_co
);

  logic [N-1:0]    c1;
  logic [C2_W-1:0] c2;
  logic            lfsr_load, sl, sa, vote_clear;
  logic            ro, ro_valid;
  logic            r, r_stable, r_valid;

  challenge_seg #(.N(N), .C2_W(C2_W)) u_seg (
    .chal(chal), .c1(c1), .c2(c2), .c1_invalid(c1_invalid)
  );

  galois_lfsr #(.N(N)) u_lfsr (
    .clk(clk), .rst_n(rst_n), .load(lfsr_load), .seed(c1), .shift(sl),
    .poly(poly), .state(co)
  );

  control_unit #(.NSUB(NSUB), .NV(NV), .C2_W(C2_W), .BASE_W(BASE_W)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .c2(c2), .base(base),
    .r_valid(r_valid), .r_bit(r), .r_stable(r_stable), .vote_clear(vote_clear),
    .lfsr_load(lfsr_load), .sl(sl), .sa(sa), .busy(busy), .done(done),
    .resp(resp), .stable_mask(stable_mask)
  );

  apuf_model #(.N(N), .K(K), .SEED(SEED), .BIAS(BIAS), .NOISE(NOISE)) u_apuf (
    .clk(clk), .rst_n(rst_n), .co(co), .sa(sa), .tune_u(tune_u),
    .tune_d(tune_d), .ro(ro), .ro_valid(ro_valid)
  );

  vote_mask #(.N(N), .NV(NV), .STABLE_MIN(STABLE_MIN)) u_vote (
    .clk(clk), .rst_n(rst_n), .clear(vote_clear), .co(co), .ro(ro),
    .ro_valid(ro_valid), .r(r), .r_stable(r_stable), .r_valid(r_valid),
    .vote_co(resp_co)
  );

  assign resp_stable = &stable_mask;

  // The LFSR must not move while the PUF is being launched: every vote of a
  // sub-challenge has to see the same C_O.
  a_co_steady_at_launch: assert property (@(posedge clk) disable iff (!rst_n)
    sa |-> !(sl || lfsr_load));

endmodule
