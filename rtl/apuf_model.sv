// apuf_model: behavioural model of the n-stage arbiter PUF hard macro.
//
// BEHAVIOURAL MODEL, not synthesizable logic. The real part is a pair of
// delay chains built from programmable delay lines (PDLs, one LUT each) whose
// delays come from manufacturing variation, with an arbiter flip-flop at the
// end; its behaviour cannot be written as logic. This model keeps the real
// part's structure and ports and replaces silicon variation with integer
// delays drawn from a hash of the instance's SEED:
//   * N switching blocks, non-path-swapping as in the paper's FPGA design:
//     both PDLs of stage i take challenge bit c_Oi, and each PDL has one
//     delay for c = 0 and another for c = 1. The two paths never cross.
//   * K tuning blocks after them, whose upper and lower PDLs take the
//     user's tuning bits t_i^u and t_i^d; a set bit adds TUNE_STEP to that
//     path, which is how the paper removes routing bias.
//   * The arbiter: the upper path drives D and the lower path drives CLK, so
//     R_O = 1 when the upper edge arrives first, as in the paper.
// The routing bias of the paper's hard macro is modelled as BIAS added to
// the upper path. A NOISE-wide pseudo-random jitter is added to the
// difference on every evaluation so that bits with a small delay difference
// flip from one evaluation to the next, as real arbiters do.
//
// Stage i (1-based, c_O1 nearest the launch point) uses co[N-i]. Delays are
// DLY_NOM + (hash & 63) time units.
//
// Timing: the launch is the rising edge of S_A (`sa`) as seen at a clock
// edge; `ro` and a one-cycle `ro_valid` appear on the following cycle.
module apuf_model #(
  parameter int unsigned N         = 64,
  parameter int unsigned K         = 8,
  parameter int unsigned SEED      = 1,
  parameter int          BIAS      = 0,
  parameter int unsigned NOISE     = 8,
  parameter int unsigned TUNE_STEP = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] co,
  input  logic         sa,
  input  logic [K-1:0] tune_u,
  input  logic [K-1:0] tune_d,
  output logic         ro,
  output logic         ro_valid
);

  localparam int DLY_NOM = 1000;

  // Stand-in for process variation: a 32-bit integer mix of seed and index.
  function automatic int unsigned mix(input int unsigned seed, input int unsigned idx);
    int unsigned h;
    h = (seed * 32'h9E37_79B9) ^ (idx * 32'h85EB_CA6B) ^ 32'h5BD1_E995;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A_2D39;
    h = h ^ (h >> 15);
    return h;
  endfunction

  function automatic int pdl(input int unsigned seed, input int unsigned idx);
    return DLY_NOM + int'(mix(seed, idx) & 32'd63);
  endfunction

  // Upper minus lower arrival time for challenge c and tuning bits.
  function automatic int delay_diff(input logic [N-1:0] c,
                                    input logic [K-1:0] tu,
                                    input logic [K-1:0] td);
    int up, dn;
    up = BIAS;
    dn = 0;
    for (int unsigned i = 0; i < N; i++) begin
      // stage i+1 uses c_O(i+1) = c[N-1-i]; PDL indices 4i..4i+3
      up += pdl(SEED, 4 * i + (c[N-1-i] ? 1 : 0));
      dn += pdl(SEED, 4 * i + 2 + (c[N-1-i] ? 1 : 0));
    end
    for (int unsigned j = 0; j < K; j++) begin
      up += pdl(SEED, 4 * N + 2 * j)     + (tu[j] ? int'(TUNE_STEP) : 0);
      dn += pdl(SEED, 4 * N + 2 * j + 1) + (td[j] ? int'(TUNE_STEP) : 0);
    end
    return up - dn;
  endfunction

  logic        sa_q;
  logic [15:0] jit;   // jitter source, a 16-bit Galois LFSR
  int          jitter;

  always_comb begin
    if (NOISE == 0) jitter = 0;
    else jitter = int'(32'(jit) % (2 * NOISE + 1)) - int'(NOISE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sa_q     <= 1'b0;
      ro       <= 1'b0;
      ro_valid <= 1'b0;
      jit      <= 16'hACE1 ^ SEED[15:0];
    end else begin
      sa_q     <= sa;
      ro_valid <= 1'b0;
      if (sa && !sa_q) begin
        // D samples 1 when the upper edge arrives first (smaller delay).
        ro       <= (delay_diff(co, tune_u, tune_d) + jitter) < 0;
        ro_valid <= 1'b1;
        jit      <= (jit >> 1) ^ (jit[0] ? 16'hB400 : 16'h0000);
      end
    end
  end

endmodule
