// control_unit: sequencer of the LFSR-APUF.
//
// On `start` it loads the LFSR with C1 and latches the shift count
// C2 * Base (paper Eq. 7). It then raises S_L (`sl`) for exactly that many
// cycles, one LFSR step per cycle, so the LFSR state becomes the obfuscated
// challenge. For each of NSUB sub-challenges it then fires NV pulses on S_A
// (`sa` high one cycle, low one cycle; the APUF reacts to the rising edge),
// waits for the voted bit from the vote/mask unit, shifts it into `resp`, and
// steps the LFSR once more to form the next sub-challenge. NSUB = 1 gives the
// stand-alone one-bit LFSR-APUF of the paper's Section III; NSUB = N gives the
// n-bit response of the protocol, where the paper seeds the LFSR with the
// obfuscated challenge and draws n sub-challenges from it. Taking each further
// sub-challenge as one more LFSR step, the first being the obfuscated
// challenge itself, is this design's reading of that sentence.
//
// Timing: `start` is sampled in IDLE. `done` is high for the one cycle that
// follows the 1 + C2*Base + NSUB*(2*NV+1)-th clock edge after that edge; `resp` (first
// sub-challenge in the MSB) and `stable_mask` are valid from `done` until the
// next `start`.
module control_unit #(
  parameter int unsigned NSUB   = 64,
  parameter int unsigned NV     = 5,
  parameter int unsigned C2_W   = 4,
  parameter int unsigned BASE_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [C2_W-1:0]   c2,
  input  logic [BASE_W-1:0] base,
  // vote / mask unit
  input  logic              r_valid,
  input  logic              r_bit,
  input  logic              r_stable,
  output logic              vote_clear,
  // LFSR and APUF strobes
  output logic              lfsr_load,
  output logic              sl,
  output logic              sa,
  // status and result
  output logic              busy,
  output logic              done,
  output logic [NSUB-1:0]   resp,
  output logic [NSUB-1:0]   stable_mask
);

  localparam int unsigned CNT_W = C2_W + BASE_W;
  localparam int unsigned SUB_W = (NSUB > 1) ? $clog2(NSUB) : 1;
  localparam int unsigned EV_W  = (NV > 1) ? $clog2(NV) : 1;

  typedef enum logic [2:0] {S_IDLE, S_SHIFT, S_EVAL, S_GAP, S_WAITV, S_DONE} state_e;

  state_e           state;
  logic [CNT_W-1:0] cnt;
  logic [SUB_W-1:0] sub;
  logic [EV_W-1:0]  ev;

  always_comb begin
    lfsr_load  = (state == S_IDLE) && start;
    sl         = ((state == S_SHIFT) && (cnt != '0)) ||
                 ((state == S_WAITV) && r_valid && (sub != SUB_W'(NSUB - 1)));
    sa         = (state == S_EVAL);
    vote_clear = ((state == S_SHIFT) && (cnt == '0)) ||
                 ((state == S_WAITV) && r_valid && (sub != SUB_W'(NSUB - 1)));
    busy       = (state != S_IDLE);
    done       = (state == S_DONE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      cnt         <= '0;
      sub         <= '0;
      ev          <= '0;
      resp        <= '0;
      stable_mask <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          cnt   <= CNT_W'(c2) * CNT_W'(base);
          sub   <= '0;
          state <= S_SHIFT;
        end
        S_SHIFT: begin
          if (cnt != '0) cnt <= cnt - 1'b1;
          else begin
            ev    <= '0;
            state <= S_EVAL;
          end
        end
        S_EVAL: state <= S_GAP;
        S_GAP: begin
          if (ev == EV_W'(NV - 1)) state <= S_WAITV;
          else begin
            ev    <= ev + 1'b1;
            state <= S_EVAL;
          end
        end
        S_WAITV: if (r_valid) begin
          resp        <= NSUB'({resp, r_bit});
          stable_mask <= NSUB'({stable_mask, r_stable});
          if (sub == SUB_W'(NSUB - 1)) state <= S_DONE;
          else begin
            sub   <= sub + 1'b1;
            ev    <= '0;
            state <= S_EVAL;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // The vote/mask unit answers once per sub-challenge, only while we wait.
  a_rvalid_only_when_waiting: assert property (@(posedge clk) disable iff (!rst_n)
    r_valid |-> (state == S_WAITV));

endmodule
