// vote_mask: voting and soft dark-bit masking of the APUF response.
//
// The APUF is evaluated NV times on the same obfuscated challenge. This unit
// counts the ones among those NV raw responses R_O. After the NV-th it
// outputs the majority as the response bit R and pulses `r_valid`; `r_stable`
// is high when at least STABLE_MIN of the NV evaluations agree. A bit with
// r_stable low is a "dark" bit: it is still reported, and the caller (the
// server during registration) masks the CRP it belongs to. The paper only
// names a voting mechanism and a soft dark-bit mask; NV = 5 and
// STABLE_MIN = 4 are this design's choices. The unit also keeps the
// obfuscated challenge C_O seen with the first vote (`vote_co`), the C_O
// input the paper's block diagram draws into it, so the voted bit can be
// paired with the challenge that produced it.
//
// Timing: `clear` (one cycle) starts a new vote. `r_valid` is high the cycle
// after the NV-th `ro_valid`.
module vote_mask #(
  parameter int unsigned N          = 64,
  parameter int unsigned NV         = 5,
  parameter int unsigned STABLE_MIN = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic [N-1:0] co,
  input  logic         ro,
  input  logic         ro_valid,
  output logic         r,
  output logic         r_stable,
  output logic         r_valid,
  output logic [N-1:0] vote_co
);

  localparam int unsigned CW = $clog2(NV + 1);

  logic [CW-1:0] n_seen, n_ones;
  logic [CW-1:0] ones_next;

  assign ones_next = n_ones + CW'(ro);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_seen   <= '0;
      n_ones   <= '0;
      r        <= 1'b0;
      r_stable <= 1'b0;
      r_valid  <= 1'b0;
      vote_co  <= '0;
    end else begin
      r_valid <= 1'b0;
      if (clear) begin
        n_seen <= '0;
        n_ones <= '0;
      end else if (ro_valid && (n_seen != CW'(NV))) begin
        if (n_seen == '0) vote_co <= co;
        n_seen <= n_seen + 1'b1;
        n_ones <= ones_next;
        if (n_seen == CW'(NV - 1)) begin
          r        <= (2 * ones_next > CW'(NV));
          r_stable <= (ones_next >= CW'(STABLE_MIN)) ||
                      ((CW'(NV) - ones_next) >= CW'(STABLE_MIN));
          r_valid  <= 1'b1;
        end
      end
    end
  end

endmodule
