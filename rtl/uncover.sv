// uncover: the device-side inverse of Cover_k.
//
// Given the (L+T)-bit covered word O, the same nonce Y the device generated
// (n_d or n_s) and the device's filler positions `fill_mask`, it recovers
// the L-bit message X in three combinational stages, each undoing one stage
// of `cover_enc`:
//  1. Drop the T filler bits: the bits of O at positions where `fill_mask`
//     is 0, taken in order from o_1, are w_1 .. w_L.
//  2. Z = W xor Y', where Y' is Y with every adjacent pair (y_1,y_2),
//     (y_3,y_4), ... swapped.
//  3. Undo Per: x_i = z_(1 + ones in y_1..y_(i-1)) when y_i = 1, and
//     x_i = z_(1 + ones(Y) + zeros in y_(i+1)..y_L) when y_i = 0.
// The paper only names the Uncover step; these inverses follow directly from
// its definition of Cover. Bit 1 of each paper vector is the MSB. L must be
// even.
module uncover #(
  parameter int unsigned L = 128,
  parameter int unsigned T = 10
) (
  input  logic [L+T-1:0] o,
  input  logic [L-1:0]   y,
  input  logic [L+T-1:0] fill_mask,
  output logic [L-1:0]   x
);

  logic [L-1:0] w, z;

  // Stage 1: remove filler bits
  always_comb begin
    int nw;
    nw = '0;
    w  = '0;
    for (int j = 1; j <= L + T; j++) begin
      if (!fill_mask[L+T-j]) begin
        if (nw < L) w[L - 1 - nw] = o[L+T-j];
        nw += 1;
      end
    end
  end

  // Stage 2: undo the cross XOR
  always_comb begin
    for (int i = 1; i <= L; i++) begin
      if (i % 2 == 1) z[L-i] = w[L-i] ^ y[L-i-1];
      else            z[L-i] = w[L-i] ^ y[L-i+1];
    end
  end

  // Stage 3: gather X back out of Z
  always_comb begin
    int n_ones, ones_before, zeros_after, src;
    n_ones = '0;
    for (int i = 0; i < L; i++) n_ones += int'(y[i]);
    ones_before = '0;
    zeros_after = L - n_ones;
    x = '0;
    for (int i = 1; i <= L; i++) begin
      if (y[L-i]) begin
        src = ones_before;
        ones_before += 1;
      end else begin
        zeros_after -= 1;
        src = n_ones + zeros_after;
      end
      x[L-i] = z[L - 1 - src];
    end
  end

endmodule
