// cover_enc: the private bit conversion function Cover_k(X, Y).
//
// Turns an L-bit message X (the CRP entry) and an L-bit random nonce Y into
// an (L+T)-bit word O in three combinational stages, as the paper defines:
//  1. Bit rearrangement Z = Per(X, Y). Walking from x_1 (MSB) to x_L, every
//     x_i whose y_i is 1 is appended to Z; walking back from x_L to x_1,
//     every x_i whose y_i is 0 is appended. So x_i with y_i = 1 lands at
//     z_(1 + ones in y_1..y_(i-1)), and x_i with y_i = 0 lands at
//     z_(1 + ones(Y) + zeros in y_(i+1)..y_L).
//  2. Parity-adjacent cross XOR: Y' swaps every pair (y_1,y_2), (y_3,y_4), ...
//     and W = Z xor Y', i.e. w_i = z_i xor y_(i+1) for odd i and
//     w_i = z_i xor y_(i-1) for even i. The paper's summary equation writes
//     y_i xor z_(i+1) instead; its step-by-step text and its worked example
//     both give the form used here.
//  3. Bit filling: the T random bits F are inserted among the W bits. The
//     positions are the device-specific part of Cover_k and come in as the
//     (L+T)-bit `fill_mask`, which must hold exactly T ones: o_j is the next
//     unused f bit where the mask is 1 and the next unused w bit elsewhere,
//     both taken in order from f_1 / w_1. How the positions are derived
//     from the device identity is left to the integrator (the paper does
//     not say).
// Bit 1 of every vector in the paper (x_1, y_1, o_1, ...) is the MSB here.
// L must be even. Purely combinational.
module cover_enc #(
  parameter int unsigned L = 128,
  parameter int unsigned T = 10
) (
  input  logic [L-1:0]   x,
  input  logic [L-1:0]   y,
  input  logic [T-1:0]   f,
  input  logic [L+T-1:0] fill_mask,
  output logic [L-1:0]   z,
  output logic [L-1:0]   w,
  output logic [L+T-1:0] o
);

  // Stage 1: Per(X, Y)
  always_comb begin
    int n_ones, ones_before, zeros_after, dest;
    n_ones = '0;
    for (int i = 0; i < L; i++) n_ones += int'(y[i]);
    z = '0;
    ones_before = '0;
    zeros_after = L - n_ones;
    for (int i = 1; i <= L; i++) begin      // i: paper index of x_i
      if (y[L-i]) begin
        dest = ones_before;
        ones_before += 1;
      end else begin
        zeros_after -= 1;
        dest = n_ones + zeros_after;
      end
      z[L - 1 - dest] = x[L-i];
    end
  end

  // Stage 2: cross XOR with the pair-swapped nonce
  always_comb begin
    for (int i = 1; i <= L; i++) begin
      if (i % 2 == 1) w[L-i] = z[L-i] ^ y[L-i-1];   // w_i = z_i ^ y_(i+1)
      else            w[L-i] = z[L-i] ^ y[L-i+1];   // w_i = z_i ^ y_(i-1)
    end
  end

  // Stage 3: bit filling
  always_comb begin
    int nf, nw;
    nf = '0;
    nw = '0;
    o  = '0;
    for (int j = 1; j <= L + T; j++) begin // j: paper index of o_j
      if (fill_mask[L+T-j]) begin
        if (nf < T) o[L+T-j] = f[T - 1 - nf];
        nf += 1;
      end else begin
        if (nw < L) o[L+T-j] = w[L - 1 - nw];
        nw += 1;
      end
    end
  end

endmodule
