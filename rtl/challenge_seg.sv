// challenge_seg: block segmentation of the external challenge.
//
// The (N+C2_W)-bit challenge C is cut into the N-bit LFSR seed C1 and the
// C2_W-bit shift selector C2. In block segmentation C2 is one contiguous
// field; C2_POS is the bit index of its least significant bit. The default,
// C2_POS = N, puts C2 at the start of C (its most significant bits), the
// arrangement the paper uses. C2_POS = 0 puts it at the end, and any value
// in between puts it in the middle; the paper names all three positions. The
// C1 bits keep their order on either side of the C2 field. The paper's
// alternative of scattering the C2 bits across C is not built. The block
// also flags a seed that is all zeros or all ones, which would lock the LFSR
// and which the paper says must never be used. Purely combinational.
module challenge_seg #(
  parameter int unsigned N      = 64,
  parameter int unsigned C2_W   = 4,
  parameter int unsigned C2_POS = N
) (
  input  logic [N+C2_W-1:0] chal,
  output logic [N-1:0]      c1,
  output logic [C2_W-1:0]   c2,
  output logic              c1_invalid
);

  if (C2_POS > N) begin : g_bad_pos
    $error("challenge_seg: C2_POS must be at most N");
  end

  always_comb begin
    c1 = '0;
    c2 = '0;
    for (int unsigned i = 0; i < N + C2_W; i++) begin
      if (i < C2_POS)             c1[i]          = chal[i];
      else if (i < C2_POS + C2_W) c2[i - C2_POS] = chal[i];
      else                        c1[i - C2_W]   = chal[i];
    end
    c1_invalid = (c1 == '0) || (c1 == '1);
  end

endmodule
