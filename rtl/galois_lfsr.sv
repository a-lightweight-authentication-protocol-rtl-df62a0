// galois_lfsr: the N-stage LFSR unit of the LFSR-APUF.
//
// A Galois (internal-XOR) LFSR, the type the paper chooses for its shorter
// feedback path. `load` copies the seed C1 into the register; each cycle with
// `shift` (the control unit's S_L) high advances it one step:
//   state <= (state >> 1) ^ (state[0] ? poly : 0)
// where `poly` is the tap mask of the device's primitive polynomial p_k (bit
// i set for tap i+1, so x^64+x^63+x^61+x^60+1 is 64'hD800...). The paper
// makes p_k a per-device choice; supplying it as an input lets the same RTL
// serve every device. `load` wins over `shift`. The state is the obfuscated
// challenge C_O and is valid the cycle after the load or shift.
module galois_lfsr #(
  parameter int unsigned N = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [N-1:0] seed,
  input  logic         shift,
  input  logic [N-1:0] poly,
  output logic [N-1:0] state
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      state <= '0;
    else if (load)
      state <= seed;
    else if (shift)
      state <= (state >> 1) ^ (state[0] ? poly : '0);
  end

endmodule
