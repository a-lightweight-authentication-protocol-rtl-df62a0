// tb_cover_enc: checks the Cover function at the paper's size (l = 128,
// t = 10) and at the 140-bit size the authentication link uses. Each random
// (X, Y, F, filler mask) is compared stage by stage with the reference in
// tb_ref_pkg, which walks the pointers of the bit rearrangement literally
// and inserts filler bits from queues. Also checks the printed example of
// the paper's rearrangement figure: with Y = 1110110010... and
// X = 0100011101..., the first six bits of Z are 0,1,0,0,1,0; and the
// printed examples of the cross XOR (Y = 1110110010, Z = 0100100011 gives
// W = 1001010010) and of bit filling (first eleven bits of O).
module tb_cover_enc;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [127:0] x, y, z, w;
  logic [9:0]   f;
  logic [137:0] m, o;
  logic [139:0] x2, y2, z2, w2;
  logic [149:0] m2, o2;
  logic [116:0] mid;

  cover_enc #(.L(128), .T(10)) dut  (.x(x), .y(y), .f(f), .fill_mask(m), .z(z), .w(w), .o(o));
  cover_enc #(.L(140), .T(10)) dut2 (.x(x2), .y(y2), .f(f), .fill_mask(m2), .z(z2), .w(w2), .o(o2));

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t rz, rw;
    // printed example (rest of both vectors zero)
    x = {10'b0100011101, 118'b0};
    y = {10'b1110110010, 118'b0};
    f = '0; m = {10'h3FF, 128'b0};
    x2 = '0; y2 = '0; m2 = '0;
    #1;
    check("figure example z1..z6", z[127:122] == 6'b010010);
    // printed cross XOR example: Y = 1110110010..., Z = 0100100011...
    // gives W = 1001010010... . With this Y, z1..z10 are x1, x2, x3, x5,
    // x6, x9, x128, x127, x126, x125, so X is chosen to give that Z.
    x = '0;
    {x[127], x[126], x[125], x[123], x[122], x[119]} = 6'b010010;
    {x[0], x[1], x[2], x[3]} = 4'b0011;
    #1;
    check("figure example Z for cross XOR", z[127:118] == 10'b0100100011);
    check("figure example w1..w10", w[127:118] == 10'b1001010010);
    // printed bit-filling example: W = 1001010..., filler bits f1..f5 at
    // o1..o5 and f6 at o7 with F = 0,1,1,1,0,0,...; O = 01110100010... .
    // With Y = 0 there is nothing to XOR and Z = Per(X, 0) is X reversed,
    // so X is W reversed. Only o1..o11 are compared: the figure's tail is
    // not consistent with its own W (o134 is printed 1 where w127 is 0).
    y = '0;
    mid = 117'(rand_vec(117));
    x = {<<{ {7'b1001010, mid, 4'b1101} }};
    m = '0;
    m[137:133] = '1; m[131] = 1'b1;
    m[5] = 1'b1; m[3] = 1'b1; m[2] = 1'b1; m[0] = 1'b1;
    f = 10'b0111000010;
    #1;
    check("figure example W", w[127:121] == 7'b1001010);
    check("figure example o1..o11", o[137:127] == 11'b01110100010);
    for (int t = 0; t < 300; t++) begin
      x = 128'(rand_vec(128)); y = 128'(rand_vec(128)); f = 10'($urandom);
      if (t == 1) y = '0;
      if (t == 2) y = '1;
      m = 138'(rand_mask(128, 10));
      x2 = 140'(rand_vec(140)); y2 = 140'(rand_vec(140));
      m2 = 150'(rand_mask(140, 10));
      #1;
      rz = per(vec_t'(x), vec_t'(y), 128);
      rw = rz ^ swap_pairs(vec_t'(y), 128);
      check("Per", z == rz[127:0]);
      check("cross XOR", w == rw[127:0]);
      check("Cover 128", o == 138'(cover_ref(vec_t'(x), vec_t'(y), vec_t'(f), vec_t'(m), 128, 10)));
      rz = per(vec_t'(x2), vec_t'(y2), 140);
      check("Per 140", z2 == rz[139:0]);
      rw = rz ^ swap_pairs(vec_t'(y2), 140);
      check("cross XOR 140", w2 == rw[139:0]);
      check("Cover 140", o2 == 150'(cover_ref(vec_t'(x2), vec_t'(y2), vec_t'(f), vec_t'(m2), 140, 10)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
