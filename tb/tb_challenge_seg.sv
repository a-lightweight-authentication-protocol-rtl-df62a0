// tb_challenge_seg: checks the block segmentation of the external challenge
// with C2 at the start of C (default), at the end, and in the middle (C2 at
// bits 30..33), and the all-zeros / all-ones seed flag, on random and
// corner-case challenges. Expected fields are cut out with part-selects.
module tb_challenge_seg;
  localparam int N = 64, C2W = 4, MID = 30;
  int checks = 0, failures = 0;

  logic [N+C2W-1:0] chal;
  logic [N-1:0]     c1_a, c1_b, c1_m;
  logic [C2W-1:0]   c2_a, c2_b, c2_m;
  logic             bad_a, bad_b, bad_m;

  challenge_seg #(.N(N), .C2_W(C2W)) dut_a (.chal(chal), .c1(c1_a), .c2(c2_a), .c1_invalid(bad_a));
  challenge_seg #(.N(N), .C2_W(C2W), .C2_POS(0)) dut_b (.chal(chal), .c1(c1_b), .c2(c2_b), .c1_invalid(bad_b));
  challenge_seg #(.N(N), .C2_W(C2W), .C2_POS(MID)) dut_m (.chal(chal), .c1(c1_m), .c2(c2_m), .c1_invalid(bad_m));

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s chal=%h", what, chal);
    end
  endtask

  function automatic logic stuck(logic [N-1:0] s);
    return (s == '0) || (s == '1);
  endfunction

  task automatic apply(logic [N+C2W-1:0] v);
    logic [N-1:0] e1a, e1b, e1m;
    chal = v;
    #1;
    e1a = v[N-1:0];
    e1b = v[N+C2W-1:C2W];
    e1m = {v[N+C2W-1:MID+C2W], v[MID-1:0]};
    check("c2 at start", c2_a == v[N+C2W-1:N]);
    check("c1 after c2", c1_a == e1a);
    check("invalid (start)", bad_a == stuck(e1a));
    check("c2 at end", c2_b == v[C2W-1:0]);
    check("c1 before c2", c1_b == e1b);
    check("invalid (end)", bad_b == stuck(e1b));
    check("c2 in the middle", c2_m == v[MID+C2W-1:MID]);
    check("c1 around c2", c1_m == e1m);
    check("invalid (middle)", bad_m == stuck(e1m));
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int flagged;
    apply('0);
    apply('1);
    apply({4'b0110, {N{1'b0}}});
    apply({4'b0110, {N{1'b1}}});
    apply({{N{1'b1}}, 4'b1010});
    apply({{(N-MID){1'b1}}, 4'b0101, {MID{1'b1}}});
    for (int i = 0; i < 200; i++) apply((N+C2W)'({$urandom, $urandom, $urandom}));
    // the all-ones seed must be flagged at every position
    flagged = 0;
    apply({4'b0000, {N{1'b1}}});
    flagged += int'(bad_a);
    apply({{N{1'b1}}, 4'b0000});
    flagged += int'(bad_b);
    apply({{(N-MID){1'b1}}, 4'b0000, {MID{1'b1}}});
    flagged += int'(bad_m);
    check("all-ones seed flagged at start, end and middle", flagged == 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
