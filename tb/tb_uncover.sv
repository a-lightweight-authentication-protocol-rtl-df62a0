// tb_uncover: covers random messages with the reference Cover function of
// tb_ref_pkg (random nonce, filler bits and filler positions) and checks
// that the device's uncover unit returns the original message, at l = 128
// and at l = 140. Also checks that uncovering with a wrong nonce or wrong
// filler positions seldom returns the message (a one-bit change of the
// nonce can leave the result unchanged for some messages, so up to 10% is
// accepted).
module tb_uncover;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [137:0] o, m;
  logic [127:0] y, x;
  logic [149:0] o2, m2;
  logic [139:0] y2, x2;

  uncover #(.L(128), .T(10)) dut  (.o(o), .y(y), .fill_mask(m), .x(x));
  uncover #(.L(140), .T(10)) dut2 (.o(o2), .y(y2), .fill_mask(m2), .x(x2));

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
    vec_t msg, msg2, f, wrong;
    int wrong_ok;
    wrong_ok = 0;
    for (int t = 0; t < 300; t++) begin
      msg = rand_vec(128); msg2 = rand_vec(140); f = rand_vec(10);
      y = 128'(rand_vec(128)); y2 = 140'(rand_vec(140));
      m = 138'(rand_mask(128, 10)); m2 = 150'(rand_mask(140, 10));
      o  = 138'(cover_ref(msg, vec_t'(y), f, vec_t'(m), 128, 10));
      o2 = 150'(cover_ref(msg2, vec_t'(y2), f, vec_t'(m2), 140, 10));
      #1;
      check("uncover 128", x == msg[127:0]);
      check("uncover 140", x2 == msg2[139:0]);
      // wrong nonce
      wrong = vec_t'(y);
      y[$urandom % 128] ^= 1'b1;
      #1;
      if (x == msg[127:0]) wrong_ok++;
      y = 128'(wrong);
      // wrong filler positions
      m = 138'(rand_mask(128, 10));
      #1;
      if (x == msg[127:0]) wrong_ok++;
    end
    $display("wrong-key openings: %0d of 600", wrong_ok);
    check("wrong key rarely opens the message", wrong_ok < 60);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
