// tb_apuf_model: checks the behavioural arbiter PUF against the delay
// model written independently in tb_ref_pkg: with jitter off, every
// response must be 1 exactly when the upper path is faster. Also checks
// that a response is produced once per rising edge of S_A (not while S_A
// stays high), one cycle later; that setting the upper tuning bits delays
// the upper path; that two instances (seeds) do not answer alike (the
// untuned model is biased, like the untuned hardware, so only a modest
// share of differing answers is required); and, with jitter on, that only challenges whose delay
// difference lies within the jitter range ever change their answer.
module tb_apuf_model;
  import tb_ref_pkg::*;
  localparam int N = 64, K = 8, STEP = 16, NOISE = 8;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] co;
  logic         sa;
  logic [K-1:0] tu, td;
  logic         ro_a, rv_a, ro_b, rv_b, ro_n, rv_n;

  apuf_model #(.N(N), .K(K), .SEED(7), .NOISE(0), .TUNE_STEP(STEP)) dut_a
    (.clk, .rst_n, .co, .sa, .tune_u(tu), .tune_d(td), .ro(ro_a), .ro_valid(rv_a));
  apuf_model #(.N(N), .K(K), .SEED(8), .NOISE(0), .TUNE_STEP(STEP)) dut_b
    (.clk, .rst_n, .co, .sa, .tune_u(tu), .tune_d(td), .ro(ro_b), .ro_valid(rv_b));
  apuf_model #(.N(N), .K(K), .SEED(7), .NOISE(NOISE), .TUNE_STEP(STEP)) dut_n
    (.clk, .rst_n, .co, .sa, .tune_u(tu), .tune_d(td), .ro(ro_n), .ro_valid(rv_n));

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic launch(int hold);
    sa = 1;
    @(posedge clk); #1;
    check("valid one cycle after rise", rv_a && rv_b && rv_n);
    for (int h = 1; h < hold; h++) begin
      @(posedge clk); #1;
      check("no response while S_A held", !rv_a);
    end
    sa = 0;
    @(posedge clk); #1;
    check("single pulse", !rv_a);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d, differ, ones_before, ones_after, flips, bad_flips;
    logic first;
    co = '0; sa = 0; tu = '0; td = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    differ = 0; ones_before = 0;
    for (int t = 0; t < 300; t++) begin
      co = {$urandom, $urandom};
      launch(1 + (t % 3));
      d = apuf_delta(7, 0, vec_t'(co), N, 32'(tu), 32'(td), K, STEP);
      check("response matches delay model", ro_a == (d < 0));
      if (ro_a != ro_b) differ++;
      if (ro_a) ones_before++;
    end
    check("two instances differ", differ >= 10);
    $display("instances differ on %0d of 300", differ);
    // upper tuning bits make the upper path slower: fewer ones
    tu = '1;
    ones_after = 0;
    for (int t = 0; t < 300; t++) begin
      co = {$urandom, $urandom};
      launch(1);
      d = apuf_delta(7, 0, vec_t'(co), N, 32'(tu), 32'(td), K, STEP);
      check("tuned response matches", ro_a == (d < 0));
      if (ro_a) ones_after++;
    end
    check("tuning shifts the balance", ones_after < ones_before);
    tu = '0;
    // jitter only flips marginal challenges
    flips = 0; bad_flips = 0;
    for (int t = 0; t < 200; t++) begin
      co = {$urandom, $urandom};
      d = apuf_delta(7, 0, vec_t'(co), N, 32'(tu), 32'(td), K, STEP);
      for (int v = 0; v < 5; v++) begin
        launch(1);
        if (v == 0) first = ro_n;
        else if (ro_n != first) begin
          flips++;
          if (d > NOISE || d < -NOISE) bad_flips++;
        end
        if (d > NOISE || d < -NOISE) check("clear answer with jitter", ro_n == (d < 0));
      end
    end
    check("no flips outside jitter range", bad_flips == 0);
    $display("jitter flips seen: %0d", flips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
