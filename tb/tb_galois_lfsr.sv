// tb_galois_lfsr: loads random seeds into the 64-stage LFSR, applies random
// runs of shift pulses (with idle cycles between them) and compares every
// state with the reference Galois step. A second, 8-stage instance with the
// primitive x^8+x^6+x^5+x^4+1 must return to its seed after exactly 255
// shifts and not before, i.e. run through a maximal-length sequence.
module tb_galois_lfsr;
  import tb_ref_pkg::*;
  localparam int N = 64;
  localparam logic [63:0] POLY = 64'hD800_0000_0000_0000;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         load, shift, load8, shift8;
  logic [N-1:0] seed, state;
  logic [7:0]   seed8, state8;

  galois_lfsr #(.N(N)) dut (.clk, .rst_n, .load, .seed, .shift, .poly(POLY), .state);
  galois_lfsr #(.N(8)) dut8 (.clk, .rst_n, .load(load8), .seed(seed8), .shift(shift8),
                             .poly(8'hB8), .state(state8));

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t ref_s;
    int first_return;
    load = 0; shift = 0; seed = '0; load8 = 0; shift8 = 0; seed8 = '0;
    repeat (2) @(posedge clk);
    #1 check("reset clears", state == '0);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      seed = {$urandom, $urandom};
      load = 1; shift = 1;            // load has priority
      @(posedge clk); #1;
      load = 0; shift = 0;
      check("load", state == seed);
      ref_s = vec_t'(seed);
      for (int k = 0; k < 50; k++) begin
        shift = ($urandom % 3) != 0;
        @(posedge clk); #1;
        if (shift) ref_s = lfsr_step(ref_s, vec_t'(POLY), N);
        check("step", state == ref_s[N-1:0]);
      end
      shift = 0;
    end
    // period of the 8-bit maximal LFSR
    seed8 = 8'h5A; load8 = 1;
    @(posedge clk); #1 load8 = 0; shift8 = 1;
    first_return = 0;
    for (int k = 1; k <= 300; k++) begin
      @(posedge clk); #1;
      if (state8 == 8'h5A && first_return == 0) first_return = k;
      if (state8 == 8'h00) check("never zero", 1'b0);
    end
    check("period 255", first_return == 255);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
