// tb_vote_mask: feeds groups of NV = 5 raw responses with every possible
// number of ones and checks the majority bit, the stability flag (at least
// 4 of 5 agree), the captured challenge and that r_valid comes exactly one
// cycle after the fifth raw bit. Gaps between raw bits and a clear in the
// middle of a vote are exercised too.
module tb_vote_mask;
  localparam int N = 16, NV = 5, SM = 4;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         clear, ro, ro_valid, r, r_stable, r_valid;
  logic [N-1:0] co, vote_co;

  vote_mask #(.N(N), .NV(NV), .STABLE_MIN(SM)) dut (.*);

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic vote(logic [NV-1:0] bits, logic [N-1:0] c, bit gaps);
    int ones;
    ones = $countones(bits);
    clear = 1; @(posedge clk); #1 clear = 0;
    for (int i = 0; i < NV; i++) begin
      if (gaps) begin ro_valid = 0; repeat ($urandom % 3) @(posedge clk); #1; end
      co = (i == 0) ? c : ~c;     // later votes must not replace the capture
      ro = bits[i]; ro_valid = 1;
      @(posedge clk); #1;
      ro_valid = 0;
      if (i < NV - 1) check("no early r_valid", !r_valid);
    end
    check("r_valid after 5th", r_valid);
    check("majority", r == (ones > NV / 2));
    check("stable flag", r_stable == ((ones >= SM) || (NV - ones >= SM)));
    check("captured co", vote_co == c);
    @(posedge clk); #1;
    check("r_valid one cycle", !r_valid);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; ro = 0; ro_valid = 0; co = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int b = 0; b < 32; b++) vote(5'(b), 16'(b * 97 + 1), 1'b0);
    for (int b = 0; b < 32; b++) vote(5'($urandom), 16'($urandom), 1'b1);
    // clear in the middle of a vote restarts it
    ro = 1; ro_valid = 1; @(posedge clk); #1;
    ro_valid = 1; @(posedge clk); #1; ro_valid = 0;
    vote(5'b00000, 16'h1234, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
