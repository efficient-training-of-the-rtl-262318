// tb_label_vote - self-checking test of the repeated-sampling vote counter.
//
// Feeds random one-hot label samples (biased towards a random target
// label) and compares the reported winner and its count, after every
// sample, with counts kept by the testbench (ties to the lowest index).
// Also checks clear and saturation at MAX_REP.
module tb_label_vote;
  localparam int NL = 10, MR = 50;
  logic clk = 0, rst_n = 0, clear = 0, valid = 0;
  logic [NL-1:0] lab = '0;
  logic [3:0] best;
  logic [5:0] best_count;
  int checks = 0, failures = 0;
  int cnt [NL];

  label_vote #(.N_LAB(NL), .MAX_REP(MR)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic compare();
    int b, bc;
    b = 0; bc = cnt[0];
    for (int k = 1; k < NL; k++) if (cnt[k] > bc) begin b = k; bc = cnt[k]; end
    chk(best == 4'(b), $sformatf("best %0d vs %0d", best, b));
    chk(best_count == 6'(bc), $sformatf("count %0d vs %0d", best_count, bc));
  endtask

  initial begin
    #22 rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      int tgt, n;
      tgt = $urandom % NL;
      n = (r == 19) ? 70 : 1 + $urandom % MR;
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      for (int k = 0; k < NL; k++) cnt[k] = 0;
      compare();
      for (int t = 0; t < n; t++) begin
        int l;
        l = (($urandom % 100) < 40) ? tgt : $urandom % NL;
        @(negedge clk) begin valid = 1; lab = NL'(1) << l; end
        @(negedge clk) valid = 0;
        if (cnt[l] < MR) cnt[l]++;
        compare();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
