// tb_neuron_sampler - self-checking test of the neuron read-out model.
//
// Noise off: every comparator must return I_k >= I_ref exactly, and the
// label group (last 3 neurons) must be one-hot on its largest current.
// Noise on (sd = 1000 fA): over 4000 samples a neuron at I - I_ref = 0 must
// fire about half the time, at +1 sd about 84 % and at -1 sd about 16 %
// (Gaussian noise against Eq. 3); the label group must stay one-hot with
// each of three equal candidates winning about a third of the time.
module tb_neuron_sampler;
  localparam int K = 6, NS = 3;
  logic clk = 0, sample = 0, noise_en = 0;
  longint i_in [K];
  longint i_ref;
  logic [K-1:0] state;
  int checks = 0, failures = 0;

  neuron_sampler #(.K(K), .N_SOFT(NS), .NOISE_SD(1000.0)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic fire();
    @(negedge clk) sample = 1;
    @(negedge clk) sample = 0;
  endtask

  initial begin
    int cnt [K];
    i_ref = 0;
    for (int k = 0; k < K; k++) i_in[k] = 0;
    #12;
    // deterministic
    for (int t = 0; t < 200; t++) begin
      logic [K-1:0] e;
      longint best;
      int w;
      i_ref = longint'($urandom % 1000);
      for (int k = 0; k < K; k++) i_in[k] = longint'($urandom % 1000);
      fire();
      best = 0; w = -1;
      for (int k = 0; k < K; k++) begin
        e[k] = (k < K - NS) ? (i_in[k] >= i_ref) : 1'b0;
        if (k >= K - NS && (w < 0 || i_in[k] > best)) begin best = i_in[k]; w = k; end
      end
      e[w] = 1'b1;
      chk(state == e, $sformatf("deterministic %b vs %b", state, e));
    end
    // stochastic
    noise_en = 1;
    i_ref = 50000;
    i_in[0] = 50000; i_in[1] = 51000; i_in[2] = 49000;
    i_in[3] = 60000; i_in[4] = 60000; i_in[5] = 60000;
    for (int k = 0; k < K; k++) cnt[k] = 0;
    for (int t = 0; t < 4000; t++) begin
      fire();
      for (int k = 0; k < K; k++) cnt[k] += state[k];
      chk($countones(state[K-1:K-NS]) == 1, "label group one-hot");
    end
    chk(cnt[0] > 1800 && cnt[0] < 2200, $sformatf("P(fire | 0 sd) %0d/4000", cnt[0]));
    chk(cnt[1] > 3200 && cnt[1] < 3520, $sformatf("P(fire | +1 sd) %0d/4000", cnt[1]));
    chk(cnt[2] > 480 && cnt[2] < 800, $sformatf("P(fire | -1 sd) %0d/4000", cnt[2]));
    for (int k = K - NS; k < K; k++)
      chk(cnt[k] > 1150 && cnt[k] < 1520, $sformatf("label %0d wins %0d/4000", k, cnt[k]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
