// tb_rbm_layer - self-checking test of one mixed-signal RBM layer.
//
// With the neuron noise off the layer is deterministic, so the testbench
// can follow it exactly with its own model: weights as integer pulse
// levels (linear device, 20 levels, all starting at G_ref), hidden states
// h_j = [sum_i v_i (L_ij - L_ref) >= 0], visible states likewise, the two
// label rows one-hot on the largest row current, CD counters with a
// threshold of 2 and the resulting pulses. Random inputs (label rows
// one-hot) are trained for many steps; h, v', both pulse counts and the
// crossbar pulse count are compared after every step, and so are the
// LC_FWD / LC_BWD results and every command's start-to-done latency.
// A final phase turns the noise on and checks that the states then vary
// between repeated forward passes of the same input.
module tb_rbm_layer;
  import dbn_pkg::*;
  localparam int M = 6, N = 4, NL = 2, TH = 2;

  logic clk = 0, rst_n = 0, start = 0, noise_en = 0;
  layer_cmd_e cmd = LC_FWD;
  logic [M-1:0] v_in = '0;
  logic busy, done;
  logic [N-1:0] h_out;
  logic [M-1:0] vr_out;
  logic [31:0] n_pot, n_dep, n_pulses, max_cell_pulses, n_cells_written;
  int cw [M][N];          // model: pulses per cell
  int checks = 0, failures = 0;

  int lvl [M][N];
  int cdc [M][N];
  int e_pot = 0, e_dep = 0;

  rbm_layer #(.M(M), .N(N), .N_LAB_ROWS(NL), .TH(TH), .INIT_SPREAD(0)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(layer_cmd_e c, int exp_lat);
    int lat;
    @(negedge clk) begin start = 1; cmd = c; end
    @(negedge clk) start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    chk(lat == exp_lat, $sformatf("%s latency %0d vs %0d", c.name(), lat, exp_lat));
    @(negedge clk);
  endtask

  function automatic logic [N-1:0] m_fwd(logic [M-1:0] v);
    for (int j = 0; j < N; j++) begin
      int s;
      s = 0;
      for (int i = 0; i < M; i++) if (v[i]) s += lvl[i][j] - 10;
      m_fwd[j] = (s >= 0);
    end
  endfunction

  function automatic logic [M-1:0] m_bwd(logic [N-1:0] h);
    int best, w;
    best = 0; w = -1;
    for (int i = 0; i < M; i++) begin
      int s;
      s = 0;
      for (int j = 0; j < N; j++) if (h[j]) s += lvl[i][j] - 10;
      if (i < M - NL) m_bwd[i] = (s >= 0);
      else begin
        m_bwd[i] = 1'b0;
        if (w < 0 || s > best) begin best = s; w = i; end
      end
    end
    m_bwd[w] = 1'b1;
  endfunction

  function automatic logic [M-1:0] rnd_v();
    logic [M-1:0] v;
    v = M'($urandom);
    v[M-1:M-NL] = NL'(1) << ($urandom % NL);
    return v;
  endfunction

  initial begin
    logic [N-1:0] h, hr;
    logic [M-1:0] v, vr;
    int diff;
    #22 rst_n = 1;
    run(LC_INIT, M + 3);
    for (int i = 0; i < M; i++) for (int j = 0; j < N; j++) begin
      lvl[i][j] = 10; cdc[i][j] = 0; cw[i][j] = 0;
    end
    for (int t = 0; t < 300; t++) begin
      v = rnd_v();
      v_in = v;
      if (t % 10 == 5) begin
        run(LC_FWD, 5);
        h = m_fwd(v);
        chk(h_out == h, $sformatf("fwd h %b vs %b", h_out, h));
        run(LC_BWD, 4);
        vr = m_bwd(h);
        chk(vr_out == vr, $sformatf("bwd v' %b vs %b", vr_out, vr));
        continue;
      end
      run(LC_TRAIN, 13 + M);
      h = m_fwd(v);
      vr = m_bwd(h);
      hr = m_fwd(vr);
      chk(h_out == h, $sformatf("step %0d h %b vs %b", t, h_out, h));
      chk(vr_out == vr, $sformatf("step %0d v' %b vs %b", t, vr_out, vr));
      for (int i = 0; i < M; i++) for (int j = 0; j < N; j++) begin
        int c;
        c = cdc[i][j] + ((v[i] & h[j]) ? 1 : 0) - ((vr[i] & hr[j]) ? 1 : 0);
        if (c >= TH) begin
          e_pot++; c = 0; cw[i][j]++;
          lvl[i][j] = (lvl[i][j] < 20) ? lvl[i][j] + 1 : 20;
        end else if (c <= -TH) begin
          e_dep++; c = 0; cw[i][j]++;
          lvl[i][j] = (lvl[i][j] > 0) ? lvl[i][j] - 1 : 0;
        end
        cdc[i][j] = c;
      end
      chk(n_pot == 32'(e_pot), $sformatf("step %0d pot %0d vs %0d", t, n_pot, e_pot));
      chk(n_dep == 32'(e_dep), $sformatf("step %0d dep %0d vs %0d", t, n_dep, e_dep));
      chk(n_pulses == 32'(e_pot + e_dep), "crossbar pulse count");
      begin
        int mx, nc;
        mx = 0; nc = 0;
        for (int i = 0; i < M; i++) for (int j = 0; j < N; j++) begin
          if (cw[i][j] > mx) mx = cw[i][j];
          if (cw[i][j] > 0) nc++;
        end
        chk(max_cell_pulses == 32'(mx) && n_cells_written == 32'(nc),
            $sformatf("step %0d per-cell writes max %0d/%0d cells %0d/%0d", t,
                      max_cell_pulses, mx, n_cells_written, nc));
      end
    end
    chk(e_pot > 0 && e_dep > 0, $sformatf("both update directions seen: %0d %0d", e_pot, e_dep));
    // stochastic neurons: repeated forward passes of one input differ
    noise_en = 1;
    v_in = rnd_v();
    diff = 0;
    run(LC_FWD, 5);
    h = h_out;
    for (int t = 0; t < 40; t++) begin
      run(LC_FWD, 5);
      if (h_out != h) diff++;
    end
    chk(diff > 0, "noise makes hidden states stochastic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
