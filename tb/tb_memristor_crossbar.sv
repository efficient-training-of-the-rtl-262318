// tb_memristor_crossbar - self-checking test of the crossbar model.
//
// Starts from uniform weights (every cell at G_ref), applies random
// potentiating/depressing pulses row by row and compares forward column
// currents, backward row currents and both reference currents with a model
// that tracks each cell as an integer number of pulse steps (linear device,
// 20 levels, clamped at G_MIN/G_MAX). A second instance with non-linear
// potentiation (alpha_p = 3) is checked against Eq. 4 for the first pulses.
// Currents must be valid one clock after the read strobe. Further instances
// check the device non-idealities: with yield 0 every cell is stuck at
// G_MIN or G_MAX and ignores pulses; with 10 % read noise repeated reads
// spread with the expected sd; with device-to-device variation of the
// non-linearity one pulse moves different cells by different steps.
// Two differential-pair instances (increase-only and decrease-only devices)
// follow the random pulse phase and are checked against a model that
// counts the steps of the positive and the negative device of each cell.
// The per-cell write counts (largest count, cells written) are checked
// at the end.
module tb_memristor_crossbar;
  localparam int ROWS = 4, COLS = 3;
  localparam real GMAX = 101000.0, GMIN = 1000.0, VR = 0.1;

  logic clk = 0, init = 0, fwd = 0, bwd = 0, wr_valid = 0;
  logic [ROWS-1:0] vin = '0;
  logic [COLS-1:0] hin = '0, wr_pot = '0, wr_dep = '0;
  logic [1:0] wr_row = '0;
  longint i_col [COLS];
  longint i_row [ROWS];
  longint i_ref_col, i_ref_row;
  logic [31:0] n_pulses;
  longint i_col2 [COLS];
  longint i_row2 [ROWS];
  longint i_ref_col2, i_ref_row2;
  logic [31:0] n_pulses2;

  // stuck cells (yield 0), read noise, device-to-device variation
  longint ic_y [COLS], ir_y [ROWS], ic_n [COLS], ir_n [ROWS], ic_d [COLS], ir_d [ROWS];
  longint rc_y, rr_y, rc_n, rr_n, rc_d, rr_d;
  logic [31:0] np_y, np_n, np_d;

  // differential pairs: increase-only (pi) and decrease-only (pd) devices
  longint ic_pi [COLS], ir_pi [ROWS], ic_pd [COLS], ir_pd [ROWS];
  longint rc_pi, rr_pi, rc_pd, rr_pd;
  logic [31:0] np_pi, np_pd;
  logic pair_en = 0;
  int pos_i [ROWS][COLS], neg_i [ROWS][COLS], pos_d [ROWS][COLS], neg_d [ROWS][COLS];

  int checks = 0, failures = 0;
  int lvl [ROWS][COLS];   // pulse steps above G_MIN (G_ref = 10)
  int exp_pulses = 0;
  int cw [ROWS][COLS];    // pulses per cell received by dut
  logic [31:0] max_cw, n_cw;

  memristor_crossbar #(.ROWS(ROWS), .COLS(COLS), .INIT_SPREAD(0)) dut (
    .clk, .init, .fwd, .vin, .bwd, .hin, .wr_valid, .wr_row, .wr_pot, .wr_dep,
    .i_col, .i_ref_col, .i_row, .i_ref_row, .n_pulses,
    .max_cell_pulses(max_cw), .n_cells_written(n_cw));

  memristor_crossbar #(.ROWS(ROWS), .COLS(COLS), .INIT_SPREAD(0), .ALPHA_P(3.0)) dut_nl (
    .clk, .init, .fwd, .vin, .bwd, .hin, .wr_valid, .wr_row, .wr_pot, .wr_dep('0),
    .i_col(i_col2), .i_ref_col(i_ref_col2), .i_row(i_row2), .i_ref_row(i_ref_row2),
    .n_pulses(n_pulses2), .max_cell_pulses(), .n_cells_written());

  memristor_crossbar #(.ROWS(ROWS), .COLS(COLS), .INIT_SPREAD(0), .YIELD(0.0)) dut_y (
    .clk, .init, .fwd, .vin, .bwd, .hin, .wr_valid, .wr_row, .wr_pot, .wr_dep,
    .i_col(ic_y), .i_ref_col(rc_y), .i_row(ir_y), .i_ref_row(rr_y), .n_pulses(np_y), .max_cell_pulses(),
    .n_cells_written());

  memristor_crossbar #(.ROWS(ROWS), .COLS(COLS), .INIT_SPREAD(0), .READ_NOISE(0.1)) dut_n (
    .clk, .init, .fwd, .vin, .bwd, .hin, .wr_valid(1'b0), .wr_row, .wr_pot, .wr_dep,
    .i_col(ic_n), .i_ref_col(rc_n), .i_row(ir_n), .i_ref_row(rr_n), .n_pulses(np_n), .max_cell_pulses(),
    .n_cells_written());

  memristor_crossbar #(.ROWS(ROWS), .COLS(COLS), .INIT_SPREAD(0), .ALPHA_P(3.0),
                       .D2D_SD(1.0)) dut_d (
    .clk, .init, .fwd, .vin, .bwd, .hin, .wr_valid, .wr_row, .wr_pot, .wr_dep('0),
    .i_col(ic_d), .i_ref_col(rc_d), .i_row(ir_d), .i_ref_row(rr_d), .n_pulses(np_d), .max_cell_pulses(),
    .n_cells_written());

  memristor_crossbar #(.ROWS(ROWS), .COLS(COLS), .INIT_SPREAD(0), .DIFF_PAIR(1'b1),
                       .PAIR_INC(1'b1)) dut_pi (
    .clk, .init, .fwd, .vin, .bwd, .hin, .wr_valid(wr_valid && pair_en), .wr_row, .wr_pot,
    .wr_dep, .i_col(ic_pi), .i_ref_col(rc_pi), .i_row(ir_pi), .i_ref_row(rr_pi),
    .n_pulses(np_pi), .max_cell_pulses(),
    .n_cells_written());

  memristor_crossbar #(.ROWS(ROWS), .COLS(COLS), .INIT_SPREAD(0), .DIFF_PAIR(1'b1),
                       .PAIR_INC(1'b0)) dut_pd (
    .clk, .init, .fwd, .vin, .bwd, .hin, .wr_valid(wr_valid && pair_en), .wr_row, .wr_pot,
    .wr_dep, .i_col(ic_pd), .i_ref_col(rc_pd), .i_row(ir_pd), .i_ref_row(rr_pd),
    .n_pulses(np_pd), .max_cell_pulses(),
    .n_cells_written());

  always #5 clk = ~clk;

  // every cell of the yield-0 array is stuck at G_MIN or G_MAX: a single
  // driven row reads back exactly one of the two
  task automatic check_stuck(string when);
    for (int i = 0; i < ROWS; i++) begin
      vin = ROWS'(1) << i;
      @(negedge clk) fwd = 1;
      @(negedge clk) fwd = 0;
      for (int j = 0; j < COLS; j++)
        chk(ic_y[j] == fa(0, 1) || ic_y[j] == fa(20, 1),
            $sformatf("%s: stuck cell (%0d,%0d) reads %0d", when, i, j, ic_y[j]));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint fa(int steps_sum, int n);
    // sum of conductances (in nS) times V_R, in fA
    return longint'((real'(n) * GMIN + real'(steps_sum) * 5000.0) * VR * 1.0e6);
  endfunction

  task automatic check_reads();
    int s, n;
    vin = ROWS'($urandom);
    hin = COLS'($urandom);
    @(negedge clk) begin fwd = 1; bwd = 1; end
    @(negedge clk) begin fwd = 0; bwd = 0; end
    n = $countones(vin);
    for (int j = 0; j < COLS; j++) begin
      s = 0;
      for (int i = 0; i < ROWS; i++) if (vin[i]) s += lvl[i][j];
      chk(i_col[j] == fa(s, n), $sformatf("i_col[%0d] %0d vs %0d", j, i_col[j], fa(s, n)));
    end
    chk(i_ref_col == fa(10 * n, n), "i_ref_col");
    // pairs read G_ref + G_pos - G_neg
    for (int j = 0; j < COLS; j++) begin
      int si, sd;
      si = 0; sd = 0;
      for (int i = 0; i < ROWS; i++) if (vin[i]) begin
        si += 10 + pos_i[i][j] - neg_i[i][j];
        sd += 10 + pos_d[i][j] - neg_d[i][j];
      end
      chk(ic_pi[j] == fa(si, n), $sformatf("pair inc i_col[%0d] %0d vs %0d", j, ic_pi[j], fa(si, n)));
      chk(ic_pd[j] == fa(sd, n), $sformatf("pair dec i_col[%0d] %0d vs %0d", j, ic_pd[j], fa(sd, n)));
    end
    chk(rc_pi == fa(10 * n, n) && rc_pd == fa(10 * n, n), "pair i_ref_col");
    n = $countones(hin);
    for (int i = 0; i < ROWS; i++) begin
      s = 0;
      for (int j = 0; j < COLS; j++) if (hin[j]) s += lvl[i][j];
      chk(i_row[i] == fa(s, n), $sformatf("i_row[%0d] %0d vs %0d", i, i_row[i], fa(s, n)));
    end
    chk(i_ref_row == fa(10 * n, n), "i_ref_row");
  endtask

  initial begin
    real g, d, a, expd;
    #12;
    @(negedge clk) init = 1;
    @(negedge clk) init = 0;
    for (int i = 0; i < ROWS; i++) for (int j = 0; j < COLS; j++) begin
      lvl[i][j] = 10; cw[i][j] = 0;
      pos_i[i][j] = 0; neg_i[i][j] = 0; pos_d[i][j] = 20; neg_d[i][j] = 20;
    end
    check_reads();
    check_stuck("after init");
    // read noise: one driven row, every cell at G_ref; sd = 0.1*sqrt(4)*G_ref
    begin
      real m1, m2, x, sd, sd_exp;
      m1 = 0.0; m2 = 0.0;
      vin = 4'b1111;
      for (int t = 0; t < 400; t++) begin
        @(negedge clk) fwd = 1;
        @(negedge clk) fwd = 0;
        x = real'(ic_n[t % COLS]) / (VR * 1.0e6);
        m1 += x; m2 += x * x;
      end
      m1 /= 400.0;
      sd = $sqrt(m2 / 400.0 - m1 * m1);
      sd_exp = 0.1 * 2.0 * (GMAX + GMIN) / 2.0;
      chk(sd > 0.8 * sd_exp && sd < 1.2 * sd_exp, $sformatf("read noise sd %f vs %f", sd, sd_exp));
      chk(m1 > 4.0 * 51000.0 - 3.0 * sd_exp / 20.0 * 4.0 && m1 < 4.0 * 51000.0 + 3.0 * sd_exp / 20.0 * 4.0,
          $sformatf("read noise mean %f", m1));
    end
    // device-to-device variation: one pulse on all cells of row 1 gives
    // different steps from cell to cell, all positive
    begin
      longint ic_d0 [COLS];
      bit differ;
      vin = 4'b0010;
      @(negedge clk) fwd = 1;
      @(negedge clk) fwd = 0;
      for (int j = 0; j < COLS; j++) ic_d0[j] = ic_d[j];
      @(negedge clk) begin wr_valid = 1; wr_row = 1; wr_pot = '1; wr_dep = '0; end
      @(negedge clk) wr_valid = 0;
      @(negedge clk) fwd = 1;
      @(negedge clk) fwd = 0;
      differ = 0;
      for (int j = 0; j < COLS; j++) begin
        chk(ic_d[j] > ic_d0[j], "d2d: potentiation raises G");
        if (j > 0 && (ic_d[j] - ic_d0[j]) != (ic_d[0] - ic_d0[0])) differ = 1;
      end
      chk(differ, "d2d: steps differ between cells");
      for (int j = 0; j < COLS; j++) begin lvl[1][j]++; cw[1][j]++; end
      exp_pulses += COLS;
    end
    // non-linear device: potentiate cell (0,0) three times from G_ref
    g = (GMAX + GMIN) / 2.0;
    a = 3.0;
    for (int p = 0; p < 3; p++) begin
      @(negedge clk) begin wr_valid = 1; wr_row = 0; wr_pot = 3'b001; wr_dep = 3'b000; end
      @(negedge clk) wr_valid = 0;
      expd = ((GMAX - GMIN) / (1.0 - $exp(-a)) - (g - GMIN)) * (1.0 - $exp(-a / 20.0));
      g = g + expd;
      vin = 4'b0001;
      @(negedge clk) fwd = 1;
      @(negedge clk) fwd = 0;
      d = real'(i_col2[0]) / (VR * 1.0e6) - g;
      chk(d < 1.0 && d > -1.0, $sformatf("non-linear pulse %0d: G %f vs %f", p,
                                          real'(i_col2[0]) / (VR * 1.0e6), g));
      lvl[0][0] = (lvl[0][0] < 20) ? lvl[0][0] + 1 : 20;
      exp_pulses++; cw[0][0]++;
    end
    pair_en = 1;
    for (int t = 0; t < 150; t++) begin
      logic [COLS-1:0] p, q;
      int r;
      r = $urandom % ROWS;
      p = COLS'($urandom);
      q = COLS'($urandom) & ~p;
      if (t > 100) q = '0;       // finish by pushing cells into G_MAX
      @(negedge clk) begin wr_valid = 1; wr_row = 2'(r); wr_pot = p; wr_dep = q; end
      @(negedge clk) wr_valid = 0;
      for (int j = 0; j < COLS; j++) begin
        if (p[j]) lvl[r][j] = (lvl[r][j] < 20) ? lvl[r][j] + 1 : 20;
        if (q[j]) lvl[r][j] = (lvl[r][j] > 0) ? lvl[r][j] - 1 : 0;
        if (p[j] || q[j]) begin exp_pulses++; cw[r][j]++; end
        // increase-only: pot raises G_pos, dep raises G_neg;
        // decrease-only: pot lowers G_neg, dep lowers G_pos
        if (p[j]) begin
          pos_i[r][j] = (pos_i[r][j] < 20) ? pos_i[r][j] + 1 : 20;
          neg_d[r][j] = (neg_d[r][j] > 0) ? neg_d[r][j] - 1 : 0;
        end
        if (q[j]) begin
          neg_i[r][j] = (neg_i[r][j] < 20) ? neg_i[r][j] + 1 : 20;
          pos_d[r][j] = (pos_d[r][j] > 0) ? pos_d[r][j] - 1 : 0;
        end
      end
      check_reads();
    end
    check_stuck("after pulses");
    chk(n_pulses == 32'(exp_pulses), $sformatf("pulse count %0d vs %0d", n_pulses, exp_pulses));
    begin
      int mx, nc;
      mx = 0; nc = 0;
      for (int i = 0; i < ROWS; i++) for (int j = 0; j < COLS; j++) begin
        if (cw[i][j] > mx) mx = cw[i][j];
        if (cw[i][j] > 0) nc++;
      end
      chk(max_cw == 32'(mx), $sformatf("most pulses on one cell %0d vs %0d", max_cw, mx));
      chk(n_cw == 32'(nc), $sformatf("cells written %0d vs %0d", n_cw, nc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
