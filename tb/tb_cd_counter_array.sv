// tb_cd_counter_array - self-checking test of the CD counter array.
//
// A reference model in the testbench keeps its own signed counters and
// applies CD_ij = v_i h_j - v'_i h'_j with the +/-TH threshold-and-reset
// rule. Random binary state vectors are applied for many passes (biased so
// that both thresholds are crossed); every row's potentiate/depress masks
// and the row index are compared with the model, and each pass must visit
// exactly ROWS rows in ROWS busy clocks. A clear in the middle must zero
// all counters.
module tb_cd_counter_array;
  localparam int ROWS = 5, COLS = 6, TH = 4;
  localparam int RW = $clog2(ROWS);

  logic clk = 0, rst_n = 0, start = 0, clear = 0;
  logic [ROWS-1:0] v, vr;
  logic [COLS-1:0] h, hr;
  logic busy, done, upd_valid;
  logic [RW-1:0] upd_row;
  logic [COLS-1:0] upd_pot, upd_dep;
  logic [31:0] n_pot, n_dep;

  int checks = 0, failures = 0;
  int refc [ROWS][COLS];
  int exp_pot = 0, exp_dep = 0;

  cd_counter_array #(.ROWS(ROWS), .COLS(COLS), .TH(TH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_clear();
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    wait (done);
    @(negedge clk);
    for (int i = 0; i < ROWS; i++) for (int j = 0; j < COLS; j++) refc[i][j] = 0;
    exp_pot = 0; exp_dep = 0;
  endtask

  task automatic run_pass(int bias);
    int rows_seen, busy_cyc;
    logic [COLS-1:0] ep, ed;
    for (int i = 0; i < ROWS; i++) begin
      v[i]  = ($urandom % 100) < 50 + bias;
      vr[i] = ($urandom % 100) < 50 - bias;
    end
    for (int j = 0; j < COLS; j++) begin
      h[j]  = ($urandom % 100) < 50 + bias;
      hr[j] = ($urandom % 100) < 50 - bias;
    end
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    rows_seen = 0; busy_cyc = 1;
    while (!done) begin
      @(posedge clk); #1;
      if (busy) busy_cyc++;
      if (upd_valid) begin
        int i;
        i = rows_seen;
        chk(upd_row == RW'(i), $sformatf("row index %0d vs %0d", upd_row, i));
        for (int j = 0; j < COLS; j++) begin
          int c;
          c = refc[i][j] + ((v[i] & h[j]) ? 1 : 0) - ((vr[i] & hr[j]) ? 1 : 0);
          ep[j] = (c >= TH);
          ed[j] = (c <= -TH);
          refc[i][j] = (ep[j] || ed[j]) ? 0 : c;
          if (ep[j]) exp_pot++;
          if (ed[j]) exp_dep++;
        end
        chk(upd_pot == ep, $sformatf("pot row %0d: %b vs %b", i, upd_pot, ep));
        chk(upd_dep == ed, $sformatf("dep row %0d: %b vs %b", i, upd_dep, ed));
        rows_seen++;
      end
    end
    chk(rows_seen == ROWS, $sformatf("rows per pass %0d", rows_seen));
    chk(busy_cyc == ROWS, $sformatf("busy clocks per pass %0d", busy_cyc));
  endtask

  initial begin
    v = '0; vr = '0; h = '0; hr = '0;
    #22 rst_n = 1;
    run_clear();
    for (int p = 0; p < 60; p++) run_pass(30);    // drive towards +TH
    for (int p = 0; p < 60; p++) run_pass(-30);   // drive towards -TH
    chk(n_pot == 32'(exp_pot) && exp_pot > 0, $sformatf("pot count %0d/%0d", n_pot, exp_pot));
    chk(n_dep == 32'(exp_dep) && exp_dep > 0, $sformatf("dep count %0d/%0d", n_dep, exp_dep));
    for (int p = 0; p < 3; p++) run_pass(20);
    run_clear();
    chk(n_pot == 0 && n_dep == 0, "counts cleared");
    for (int p = 0; p < 80; p++) run_pass(($urandom % 2) ? 25 : -25);
    chk(n_pot == 32'(exp_pot), "pot count after clear");
    chk(n_dep == 32'(exp_dep), "dep count after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
