// tb_dbn_full - the DBN at its full size (784-500-(500+10)-2000, CD
// threshold 64) taken through initialization, greedy training of the three
// layers with one epoch of one image each (one CD step per layer), one
// deterministic inference and one 50-pass repeated-sampling inference.
// Checks the clock count of each training step and of each inference
// against the phase schedule, that a single image leaves every counter
// below the threshold (no write pulse yet), that each training step reports
// its reconstruction error, and that every label sample is
// one-hot and the reported label is the most frequent sample.
module tb_dbn_full;
  import dbn_pkg::*;
  localparam int NV = 784, NH1 = 500, NH2 = 500, NL = 10;

  logic clk = 0, rst_n = 0;
  logic op_valid = 0, op_ready, op_done, cfg_noise = 1;
  dbn_op_e op = OP_INIT;
  logic [1:0] op_layer = 2'd1;
  logic [15:0] cfg_images = 1;
  logic [4:0] cfg_epochs = 1;
  logic [5:0] cfg_repeats = 1;
  logic img_valid = 0, img_ready;
  logic [NV-1:0] img = '0;
  logic [3:0] img_label = '0;
  logic res_valid;
  logic [3:0] res_label;
  logic smp_valid;
  logic [NL-1:0] smp_label;
  logic rec_valid;
  logic [9:0] rec_err;
  logic [4:0] rec_lab_err;
  int n_rec = 0;
  logic [1:0] cur_layer;
  logic [15:0] cur_image;
  logic [4:0] cur_epoch;
  logic [31:0] n_pot [3];
  logic [31:0] n_dep [3];
  logic [31:0] n_pulses [3];
  logic [31:0] max_cell_pulses [3];
  logic [31:0] n_cells_written [3];

  int checks = 0, failures = 0;
  int votes [NL];

  dbn_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (rst_n && rec_valid) begin
      n_rec++;
      $display("layer %0d reconstruction error %0d (labels %0d)", cur_layer, rec_err, rec_lab_err);
      chk(int'(rec_err) <= ((cur_layer == 2'd1) ? NV : NH1), "reconstruction error in range");
      chk((cur_layer == 2'd3) ? (rec_lab_err == 0 || rec_lab_err == 2) : (rec_lab_err == 0),
          "label reconstruction error");
    end
  end

  always @(posedge clk) begin
    if (rst_n && smp_valid) begin
      chk($countones(smp_label) == 1, "label sample one-hot");
      for (int k = 0; k < NL; k++) if (smp_label[k]) votes[k]++;
    end
  end

  function automatic logic [NV-1:0] digit_like(int l);
    logic [NV-1:0] p;
    // a vertical stroke whose column depends on the label, plus noise
    for (int r = 0; r < 28; r++)
      for (int c = 0; c < 28; c++)
        p[r * 28 + c] = (r > 3 && r < 24 && c >= 6 + 2 * l && c < 9 + 2 * l)
                        ^ (($urandom % 100) < 3);
    return p;
  endfunction

  task automatic issue(dbn_op_e o, logic [1:0] layer, int nr, logic nz);
    @(negedge clk);
    op = o; op_layer = layer; cfg_images = 1; cfg_epochs = 1;
    cfg_repeats = 6'(nr); cfg_noise = nz; op_valid = 1;
    @(negedge clk) op_valid = 0;
  endtask

  // hand over one image, then count clocks until the next image is asked
  // for or the operation is done
  task automatic run_with_image(int lab, int exp_lat);
    int lat;
    img = digit_like(lab);
    img_label = 4'(lab);
    img_valid = 1;
    while (!img_ready) @(negedge clk);
    @(negedge clk);
    img_valid = 0;
    lat = 0;
    while (!op_done && !img_ready) begin @(negedge clk); lat++; end
    chk(lat == exp_lat, $sformatf("clocks %0d vs %0d", lat, exp_lat));
  endtask

  initial begin
    int b, bc;
    #22 rst_n = 1;
    issue(OP_INIT, 2'd1, 1, 0);
    while (!op_done) @(negedge clk);
    // greedy training, one epoch of one image per layer: layer 1 trains;
    // layer 2 trains on layer 1's forward sample; layer 3 on layer 2's
    // sample plus the label
    issue(OP_TRAIN, 2'd1, 1, 1);
    chk(cur_layer == 2'd1, "starts at layer 1");
    run_with_image(3, 13 + NV + 2);
    chk(cur_layer == 2'd2 && !op_done, "moves to layer 2");
    run_with_image(4, 7 + (13 + NH1 + 2));
    chk(cur_layer == 2'd3 && !op_done, "moves to layer 3");
    run_with_image(5, 7 + 7 + (13 + NH2 + NL + 2));
    chk(op_done, "greedy training done");
    chk(n_rec == 3, $sformatf("one reconstruction report per layer: %0d", n_rec));
    for (int k = 0; k < 3; k++)
      chk(n_pulses[k] == 0 && max_cell_pulses[k] == 0 && n_cells_written[k] == 0,
          $sformatf("layer %0d: no counter reached +/-64", k + 1));
    // deterministic inference
    for (int k = 0; k < NL; k++) votes[k] = 0;
    issue(OP_INFER, 2'd1, 1, 0);
    run_with_image(5, 27 * 1 + 1);
    chk(res_label == 4'(votes.find_first_index(x) with (x == 1)[0]), "deterministic label");
    // 50-pass repeated-sampling inference
    for (int k = 0; k < NL; k++) votes[k] = 0;
    issue(OP_INFER, 2'd1, 50, 1);
    run_with_image(5, 27 * 50 + 1);
    b = 0; bc = votes[0];
    for (int k = 1; k < NL; k++) if (votes[k] > bc) begin b = k; bc = votes[k]; end
    chk(res_label == 4'(b), $sformatf("voted label %0d vs %0d", res_label, b));
    chk(votes.sum() == 50, "50 samples");
    $display("label votes: %p -> %0d", votes, res_label);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
