// tb_dbn_top - end-to-end test of the DBN at reduced size.
//
// A small network (8-6-(5+4)-6, CD threshold 2) is initialized, trained
// greedily from layer 1 for 2 epochs of 3 images per layer, then asked to
// recognize images deterministically (noise off, one pass) and with
// repeated stochastic sampling. Checked:
//  - every layer consumes images*epochs images, in layer order 1, 2, 3;
//  - only the layer being trained receives write pulses, and each layer
//    receives both potentiating and depressing pulses;
//  - the clock count per training image matches the phase schedule
//    (one forward pass per lower layer, then one CD step);
//  - deterministic inference gives the same label twice; repeated
//    inference returns the label the testbench counts most often among
//    the one-hot label samples, after 27 clocks per pass;
//  - every CD step reports a reconstruction error within the layer's
//    visible width, with 0 or 2 differing label units in the top layer;
//  - each mechanism (potentiate, depress, epoch wrap, next layer,
//    deterministic and repeated inference, reconstruction report) happens
//    at least once.
module tb_dbn_top;
  import dbn_pkg::*;
  localparam int NV = 8, NH1 = 6, NH2 = 5, NH3 = 6, NL = 4, TH = 2;
  localparam int MI = 7, ME = 3, MR = 7;
  localparam int IW = $clog2(MI + 1), EW = $clog2(ME + 1), PW = $clog2(MR + 1);

  logic clk = 0, rst_n = 0;
  logic op_valid = 0, op_ready, op_done, cfg_noise = 1;
  dbn_op_e op = OP_INIT;
  logic [1:0] op_layer = 2'd1;
  logic [IW-1:0] cfg_images = 3;
  logic [EW-1:0] cfg_epochs = 2;
  logic [PW-1:0] cfg_repeats = 1;
  logic img_valid = 0, img_ready;
  logic [NV-1:0] img = '0;
  logic [1:0] img_label = '0;
  logic res_valid;
  logic [1:0] res_label;
  logic smp_valid;
  logic [NL-1:0] smp_label;
  logic rec_valid;
  logic [3:0] rec_err;       // width for the largest visible layer (8)
  logic [2:0] rec_lab_err;
  logic [1:0] cur_layer;
  logic [IW-1:0] cur_image;
  logic [EW-1:0] cur_epoch;
  logic [31:0] n_pot [3];
  logic [31:0] n_dep [3];
  logic [31:0] n_pulses [3];
  logic [31:0] max_cell_pulses [3];
  logic [31:0] n_cells_written [3];

  int checks = 0, failures = 0;
  int n_epoch_wrap = 0, n_next_layer = 0, n_det = 0, n_rep = 0;
  int imgs_per_layer [4];
  int recs_per_layer [4] = '{0, 0, 0, 0};
  int rec_sum = 0;
  int votes [NL];

  dbn_top #(.NV(NV), .NH1(NH1), .NH2(NH2), .NH3(NH3), .NL(NL), .TH(TH),
            .MAX_IMAGES(MI), .MAX_EPOCHS(ME), .MAX_REPEATS(MR)) dut (.*);

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

  function automatic logic [NV-1:0] pattern(int l);
    logic [NV-1:0] p;
    p = NV'(8'b0000_0011) << (2 * l);
    for (int k = 0; k < NV; k++) if (($urandom % 100) < 10) p[k] = ~p[k];
    return p;
  endfunction

  // image source: always offers an image
  int lab_src = 0;
  always @(negedge clk) img_valid <= 1'b1;

  // count label votes seen by the vote counter
  // reconstruction error after every CD step: at most the layer's visible
  // width, and 0 or 2 label units (both label vectors are one-hot)
  always @(posedge clk) begin
    if (rst_n && rec_valid) begin
      int w;
      w = (cur_layer == 2'd1) ? NV : (cur_layer == 2'd2) ? NH1 : NH2;
      recs_per_layer[cur_layer]++;
      rec_sum += int'(rec_err);
      chk(int'(rec_err) <= w, $sformatf("layer %0d reconstruction error %0d", cur_layer, rec_err));
      if (cur_layer == 2'd3)
        chk(rec_lab_err == 0 || rec_lab_err == 2, $sformatf("label error %0d", rec_lab_err));
      else
        chk(rec_lab_err == 0, "no label error below the top layer");
    end
  end

  always @(posedge clk) begin
    if (rst_n && smp_valid) begin
      chk($countones(smp_label) == 1, "label sample one-hot");
      for (int k = 0; k < NL; k++) if (smp_label[k]) votes[k]++;
    end
  end

  task automatic issue(dbn_op_e o, logic [1:0] layer, int ni, int ne, int nr, logic nz);
    @(negedge clk);
    op = o; op_layer = layer; cfg_images = IW'(ni); cfg_epochs = EW'(ne);
    cfg_repeats = PW'(nr); cfg_noise = nz; op_valid = 1;
    @(negedge clk) op_valid = 0;
  endtask

  task automatic infer(int nr, logic nz, int lab, output logic [1:0] res);
    int lat;
    for (int k = 0; k < NL; k++) votes[k] = 0;
    img = pattern(lab);
    issue(OP_INFER, 2'd1, 1, 1, nr, nz);
    while (!(img_ready)) @(negedge clk);
    lat = 0;
    @(negedge clk);
    while (!res_valid) begin @(negedge clk); lat++; end
    res = res_label;
    chk(lat == 27 * nr + 1, $sformatf("inference latency %0d vs %0d", lat, 27 * nr + 1));
    begin
      int b, bc;
      b = 0; bc = votes[0];
      for (int k = 1; k < NL; k++) if (votes[k] > bc) begin b = k; bc = votes[k]; end
      chk(res_label == 2'(b), $sformatf("voted label %0d vs %0d", res_label, b));
    end
    @(negedge clk);
  endtask

  initial begin
    int prev_ep, prev_layer, last_take, lat_exp;
    logic [31:0] frozen [3];
    logic [1:0] r1, r2;
    #22 rst_n = 1;
    issue(OP_INIT, 2'd1, 1, 1, 1, 0);
    while (!op_done) @(negedge clk);
    chk(n_pulses[0] == 0 && n_pulses[1] == 0 && n_pulses[2] == 0, "pulse counts cleared");
    // greedy training
    for (int l = 0; l < 4; l++) imgs_per_layer[l] = 0;
    issue(OP_TRAIN, 2'd1, 3, 2, 1, 1);
    prev_ep = 0; prev_layer = 1; last_take = -1;
    for (int c = 0; !op_done; c++) begin
      if (img_ready && img_valid) begin
        int L;
        L = int'(cur_layer);
        if (L != prev_layer) begin
          chk(L == prev_layer + 1, "layers trained in order");
          n_next_layer++;
          for (int k = 0; k < 3; k++) frozen[k] = n_pulses[k];
          prev_layer = L;
        end
        imgs_per_layer[L]++;
        if (int'(cur_epoch) != prev_ep) begin
          if (int'(cur_epoch) < prev_ep) n_epoch_wrap++;
          prev_ep = int'(cur_epoch);
        end else if (int'(cur_image) == 0 && last_take >= 0) n_epoch_wrap++;
        // clocks between image handshakes for the layer being trained
        if (last_take >= 0 && imgs_per_layer[L] > 1) begin
          case (L)
            1: lat_exp = 1 + (13 + NV + 2);
            2: lat_exp = 1 + 7 + (13 + NH1 + 2);
            default: lat_exp = 1 + 7 + 7 + (13 + NH2 + NL + 2);
          endcase
          chk(c - last_take == lat_exp, $sformatf("layer %0d clocks per image %0d vs %0d",
                                                  L, c - last_take, lat_exp));
        end
        if (L > 1) for (int k = 0; k < L - 1; k++)
          chk(n_pulses[k] == frozen[k], $sformatf("layer %0d frozen while training %0d", k + 1, L));
        img = pattern(lab_src);
        img_label = 2'(lab_src);
        lab_src = (lab_src + 1) % NL;
        last_take = c;
      end
      @(negedge clk);
    end
    for (int l = 1; l <= 3; l++)
      chk(imgs_per_layer[l] == 6, $sformatf("layer %0d images %0d", l, imgs_per_layer[l]));
    for (int l = 1; l <= 3; l++)
      chk(recs_per_layer[l] == 6, $sformatf("layer %0d reconstruction reports %0d", l, recs_per_layer[l]));
    chk(rec_sum > 0, "some reconstruction differs from its input");
    for (int k = 0; k < 3; k++) begin
      chk(n_pot[k] > 0, $sformatf("layer %0d potentiated", k + 1));
      chk(n_dep[k] > 0, $sformatf("layer %0d depressed", k + 1));
      chk(n_pulses[k] == n_pot[k] + n_dep[k], "pulses = requests");
      chk(max_cell_pulses[k] > 0 && max_cell_pulses[k] <= n_pulses[k], "most writes on one cell");
      chk(n_cells_written[k] > 0 && n_cells_written[k] <= n_pulses[k], "cells written");
    end
    // inference
    infer(1, 1'b0, 1, r1); n_det++;
    infer(1, 1'b0, 1, r2); n_det++;
    chk(r1 == r2, "deterministic inference repeats");
    infer(5, 1'b1, 2, r1); n_rep++;
    infer(MR, 1'b1, 0, r1); n_rep++;
    chk(n_epoch_wrap > 0, "epoch wrap happened");
    chk(n_next_layer == 2, $sformatf("next-layer steps %0d", n_next_layer));
    chk(n_det > 0 && n_rep > 0, "both inference modes");
    $display("mechanisms: pot=%0d/%0d/%0d dep=%0d/%0d/%0d epoch_wraps=%0d next_layer=%0d det=%0d rep=%0d recon_reports=%0d/%0d/%0d",
             n_pot[0], n_pot[1], n_pot[2], n_dep[0], n_dep[1], n_dep[2],
             n_epoch_wrap, n_next_layer, n_det, n_rep,
             recs_per_layer[1], recs_per_layer[2], recs_per_layer[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
