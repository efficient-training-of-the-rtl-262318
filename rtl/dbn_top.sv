// dbn_top - memristive deep belief net: three stacked mixed-signal RBMs.
//
// Network 784-500-(500+10)-2000: RBM1 (image -> hidden 1), RBM2 (hidden 1 ->
// hidden 2) and RBM3 whose visible side is hidden 2 plus the 10 one-hot
// label neurons, with 2000 top units. Every RBM is an rbm_layer with its own
// memristor crossbar and CD counter array.
//
// Training is greedy, layer by layer, as in the paper's flow chart: for
// every epoch and every image the layers below the one being trained run
// a forward VMM + sampling pass (no hidden states are stored between
// images, they are recomputed), then the trained layer runs one CD step.
// After cfg_epochs epochs of cfg_images images the next layer is trained,
// until RBM3 is done. Training always has the neuron noise on.
//
// Inference unfolds the top RBM: forward passes through RBM1, RBM2 and
// RBM3 (label rows driven with 0), then a backward pass of RBM3 on its label
// rows only counts (the w4 part), which gives one label. With cfg_noise = 1
// the pass is stochastic and is repeated cfg_repeats times, the most
// frequent label wins (repeated-sampling inference); with cfg_noise = 0 the
// comparators decide deterministically and one pass suffices.
//
// Interfaces (valid/ready): an operation is accepted when op_valid and
// op_ready are both high (OP_INIT, OP_TRAIN from layer op_layer = 1..3, or
// OP_INFER); images are taken when img_valid and img_ready are both high.
// res_valid pulses with res_label after an inference (smp_valid/smp_label
// show each pass's one-hot label sample); op_done pulses at the
// end of every operation. During training rec_valid marks each finished CD
// step, with rec_err / rec_lab_err the number of data / label units whose
// reconstruction v' differs from v (the paper's reconstruction-error
// measure, counted here in hardware). The image/label source is outside
// this design.
// The operation set, the handshakes and run-time counts are this design's
// choices; the network sizes, the threshold and the defaults of the counts
// (60000 images, 30 epochs, 50 repeats) are the paper's.
module dbn_top
  import dbn_pkg::*;
#(
  parameter int unsigned NV          = N_VIS,
  parameter int unsigned NH1         = N_H1,
  parameter int unsigned NH2         = N_H2,
  parameter int unsigned NH3         = N_H3,
  parameter int unsigned NL          = N_LAB,
  parameter int unsigned TH          = CD_TH,
  parameter int unsigned MAX_IMAGES  = N_IMAGES,
  parameter int unsigned MAX_EPOCHS  = N_EPOCHS,
  parameter int unsigned MAX_REPEATS = 50,
  parameter real         G_MAX       = 101000.0,
  parameter real         G_MIN       = 1000.0,
  parameter real         N_P         = 20.0,
  parameter real         N_D         = 20.0,
  parameter real         ALPHA_P     = 0.0,
  parameter real         ALPHA_D     = 0.0,
  parameter real         GAMMA       = 0.0,
  parameter real         D2D_SD      = 0.0,
  parameter real         YIELD       = 1.0,
  parameter real         READ_NOISE  = 0.0,
  parameter bit          DIFF_PAIR   = 1'b0,
  parameter bit          PAIR_INC    = 1'b1,
  parameter int unsigned INIT_SPREAD = 1,
  parameter real         NOISE_SD    = 8.5e9,
  localparam int unsigned IW = $clog2(MAX_IMAGES + 1),
  localparam int unsigned EW = $clog2(MAX_EPOCHS + 1),
  localparam int unsigned PW = $clog2(MAX_REPEATS + 1),
  localparam int unsigned LW = (NL > 1) ? $clog2(NL) : 1,
  localparam int unsigned RW = $clog2(((NV > NH1) ? ((NV > NH2) ? NV : NH2)
                                                  : ((NH1 > NH2) ? NH1 : NH2)) + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // operation
  input  logic             op_valid,
  output logic             op_ready,
  input  dbn_op_e          op,
  input  logic [1:0]       op_layer,
  input  logic [IW-1:0]    cfg_images,
  input  logic [EW-1:0]    cfg_epochs,
  input  logic [PW-1:0]    cfg_repeats,
  input  logic             cfg_noise,
  output logic             op_done,
  // image stream
  input  logic             img_valid,
  output logic             img_ready,
  input  logic [NV-1:0]    img,
  input  logic [LW-1:0]    img_label,
  // result
  output logic             res_valid,
  output logic [LW-1:0]    res_label,
  output logic             smp_valid,   // one label sample of an inference pass
  output logic [NL-1:0]    smp_label,
  // reconstruction error of the layer in training, after each CD step
  output logic             rec_valid,
  output logic [RW-1:0]    rec_err,     // |v' - v| over the data units
  output logic [LW:0]      rec_lab_err, // |v' - v| over the label units
  // status
  output logic [1:0]       cur_layer,
  output logic [IW-1:0]    cur_image,
  output logic [EW-1:0]    cur_epoch,
  output logic [31:0]      n_pot [3],
  output logic [31:0]      n_dep [3],
  output logic [31:0]      n_pulses [3],
  output logic [31:0]      max_cell_pulses [3],  // endurance: most writes on one cell
  output logic [31:0]      n_cells_written [3]   // cells written at least once
);

  typedef enum logic [2:0] {
    S_IDLE, S_INIT, S_IMG, S_RUN, S_WAIT, S_NEXT, S_RESULT
  } state_e;

  state_e        st;
  dbn_op_e       op_q;
  logic [1:0]    layer_q;   // layer being trained (1..3)
  logic [1:0]    k_q;       // layer currently running (1..3)
  logic          bwd_q;     // inference: backward label pass running
  logic [IW-1:0] im_q, nimg_q;
  logic [EW-1:0] ep_q, nep_q;
  logic [PW-1:0] rep_q, nrep_q;
  logic          noise_q;
  logic [NV-1:0] img_q;
  logic [NL-1:0] lab_q;

  // layer control
  logic [2:0]   l_start, l_busy, l_done;
  layer_cmd_e   l_cmd;
  logic         l_noise;
  logic [NH1-1:0] h1;
  logic [NH2-1:0] h2;
  logic [NH3-1:0] h3;
  logic [NV-1:0]  vr1;
  logic [NH1-1:0] vr2;
  logic [NH2+NL-1:0] vr3;
  logic [NH2+NL-1:0] v3_in;

  // vote
  logic          vote_clear, vote_valid;
  logic [LW-1:0] vote_best;

  assign v3_in = {(op_q == OP_TRAIN) ? lab_q : NL'(0), h2};

  rbm_layer #(
    .M(NV), .N(NH1), .N_LAB_ROWS(0), .TH(TH), .G_MAX(G_MAX), .G_MIN(G_MIN),
    .N_P(N_P), .N_D(N_D), .ALPHA_P(ALPHA_P), .ALPHA_D(ALPHA_D), .GAMMA(GAMMA),
    .INIT_SPREAD(INIT_SPREAD), .NOISE_SD(NOISE_SD), .D2D_SD(D2D_SD), .YIELD(YIELD),
    .READ_NOISE(READ_NOISE), .DIFF_PAIR(DIFF_PAIR), .PAIR_INC(PAIR_INC)
  ) u_rbm1 (
    .clk, .rst_n, .start(l_start[0]), .cmd(l_cmd), .noise_en(l_noise),
    .v_in(img_q), .busy(l_busy[0]), .done(l_done[0]), .h_out(h1), .vr_out(vr1),
    .n_pot(n_pot[0]), .n_dep(n_dep[0]), .n_pulses(n_pulses[0]),
    .max_cell_pulses(max_cell_pulses[0]), .n_cells_written(n_cells_written[0])
  );

  rbm_layer #(
    .M(NH1), .N(NH2), .N_LAB_ROWS(0), .TH(TH), .G_MAX(G_MAX), .G_MIN(G_MIN),
    .N_P(N_P), .N_D(N_D), .ALPHA_P(ALPHA_P), .ALPHA_D(ALPHA_D), .GAMMA(GAMMA),
    .INIT_SPREAD(INIT_SPREAD), .NOISE_SD(NOISE_SD), .D2D_SD(D2D_SD), .YIELD(YIELD),
    .READ_NOISE(READ_NOISE), .DIFF_PAIR(DIFF_PAIR), .PAIR_INC(PAIR_INC)
  ) u_rbm2 (
    .clk, .rst_n, .start(l_start[1]), .cmd(l_cmd), .noise_en(l_noise),
    .v_in(h1), .busy(l_busy[1]), .done(l_done[1]), .h_out(h2), .vr_out(vr2),
    .n_pot(n_pot[1]), .n_dep(n_dep[1]), .n_pulses(n_pulses[1]),
    .max_cell_pulses(max_cell_pulses[1]), .n_cells_written(n_cells_written[1])
  );

  rbm_layer #(
    .M(NH2 + NL), .N(NH3), .N_LAB_ROWS(NL), .TH(TH), .G_MAX(G_MAX), .G_MIN(G_MIN),
    .N_P(N_P), .N_D(N_D), .ALPHA_P(ALPHA_P), .ALPHA_D(ALPHA_D), .GAMMA(GAMMA),
    .INIT_SPREAD(INIT_SPREAD), .NOISE_SD(NOISE_SD), .D2D_SD(D2D_SD), .YIELD(YIELD),
    .READ_NOISE(READ_NOISE), .DIFF_PAIR(DIFF_PAIR), .PAIR_INC(PAIR_INC)
  ) u_rbm3 (
    .clk, .rst_n, .start(l_start[2]), .cmd(l_cmd), .noise_en(l_noise),
    .v_in(v3_in), .busy(l_busy[2]), .done(l_done[2]), .h_out(h3), .vr_out(vr3),
    .n_pot(n_pot[2]), .n_dep(n_dep[2]), .n_pulses(n_pulses[2]),
    .max_cell_pulses(max_cell_pulses[2]), .n_cells_written(n_cells_written[2])
  );

  label_vote #(.N_LAB(NL), .MAX_REP(MAX_REPEATS)) u_vote (
    .clk, .rst_n, .clear(vote_clear), .valid(vote_valid),
    .lab(vr3[NH2 +: NL]), .best(vote_best), .best_count()
  );

  // Command and start strobes for the layer that runs next.
  always_comb begin
    l_start = '0;
    if (st == S_INIT) l_cmd = LC_INIT;
    else if (op_q == OP_TRAIN) l_cmd = (k_q == layer_q) ? LC_TRAIN : LC_FWD;
    else l_cmd = bwd_q ? LC_BWD : LC_FWD;
    if (st == S_INIT) l_start = 3'b111;
    else if (st == S_RUN) l_start[k_q - 2'd1] = 1'b1;
    l_noise   = (op_q == OP_TRAIN) ? 1'b1 : noise_q;
    op_ready  = (st == S_IDLE);
    img_ready = (st == S_IMG);
    // the label sampled by the finished backward pass is counted now
    vote_valid = (st == S_NEXT) && (op_q == OP_INFER) && (k_q == 2'd3) && bwd_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      op_q      <= OP_INIT;
      layer_q   <= 2'd1;
      k_q       <= 2'd1;
      bwd_q     <= 1'b0;
      im_q      <= '0;
      ep_q      <= '0;
      rep_q     <= '0;
      nimg_q    <= '0;
      nep_q     <= '0;
      nrep_q    <= '0;
      noise_q   <= 1'b1;
      img_q     <= '0;
      lab_q     <= '0;
      op_done   <= 1'b0;
      res_valid <= 1'b0;
      res_label <= '0;
      vote_clear <= 1'b0;
    end else begin
      op_done    <= 1'b0;
      res_valid  <= 1'b0;
      vote_clear <= 1'b0;
      unique case (st)
        S_IDLE: if (op_valid) begin
          op_q    <= op;
          layer_q <= (op_layer == 2'd0) ? 2'd1 : op_layer;
          nimg_q  <= cfg_images;
          nep_q   <= cfg_epochs;
          nrep_q  <= (cfg_repeats == '0) ? PW'(1) : cfg_repeats;
          noise_q <= cfg_noise;
          im_q    <= '0;
          ep_q    <= '0;
          rep_q   <= '0;
          unique case (op)
            OP_INIT: st <= S_INIT;
            default: st <= S_IMG;
          endcase
        end
        S_INIT: st <= S_WAIT;
        S_IMG: if (img_valid) begin
          img_q      <= img;
          lab_q      <= NL'(1) << img_label;
          k_q        <= 2'd1;
          bwd_q      <= 1'b0;
          vote_clear <= 1'b1;
          st         <= S_RUN;
        end
        S_RUN:  st <= S_WAIT;
        S_WAIT: begin
          if (op_q == OP_INIT) begin
            if (l_busy == '0) begin
              op_done <= 1'b1;
              st      <= S_IDLE;
            end
          end else if (l_done[k_q - 2'd1]) begin
            st <= S_NEXT;
          end
        end
        S_NEXT: begin
          if (op_q == OP_TRAIN) begin
            if (k_q != layer_q) begin
              k_q <= k_q + 2'd1;
              st  <= S_RUN;
            end else if (im_q + 1'b1 != nimg_q) begin
              im_q <= im_q + 1'b1;
              st   <= S_IMG;
            end else begin
              im_q <= '0;
              if (ep_q + 1'b1 != nep_q) begin
                ep_q <= ep_q + 1'b1;
                st   <= S_IMG;
              end else begin
                ep_q <= '0;
                if (layer_q == 2'd3) begin     // greedy learning finished
                  op_done <= 1'b1;
                  st      <= S_IDLE;
                end else begin                 // next RBM layer
                  layer_q <= layer_q + 2'd1;
                  st      <= S_IMG;
                end
              end
            end
          end else begin                       // OP_INFER
            if (k_q != 2'd3) begin
              k_q <= k_q + 2'd1;
              st  <= S_RUN;
            end else if (!bwd_q) begin
              bwd_q <= 1'b1;
              st    <= S_RUN;
            end else begin
              bwd_q      <= 1'b0;
              k_q        <= 2'd1;
              if (rep_q + 1'b1 != nrep_q) begin
                rep_q <= rep_q + 1'b1;
                st    <= S_RUN;
              end else begin
                st <= S_RESULT;
              end
            end
          end
        end
        S_RESULT: begin                        // counts include the last pass
          res_valid <= 1'b1;
          res_label <= vote_best;
          op_done   <= 1'b1;
          st        <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // Reconstruction error <|v' - v|>: the number of visible units whose
  // reconstruction differs from the input, counted when the trained layer
  // has finished its CD step (v and v' are both still held there).
  assign rec_valid = (st == S_NEXT) && (op_q == OP_TRAIN) && (k_q == layer_q);
  always_comb begin
    unique case (layer_q)
      2'd1:    rec_err = RW'($countones(img_q ^ vr1));
      2'd2:    rec_err = RW'($countones(h1 ^ vr2));
      default: rec_err = RW'($countones(h2 ^ vr3[NH2-1:0]));
    endcase
    rec_lab_err = (layer_q == 2'd3) ? (LW+1)'($countones(lab_q ^ vr3[NH2 +: NL])) : '0;
  end

  assign smp_valid = vote_valid;
  assign smp_label = vr3[NH2 +: NL];
  assign cur_layer = layer_q;
  assign cur_image = im_q;
  assign cur_epoch = ep_q;

  always_ff @(posedge clk) begin
    if (st == S_IDLE && op_valid && op != OP_INIT)
      assert (cfg_images != '0 && cfg_epochs != '0)
        else $error("dbn_top: zero image or epoch count");
  end

endmodule
