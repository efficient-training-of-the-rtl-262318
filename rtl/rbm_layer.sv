// rbm_layer - one mixed-signal restricted Boltzmann machine layer.
//
// Puts together the parts of one RBM: the analog memristor crossbar (with
// its reference cells and level-shifter drivers), the peripheral circuits of
// the hidden units (read out in forward VMMs) and of the visible units (read
// out in backward VMMs), the digital CD counter array, the control circuit,
// and the four neuron-state registers v, h, v', h' that carry the local
// information from the sampling phases to the counter array.
//
// A training step (cmd LC_TRAIN) on input `v_in` samples h, v' and h', then
// lets the counter array add v*h - v'*h' to its counters; every counter that
// reaches +/-TH sends one potentiating/depressing pulse to its memristor in
// the same clock as the row is visited (the sign-of-dG connection), and is
// reset. Only the crossbar takes part in the VMMs; the counters only
// accumulate. The last N_LAB visible units are one-hot label units (the top
// RBM: visible = previous hidden layer + label layer; the label rows hold
// the w4 part of the weight matrix and the other rows the w3 part, and each
// row range accumulates its own CD in its own counter rows).
//
// Interface: `start`/`cmd` while not `busy`, `done` pulse at the end.
// `h_out` holds h (after LC_FWD or LC_TRAIN), `vr_out` holds v' (after
// LC_BWD or LC_TRAIN). Latency: LC_FWD 5 clocks, LC_BWD 4, LC_TRAIN
// 13 + M clocks, LC_INIT 3 + M clocks from `start` to `done`.
module rbm_layer
  import dbn_pkg::*;
#(
  parameter int unsigned M           = N_VIS,
  parameter int unsigned N           = N_H1,
  parameter int unsigned N_LAB_ROWS  = 0,
  parameter int unsigned TH          = CD_TH,
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
  localparam int unsigned RW         = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  layer_cmd_e    cmd,
  input  logic          noise_en,
  input  logic [M-1:0]  v_in,
  output logic          busy,
  output logic          done,
  output logic [N-1:0]  h_out,
  output logic [M-1:0]  vr_out,
  output logic [31:0]   n_pot,
  output logic [31:0]   n_dep,
  output logic [31:0]   n_pulses,
  output logic [31:0]   max_cell_pulses,
  output logic [31:0]   n_cells_written
);

  // control
  logic ld_v, fwd_src, cap_h, cap_vr, cap_hr;
  logic xb_init, xb_fwd, xb_bwd, smp_hid, smp_vis, cd_start, cd_clear, cd_done;

  // neuron states
  logic [M-1:0] v_q, vr_q;
  logic [N-1:0] h_q, hr_q;
  logic [N-1:0] hid_state;
  logic [M-1:0] vis_state;

  // analog read-out
  longint i_col [N];
  longint i_row [M];
  longint i_ref_col, i_ref_row;

  // weight updates
  logic          upd_valid;
  logic [RW-1:0] upd_row;
  logic [N-1:0]  upd_pot, upd_dep;

  rbm_ctrl u_ctrl (
    .clk, .rst_n, .start, .cmd, .busy, .done,
    .ld_v, .fwd_src, .cap_h, .cap_vr, .cap_hr,
    .xb_init, .xb_fwd, .xb_bwd, .smp_hid, .smp_vis,
    .cd_start, .cd_clear, .cd_done
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q  <= '0;
      vr_q <= '0;
      h_q  <= '0;
      hr_q <= '0;
    end else begin
      if (ld_v)   v_q  <= v_in;
      if (cap_h)  h_q  <= hid_state;
      if (cap_vr) vr_q <= vis_state;
      if (cap_hr) hr_q <= hid_state;
    end
  end

  memristor_crossbar #(
    .ROWS(M), .COLS(N), .G_MAX(G_MAX), .G_MIN(G_MIN), .N_P(N_P), .N_D(N_D),
    .ALPHA_P(ALPHA_P), .ALPHA_D(ALPHA_D), .GAMMA(GAMMA),
    .INIT_SPREAD(INIT_SPREAD), .D2D_SD(D2D_SD), .YIELD(YIELD), .READ_NOISE(READ_NOISE),
    .DIFF_PAIR(DIFF_PAIR), .PAIR_INC(PAIR_INC)
  ) u_xbar (
    .clk,
    .init     (xb_init),
    .fwd      (xb_fwd),
    .vin      (fwd_src ? vr_q : v_q),
    .bwd      (xb_bwd),
    .hin      (h_q),
    .wr_valid (upd_valid),
    .wr_row   (upd_row),
    .wr_pot   (upd_pot),
    .wr_dep   (upd_dep),
    .i_col, .i_ref_col, .i_row, .i_ref_row,
    .n_pulses, .max_cell_pulses, .n_cells_written
  );

  neuron_sampler #(.K(N), .N_SOFT(0), .NOISE_SD(NOISE_SD)) u_hid_periph (
    .clk, .sample(smp_hid), .noise_en,
    .i_in(i_col), .i_ref(i_ref_col), .state(hid_state)
  );

  neuron_sampler #(.K(M), .N_SOFT(N_LAB_ROWS), .NOISE_SD(NOISE_SD)) u_vis_periph (
    .clk, .sample(smp_vis), .noise_en,
    .i_in(i_row), .i_ref(i_ref_row), .state(vis_state)
  );

  cd_counter_array #(.ROWS(M), .COLS(N), .TH(TH)) u_cd (
    .clk, .rst_n,
    .start(cd_start), .clear(cd_clear),
    .v(v_q), .h(h_q), .vr(vr_q), .hr(hr_q),
    .busy(), .done(cd_done),
    .upd_valid, .upd_row, .upd_pot, .upd_dep,
    .n_pot, .n_dep
  );

  assign h_out  = h_q;
  assign vr_out = vr_q;

endmodule
