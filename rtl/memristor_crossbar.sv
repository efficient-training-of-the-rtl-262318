// memristor_crossbar - behavioural model of the analog memristor array.
//
// This is a behavioural model, not synthesizable logic: it stands for the
// analog crossbar of ROWS x COLS memristors (conductance G_ij), its column
// and row of reference cells (conductance G_ref, halfway between G_MIN and
// G_MAX so that the weight is w_ij = G_ij - G_ref), and the level shifters
// that turn a binary neuron state into a read voltage (1 -> V_R, 0 -> 0 V).
//
// Forward VMM (`fwd` strobe): rows are driven by `vin`; on the clock edge
// the column currents I_j = sum_i V_i G_ij and the reference-column current
// I_ref = sum_i V_i G_ref appear on `i_col` / `i_ref_col`.
// Backward VMM (`bwd` strobe): columns are driven by `hin`; row currents
// and the reference-row current appear on `i_row` / `i_ref_row`.
// Currents are signed integers in femtoamperes, conductances are reals in
// nanosiemens.
//
// Weight update (`wr_valid`): one identical open-loop pulse is applied to
// every cell of row `wr_row` whose bit is set in `wr_pot` (potentiation) or
// `wr_dep` (depression). The conductance change follows the paper's
// empirical device model (Eq. 4 and 5), with an optional cycle-to-cycle
// spread sigma = GAMMA*dG (Eq. 6); an alpha of 0 gives the ideal linear
// device with (G_MAX-G_MIN)/N per pulse. Every cell also counts the pulses
// it has received; `max_cell_pulses` and `n_cells_written` report the
// largest count and the number of cells ever written (endurance load).
// `init` sets every cell to the
// middle level plus a random offset of up to INIT_SPREAD pulse steps.
//
// Further non-idealities of the method's device study, all off by default:
// device-to-device variation (each cell draws its own alpha_p, alpha_d from
// a Gaussian of sd D2D_SD around ALPHA_P, ALPHA_D at `init`), device yield
// (a fraction 1-YIELD of the cells is stuck, half at G_MIN (HRS) and half
// at G_MAX (LRS), ignoring pulses) and read noise (every cell current gets
// a Gaussian spread of READ_NOISE times itself; the independent spreads of
// a line add up to one Gaussian of sd READ_NOISE*V_R*sqrt(sum G^2)).
//
// Differential pairs (DIFF_PAIR = 1), for devices that change gradually in
// one direction only: every synapse is a positive and a negative device and
// its weight is G_pos - G_neg (the currents reported are shifted by I_ref,
// so the comparators see the same I - I_ref as with single devices). With
// PAIR_INC = 1 (PCM-like, gradual increase only) both devices start at
// G_MIN, potentiation pulses G_pos up and depression pulses G_neg up; with
// PAIR_INC = 0 (OxRRAM-like, gradual decrease only) both start at G_MAX,
// potentiation pulses G_neg down and depression pulses G_pos down.
//
// Own choices: the reference row for the backward read (the paper shows only
// the reference column), the default G_MIN/G_MAX/V_R, the random initial
// weights, and a one-clock read latency.
module memristor_crossbar #(
  parameter int unsigned ROWS        = 784,
  parameter int unsigned COLS        = 500,
  parameter real         G_MAX       = 101000.0, // nS
  parameter real         G_MIN       = 1000.0,   // nS
  parameter real         N_P         = 20.0,     // pulses, G_MIN -> G_MAX
  parameter real         N_D         = 20.0,     // pulses, G_MAX -> G_MIN
  parameter real         ALPHA_P     = 0.0,      // potentiation non-linearity
  parameter real         ALPHA_D     = 0.0,      // depression non-linearity
  parameter real         GAMMA       = 0.0,      // cycle-to-cycle variation
  parameter real         V_R         = 0.1,      // read voltage, V
  parameter int unsigned INIT_SPREAD = 1,        // initial spread, pulses
  parameter real         D2D_SD      = 0.0,      // device-to-device sd of alpha
  parameter real         YIELD       = 1.0,      // fraction of working cells
  parameter real         READ_NOISE  = 0.0,      // read noise, fraction of cell current
  parameter bit          DIFF_PAIR   = 1'b0,     // synapse = two devices
  parameter bit          PAIR_INC    = 1'b1,     // pair devices only increase (1) / decrease (0)
  localparam int unsigned RW         = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic              clk,
  input  logic              init,
  input  logic              fwd,
  input  logic [ROWS-1:0]   vin,
  input  logic              bwd,
  input  logic [COLS-1:0]   hin,
  input  logic              wr_valid,
  input  logic [RW-1:0]     wr_row,
  input  logic [COLS-1:0]   wr_pot,
  input  logic [COLS-1:0]   wr_dep,
  output longint            i_col [COLS],
  output longint            i_ref_col,
  output longint            i_row [ROWS],
  output longint            i_ref_row,
  output logic [31:0]       n_pulses,
  output logic [31:0]       max_cell_pulses,  // most pulses any one cell received
  output logic [31:0]       n_cells_written   // cells that received any pulse
);

  localparam real G_REF  = (G_MAX + G_MIN) / 2.0;
  localparam real STEP_P = (G_MAX - G_MIN) / N_P;
  localparam real FA_PER_NS_V = 1.0e6;  // 1 nS * 1 V = 1e6 fA

  real g [ROWS][COLS];       // single device, or G_pos of a pair
  real gn [ROWS][COLS];      // G_neg of a pair
  int unsigned nw [ROWS][COLS];  // write pulses per cell since init (endurance)
  real ap [ROWS][COLS];     // per-cell non-linearity (device-to-device)
  real ad [ROWS][COLS];
  bit  stuck [ROWS][COLS];  // cell does not respond to pulses

  function automatic real urand();
    return real'($urandom) / 4294967296.0;
  endfunction

  // Standard normal variate from twelve uniforms (central limit).
  function automatic real gauss();
    real s;
    s = 0.0;
    for (int k = 0; k < 12; k++) s += real'($urandom) / 4294967296.0;
    return s - 6.0;
  endfunction

  function automatic real dg_pot(real gc, real a);
    real d;
    if (a == 0.0) d = (G_MAX - G_MIN) / N_P;
    else d = ((G_MAX - G_MIN) / (1.0 - $exp(-a)) - (gc - G_MIN))
             * (1.0 - $exp(-a / N_P));
    return d;
  endfunction

  function automatic real dg_dep(real gc, real a);
    real d;
    if (a == 0.0) d = -(G_MAX - G_MIN) / N_D;
    else d = -((G_MAX - G_MIN) / (1.0 - $exp(-a)) - (G_MAX - gc))
             * (1.0 - $exp(-a / N_D));
    return d;
  endfunction

  // non-linearity of one device, never negative
  function automatic real draw_alpha(real a);
    real x;
    x = (D2D_SD == 0.0) ? a : a + D2D_SD * gauss();
    return (x < 0.0) ? 0.0 : x;
  endfunction

  function automatic real clamp_g(real gc);
    if (gc > G_MAX) return G_MAX;
    if (gc < G_MIN) return G_MIN;
    return gc;
  endfunction

  always @(posedge clk) begin
    if (init) begin
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < COLS; j++) begin
          int off;
          off = int'($urandom % (2 * INIT_SPREAD + 1)) - int'(INIT_SPREAD);
          g[i][j] = clamp_g(G_REF + real'(off) * STEP_P);
          ap[i][j] = draw_alpha(ALPHA_P);
          ad[i][j] = draw_alpha(ALPHA_D);
          stuck[i][j] = (YIELD < 1.0) && (urand() >= YIELD);
          if (stuck[i][j]) g[i][j] = (urand() < 0.5) ? G_MIN : G_MAX;
          nw[i][j] = 0;
          if (DIFF_PAIR) begin
            // pair starts at one end, off by up to INIT_SPREAD steps
            gn[i][j] = PAIR_INC ? G_MIN : G_MAX;
            if (!stuck[i][j]) g[i][j] = clamp_g(gn[i][j] + real'(off) * STEP_P);
          end
        end
      n_pulses <= '0;
      max_cell_pulses <= '0;
      n_cells_written <= '0;
    end else if (wr_valid) begin
      int np, mx, nc;
      np = 0;
      mx = int'(max_cell_pulses);
      nc = int'(n_cells_written);
      for (int j = 0; j < COLS; j++) begin
        real d;
        if (wr_pot[j] || wr_dep[j]) begin
          if (!DIFF_PAIR) begin
            d = wr_pot[j] ? dg_pot(g[wr_row][j], ap[wr_row][j])
                          : dg_dep(g[wr_row][j], ad[wr_row][j]);
            if (GAMMA != 0.0) d = d * (1.0 + GAMMA * gauss());
            if (!stuck[wr_row][j]) g[wr_row][j] = clamp_g(g[wr_row][j] + d);
          end else if (wr_pot[j] == PAIR_INC) begin
            // G_pos moves: up for potentiation (PAIR_INC) or down for depression
            d = PAIR_INC ? dg_pot(g[wr_row][j], ap[wr_row][j])
                         : dg_dep(g[wr_row][j], ad[wr_row][j]);
            if (GAMMA != 0.0) d = d * (1.0 + GAMMA * gauss());
            if (!stuck[wr_row][j]) g[wr_row][j] = clamp_g(g[wr_row][j] + d);
          end else begin
            // G_neg moves: up for depression (PAIR_INC) or down for potentiation
            d = PAIR_INC ? dg_pot(gn[wr_row][j], ap[wr_row][j])
                         : dg_dep(gn[wr_row][j], ad[wr_row][j]);
            if (GAMMA != 0.0) d = d * (1.0 + GAMMA * gauss());
            if (!stuck[wr_row][j]) gn[wr_row][j] = clamp_g(gn[wr_row][j] + d);
          end
          np++;
          if (nw[wr_row][j] == 0) nc++;
          nw[wr_row][j]++;
          if (int'(nw[wr_row][j]) > mx) mx = int'(nw[wr_row][j]);
        end
      end
      n_pulses <= n_pulses + 32'(np);
      max_cell_pulses <= 32'(mx);
      n_cells_written <= 32'(nc);
    end
  end

  // Forward read: column currents.
  always @(posedge clk) begin
    if (fwd) begin
      real nact;
      nact = 0.0;
      for (int i = 0; i < ROWS; i++) if (vin[i]) nact += 1.0;
      for (int j = 0; j < COLS; j++) begin
        real s, q;
        s = 0.0;
        q = 0.0;
        for (int i = 0; i < ROWS; i++) if (vin[i]) begin
          s += g[i][j] - (DIFF_PAIR ? gn[i][j] - G_REF : 0.0);  // pair: G_ref + G_pos - G_neg
          q += g[i][j] * g[i][j] + (DIFF_PAIR ? gn[i][j] * gn[i][j] : 0.0);
        end
        if (READ_NOISE != 0.0) s += READ_NOISE * $sqrt(q) * gauss();
        i_col[j] <= longint'(s * V_R * FA_PER_NS_V);
      end
      i_ref_col <= longint'(nact * G_REF * V_R * FA_PER_NS_V);
    end
  end

  // Backward read: row currents.
  always @(posedge clk) begin
    if (bwd) begin
      real nact;
      nact = 0.0;
      for (int j = 0; j < COLS; j++) if (hin[j]) nact += 1.0;
      for (int i = 0; i < ROWS; i++) begin
        real s, q;
        s = 0.0;
        q = 0.0;
        for (int j = 0; j < COLS; j++) if (hin[j]) begin
          s += g[i][j] - (DIFF_PAIR ? gn[i][j] - G_REF : 0.0);  // pair: G_ref + G_pos - G_neg
          q += g[i][j] * g[i][j] + (DIFF_PAIR ? gn[i][j] * gn[i][j] : 0.0);
        end
        if (READ_NOISE != 0.0) s += READ_NOISE * $sqrt(q) * gauss();
        i_row[i] <= longint'(s * V_R * FA_PER_NS_V);
      end
      i_ref_row <= longint'(nact * G_REF * V_R * FA_PER_NS_V);
    end
  end

endmodule
