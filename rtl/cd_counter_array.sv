// cd_counter_array - the digital contrastive-divergence accumulation array.
//
// One signed counter per synapse (ROWS visible x COLS hidden). After the
// three sampling phases of a training step the array holds the states v, h,
// v', h' on its inputs. It adds the ternary element CD_ij = v_i*h_j - v'_i*h'_j
// to every counter; when a counter reaches +CD_TH it requests one
// potentiating pulse for memristor (i,j), when it reaches -CD_TH one
// depressing pulse, and in both cases it restarts from zero. Requests are the
// sign of dG sent to the crossbar; no read-verify is involved.
//
// Organisation (this design's choice, the paper gives the function only):
// counters are stored row by row; an accumulation pass visits one visible
// row per clock and updates all COLS counters of that row in parallel, so a
// pass takes ROWS clocks. `clear` walks the rows the same way and zeroes
// them (needed once before training).
//
// Interface: pulse `start` (or `clear`) while idle; `busy` is high during the
// pass; `done` pulses one clock after the last row. For every row visited by
// an accumulation pass, one clock later `upd_valid` is high with `upd_row`
// and per-column `upd_pot` / `upd_dep` masks. v/h/vr/hr must stay stable
// while busy. Counter width is sign + log2(CD_TH) bits (7 bits for 64): the
// paper calls this a 6-bit counter for CD_th = 64, i.e. six magnitude bits.
module cd_counter_array
  import dbn_pkg::*;
#(
  parameter int unsigned ROWS  = N_VIS,
  parameter int unsigned COLS  = N_H1,
  parameter int unsigned TH    = CD_TH,
  localparam int unsigned CW   = $clog2(TH) + 1,
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                clear,
  input  logic [ROWS-1:0]     v,
  input  logic [COLS-1:0]     h,
  input  logic [ROWS-1:0]     vr,
  input  logic [COLS-1:0]     hr,
  output logic                busy,
  output logic                done,
  output logic                upd_valid,
  output logic [RW-1:0]       upd_row,
  output logic [COLS-1:0]     upd_pot,
  output logic [COLS-1:0]     upd_dep,
  output logic [31:0]         n_pot,
  output logic [31:0]         n_dep
);

  typedef logic signed [CW-1:0] cnt_t;

  cnt_t [COLS-1:0] mem [ROWS];

  logic          clearing;
  logic [RW-1:0] row;

  cnt_t [COLS-1:0] row_next;
  logic [COLS-1:0] pot_c, dep_c;

  // Counter update of the row being visited, all columns at once.
  always_comb begin
    for (int j = 0; j < COLS; j++) begin
      logic signed [CW:0] nxt;
      nxt = (CW+1)'(mem[row][j]) + (CW+1)'(cd_elem(v[row], h[j], vr[row], hr[j]));
      pot_c[j] = (nxt >= $signed((CW+1)'(TH)));
      dep_c[j] = (nxt <= -$signed((CW+1)'(TH)));
      if (clearing || pot_c[j] || dep_c[j]) row_next[j] = '0;
      else                                  row_next[j] = nxt[CW-1:0];
      if (clearing) begin
        pot_c[j] = 1'b0;
        dep_c[j] = 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy) mem[row] <= row_next;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      clearing  <= 1'b0;
      row       <= '0;
      done      <= 1'b0;
      upd_valid <= 1'b0;
      upd_row   <= '0;
      upd_pot   <= '0;
      upd_dep   <= '0;
      n_pot     <= '0;
      n_dep     <= '0;
    end else begin
      done      <= 1'b0;
      upd_valid <= 1'b0;
      if (!busy) begin
        if (start || clear) begin
          busy     <= 1'b1;
          clearing <= clear;
          row      <= '0;
          if (clear) begin
            n_pot <= '0;
            n_dep <= '0;
          end
        end
      end else begin
        if (!clearing) begin
          upd_valid <= 1'b1;
          upd_row   <= row;
          upd_pot   <= pot_c;
          upd_dep   <= dep_c;
          n_pot     <= n_pot + 32'($countones(pot_c));
          n_dep     <= n_dep + 32'($countones(dep_c));
        end
        if (row == RW'(ROWS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          row <= row + 1'b1;
        end
      end
    end
  end

  // A new pass may only be requested while idle.
  always_ff @(posedge clk) begin
    if (busy) assert (!(start || clear))
      else $error("cd_counter_array: start/clear while busy");
  end

endmodule
