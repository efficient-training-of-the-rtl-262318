// rbm_ctrl - control circuit of one mixed-signal RBM layer.
//
// Sequences the steps of the training flow of one RBM layer for one input
// sample (first-order contrastive divergence):
//   forward VMM + sampling   v  -> h
//   backward VMM + sampling  h  -> v'
//   forward VMM + sampling   v' -> h'
//   CD accumulation and weight update in the counter array.
// Each VMM+sampling phase takes three clocks: read the crossbar (`xb_fwd` or
// `xb_bwd`), fire the comparators (`smp_hid` / `smp_vis`), capture the
// sampled states into the state registers (`cap_h`, `cap_vr`, `cap_hr`).
// Other commands: LC_FWD runs only the first phase (inference, or feeding
// a higher layer), LC_BWD only the backward phase from the held h (label
// read-out of the top RBM), LC_INIT initializes the weights and clears the
// counters.
//
// Handshake: `start` with `cmd` while `busy` is low; `done` pulses for one
// clock when the command has finished. The split into three clocks per
// phase and the command set are this design's choices; the order of the
// phases is the paper's.
module rbm_ctrl
  import dbn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  layer_cmd_e  cmd,
  output logic        busy,
  output logic        done,
  // state registers
  output logic        ld_v,     // latch the input vector into v
  output logic        fwd_src,  // crossbar row drive: 0 = v, 1 = v'
  output logic        cap_h,
  output logic        cap_vr,
  output logic        cap_hr,
  // analog array and peripherals
  output logic        xb_init,
  output logic        xb_fwd,
  output logic        xb_bwd,
  output logic        smp_hid,
  output logic        smp_vis,
  // counter array
  output logic        cd_start,
  output logic        cd_clear,
  input  logic        cd_done
);

  typedef enum logic [3:0] {
    S_IDLE, S_LOADV, S_F1, S_F1S, S_F1C, S_B, S_BS, S_BC,
    S_F2, S_F2S, S_F2C, S_ACC, S_WAIT, S_INIT, S_DONE
  } state_e;

  state_e     st;
  layer_cmd_e cmd_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= S_IDLE;
      cmd_q <= LC_FWD;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin
          cmd_q <= cmd;
          unique case (cmd)
            LC_BWD:  st <= S_B;
            LC_INIT: st <= S_INIT;
            default: st <= S_LOADV;
          endcase
        end
        S_LOADV: st <= S_F1;
        S_F1:    st <= S_F1S;
        S_F1S:   st <= S_F1C;
        S_F1C:   st <= (cmd_q == LC_TRAIN) ? S_B : S_DONE;
        S_B:     st <= S_BS;
        S_BS:    st <= S_BC;
        S_BC:    st <= (cmd_q == LC_TRAIN) ? S_F2 : S_DONE;
        S_F2:    st <= S_F2S;
        S_F2S:   st <= S_F2C;
        S_F2C:   st <= S_ACC;
        S_ACC:   st <= S_WAIT;
        S_INIT:  st <= S_WAIT;
        S_WAIT:  if (cd_done) st <= S_DONE;
        S_DONE:  st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy     = (st != S_IDLE);
    done     = (st == S_DONE);
    ld_v     = (st == S_LOADV);
    xb_fwd   = (st == S_F1) || (st == S_F2);
    fwd_src  = (st == S_F2);
    smp_hid  = (st == S_F1S) || (st == S_F2S);
    cap_h    = (st == S_F1C);
    cap_hr   = (st == S_F2C);
    xb_bwd   = (st == S_B);
    smp_vis  = (st == S_BS);
    cap_vr   = (st == S_BC);
    cd_start = (st == S_ACC);
    xb_init  = (st == S_INIT);
    cd_clear = (st == S_INIT);
  end

  always_ff @(posedge clk) begin
    if (busy) assert (!start) else $error("rbm_ctrl: start while busy");
  end

endmodule
