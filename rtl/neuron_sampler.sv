// neuron_sampler - behavioural model of the neuron peripheral circuits.
//
// This is a behavioural model, not synthesizable logic. It stands for the
// read-out of one side of the crossbar (visible or hidden): per neuron a
// noise current source I_noise ~ N(0, NOISE_SD^2) injected into the output
// node, a trans-impedance amplifier and a comparator (1-bit ADC) against the
// TIA output of the reference line. On a `sample` strobe it registers
//   state_k = 1  if  I_k - I_ref >= I_noise,k   else 0       (Eq. 3)
// which, for a suitable noise level, draws the neuron with the sigmoid
// probability of the RBM. With `noise_en` low the noise sources are off and
// the decision is deterministic (fast inference).
//
// The last N_SOFT neurons form a one-hot group (the label neurons of the top
// RBM, which the paper samples with a softmax). The paper does not say how
// that is built; this model lets the neuron with the largest noisy current
// I_k - I_ref + I_noise,k win (a winner-take-all over the group), which
// yields exactly one label neuron per sample. Ties go to the lowest index.
//
// Currents are in femtoamperes. Both TIAs have the same gain R_TIA, so the
// comparison of their voltages equals the comparison of the currents.
module neuron_sampler #(
  parameter int unsigned K        = 500,
  parameter int unsigned N_SOFT   = 0,
  parameter real         NOISE_SD = 8.5e9,   // fA (8.5 uA)
  parameter real         R_TIA    = 1.0e3    // ohm
) (
  input  logic          clk,
  input  logic          sample,
  input  logic          noise_en,
  input  longint        i_in [K],
  input  longint        i_ref,
  output logic [K-1:0]  state
);

  function automatic real gauss();
    real s;
    s = 0.0;
    for (int k = 0; k < 12; k++) s += real'($urandom) / 4294967296.0;
    return s - 6.0;
  endfunction

  always @(posedge clk) begin
    if (sample) begin
      real v_ref, v_k, best;
      int  win;
      v_ref = R_TIA * real'(i_ref) * 1.0e-15;
      best  = 0.0;
      win   = -1;
      for (int k = 0; k < K; k++) begin
        real inoise;
        inoise = noise_en ? NOISE_SD * gauss() : 0.0;
        // TIA output of neuron k with its noise current, referred to v_ref
        v_k = R_TIA * (real'(i_in[k]) - inoise) * 1.0e-15 - v_ref;
        if (k < int'(K - N_SOFT)) begin
          state[k] <= (v_k >= 0.0);
        end else begin
          state[k] <= 1'b0;
          if (win < 0 || v_k > best) begin
            best = v_k;
            win  = k;
          end
        end
      end
      if (win >= 0) state[win] <= 1'b1;
    end
  end

endmodule
