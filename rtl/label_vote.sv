// label_vote - vote counter for repeated-sampling inference.
//
// A stochastic forward pass through the DBN excites (statistically) one
// label neuron. Repeating the pass and keeping the label that fired most
// often raises recognition accuracy (about 84 % for one pass, about 97 %
// after 50 passes in the paper's results). This block counts, per label,
// how many passes fired it and reports the label with the highest count
// (lowest index on a tie). It is this design's own, simplest realisation of
// that function.
//
// Interface: `clear` zeroes the counts; each clock with `valid` high adds
// the one-hot (or any) `lab` vector to the counts. `best` is combinational
// from the counts. Counters saturate at MAX_REP.
module label_vote #(
  parameter int unsigned N_LAB   = 10,
  parameter int unsigned MAX_REP = 50,
  localparam int unsigned CW     = $clog2(MAX_REP + 1),
  localparam int unsigned LW     = (N_LAB > 1) ? $clog2(N_LAB) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              valid,
  input  logic [N_LAB-1:0]  lab,
  output logic [LW-1:0]     best,
  output logic [CW-1:0]     best_count
);

  logic [CW-1:0] cnt [N_LAB];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_LAB; k++) cnt[k] <= '0;
    end else if (clear) begin
      for (int k = 0; k < N_LAB; k++) cnt[k] <= '0;
    end else if (valid) begin
      for (int k = 0; k < N_LAB; k++)
        if (lab[k] && cnt[k] != CW'(MAX_REP)) cnt[k] <= cnt[k] + 1'b1;
    end
  end

  always_comb begin
    best       = '0;
    best_count = cnt[0];
    for (int k = 1; k < N_LAB; k++)
      if (cnt[k] > best_count) begin
        best       = LW'(k);
        best_count = cnt[k];
      end
  end

endmodule
