// feature_merge: joins the matched-filter scores of all qubits into one
// feature vector.
//
// Every qubit's network looks at the scores of all qubits, which is how the
// design sees readout crosstalk. This block waits until each of the NQ filter
// banks has delivered its NMF scores for the current trace, in any order and
// in any cycles, holding the ones that came first. When the last bank has
// delivered, it presents the merged vector of NQ*NMF features and pulses
// feat_valid once; the vector then stays stable until the next merge.
// Feature j*NMF + m is score m of qubit j (qubit-major), matching the 9x5 ->
// 45x1 merge the paper draws. The wait-for-all join is this design's own
// way of doing the merge.
//
// Timing: feat_valid one cycle after the last bank's valid. A bank that
// delivers again before the merge is complete overwrites its earlier scores.
module feature_merge
  import readout_pkg::*;
#(
  parameter int unsigned NQ  = N_QUBITS,
  parameter int unsigned NMF = N_MF
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NQ-1:0]            in_valid,
  input  logic signed [FEAT_W-1:0] in_scores [NQ][NMF],
  output logic                     feat_valid,
  output logic signed [FEAT_W-1:0] feat [NQ*NMF]
);

  logic [NQ-1:0]            have_q;    // banks delivered for this trace
  logic signed [FEAT_W-1:0] hold_q [NQ][NMF];
  logic [NQ-1:0]            have_next;

  assign have_next = have_q | in_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_q     <= '0;
      feat_valid <= 1'b0;
      for (int j = 0; j < NQ; j++)
        for (int m = 0; m < NMF; m++) begin
          hold_q[j][m]     <= '0;
          feat[j*NMF + m]  <= '0;
        end
    end else begin
      feat_valid <= 1'b0;
      for (int j = 0; j < NQ; j++)
        if (in_valid[j]) hold_q[j] <= in_scores[j];
      if (&have_next) begin
        have_q     <= '0;
        feat_valid <= 1'b1;
        for (int j = 0; j < NQ; j++)
          for (int m = 0; m < NMF; m++)
            feat[j*NMF + m] <= in_valid[j] ? in_scores[j][m] : hold_q[j][m];
      end else begin
        have_q <= have_next;
      end
    end
  end

endmodule
