// matched_filter: one matched filter, the dot product of a demodulated trace
// with one stored envelope.
//
// The score of a trace is
//     score = sat( (sum_t  K_I[t]*I[t] + K_Q[t]*Q[t]) >>> MF_SHIFT )
// over the samples of the trace, where K_I and K_Q are the two envelope
// halves of this filter. The envelope is the calibrated kernel
// K = (mu_1 - mu_0) / (sigma_1^2 - sigma_0^2) of a pair of trace classes,
// computed offline and written through the k_* port; which pair it separates
// (two qubit states, a relaxation or an excitation event) is only a matter
// of what is loaded. The dot product follows the paper; the fixed-point
// format (16-bit envelope, 48-bit accumulator, MF_SHIFT scaling to a 16-bit
// saturated score) is this design's choice.
//
// Interface: the sample sequencer of the filter bank supplies in_valid with
// the sample index in_idx and flags in_first / in_last for the first and last
// sample used. k_we writes envelope word k_addr of half k_iq (0 = I, 1 = Q).
// Timing: a product stage and an accumulate stage; score_valid pulses for one
// cycle two cycles after the sample flagged in_last.
module matched_filter
  import readout_pkg::*;
#(
  parameter int unsigned NSAMP    = N_SAMPLES,
  parameter int unsigned MF_SHIFT = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // envelope load
  input  logic                        k_we,
  input  logic                        k_iq,
  input  logic [$clog2(NSAMP)-1:0]    k_addr,
  input  logic signed [KERNEL_W-1:0]  k_data,
  // sample stream
  input  logic                        in_valid,
  input  logic                        in_first,
  input  logic                        in_last,
  input  logic [$clog2(NSAMP)-1:0]    in_idx,
  input  logic signed [DEMOD_W-1:0]   in_i,
  input  logic signed [DEMOD_W-1:0]   in_q,
  // result
  output logic                        score_valid,
  output logic signed [FEAT_W-1:0]    score
);

  localparam int unsigned PW = DEMOD_W + KERNEL_W + 1;

  // Envelope memory, one word per sample for each of I and Q.
  logic signed [KERNEL_W-1:0] env_i [NSAMP];
  logic signed [KERNEL_W-1:0] env_q [NSAMP];

  always_ff @(posedge clk) begin
    if (k_we) begin
      if (k_iq) env_q[k_addr] <= k_data;
      else      env_i[k_addr] <= k_data;
    end
  end

  // Stage 1: the two products of one sample.
  logic                 p_valid, p_first, p_last;
  logic signed [PW-1:0] p_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid <= 1'b0;
      p_first <= 1'b0;
      p_last  <= 1'b0;
      p_sum   <= '0;
    end else begin
      p_valid <= in_valid;
      p_first <= in_valid && in_first;
      p_last  <= in_valid && in_last;
      if (in_valid)
        p_sum <= PW'(env_i[in_idx] * in_i) + PW'(env_q[in_idx] * in_q);
    end
  end

  // Stage 2: accumulate; restart on the first sample, emit on the last.
  logic signed [MF_ACC_W-1:0] acc_q, acc_next;

  always_comb begin
    acc_next = (p_first ? '0 : acc_q) + MF_ACC_W'(p_sum);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q       <= '0;
      score_valid <= 1'b0;
      score       <= '0;
    end else begin
      score_valid <= p_valid && p_last;
      if (p_valid) begin
        acc_q <= acc_next;
        if (p_last) score <= sat_feat(64'(acc_next >>> MF_SHIFT));
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> 32'(in_idx) < NSAMP);

endmodule
