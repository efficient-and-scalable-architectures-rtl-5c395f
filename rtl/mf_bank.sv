// mf_bank: the matched-filter set of one qubit.
//
// Nine matched filters run in parallel on the same demodulated trace of one
// qubit: three qubit filters (separating |0>/|1>, |0>/|2>, |1>/|2>), three
// relaxation filters (1->0, 2->0, 2->1) and three excitation filters (0->1,
// 0->2, 1->2), in the order of readout_pkg::mf_index_e. Their nine scores are
// this qubit's contribution to the merged feature vector. The filter set and
// its count follow the paper.
//
// A sample sequencer, shared by the nine filters, counts the samples of a
// trace from the start flag in_sot and stops after trace_len samples; later
// samples are ignored until the next start. trace_len is sampled at the start
// of each trace, so the integration window can be shortened (fast readout,
// e.g. 400 samples = 800 ns instead of 500 = 1 us) with the same envelopes.
// A trace_len of 0 or above NSAMP means NSAMP. The sequencer and this length
// control are this design's own; the paper shortens the readout without
// retraining but does not say how the hardware does it.
//
// Interface: k_we/k_mf/k_iq/k_addr/k_data write one envelope word of filter
// k_mf. scores_valid pulses once per trace, two cycles after the last
// sample used has been presented.
module mf_bank
  import readout_pkg::*;
#(
  parameter int unsigned NSAMP    = N_SAMPLES,
  parameter int unsigned NMF      = N_MF,
  parameter int unsigned MF_SHIFT = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [$clog2(NSAMP+1)-1:0]    trace_len,
  // envelope load
  input  logic                          k_we,
  input  logic [3:0]                    k_mf,
  input  logic                          k_iq,
  input  logic [$clog2(NSAMP)-1:0]      k_addr,
  input  logic signed [KERNEL_W-1:0]    k_data,
  // demodulated samples
  input  logic                          in_valid,
  input  logic                          in_sot,
  input  logic signed [DEMOD_W-1:0]     in_i,
  input  logic signed [DEMOD_W-1:0]     in_q,
  // scores
  output logic                          scores_valid,
  output logic signed [FEAT_W-1:0]      scores [NMF]
);

  localparam int unsigned IW = $clog2(NSAMP);
  localparam int unsigned LW = $clog2(NSAMP+1);

  // ---- Sample sequencer ----------------------------------------------------
  logic          active_q;
  logic [LW-1:0] cnt_q;       // index of the next sample
  logic [LW-1:0] len_q;       // length of the running trace
  logic [LW-1:0] len_start;   // length taken at a trace start

  logic          s_valid, s_first, s_last;
  logic [IW-1:0] s_idx;

  always_comb begin
    len_start = (trace_len == '0 || trace_len > LW'(NSAMP)) ? LW'(NSAMP) : trace_len;
    s_first   = in_sot;
    s_valid   = in_valid && (in_sot || active_q);
    s_idx     = in_sot ? '0 : IW'(cnt_q);
    s_last    = in_sot ? (len_start == LW'(1)) : (cnt_q == len_q - LW'(1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q <= 1'b0;
      cnt_q    <= '0;
      len_q    <= LW'(NSAMP);
    end else if (s_valid) begin
      if (in_sot) len_q <= len_start;
      cnt_q    <= LW'(s_idx) + LW'(1);
      active_q <= !s_last;
    end
  end

  // ---- Nine filters ----------------------------------------------------------
  logic [NMF-1:0] mf_valid;

  for (genvar m = 0; m < NMF; m++) begin : g_mf
    matched_filter #(
      .NSAMP   (NSAMP),
      .MF_SHIFT(MF_SHIFT)
    ) u_mf (
      .clk        (clk),
      .rst_n      (rst_n),
      .k_we       (k_we && k_mf == 4'(m)),
      .k_iq       (k_iq),
      .k_addr     (k_addr),
      .k_data     (k_data),
      .in_valid   (s_valid),
      .in_first   (s_first),
      .in_last    (s_last),
      .in_idx     (s_idx),
      .in_i       (in_i),
      .in_q       (in_q),
      .score_valid(mf_valid[m]),
      .score      (scores[m])
    );
  end

  // All filters see the same sequence, so they finish together.
  assign scores_valid = mf_valid[0];

  assert property (@(posedge clk) disable iff (!rst_n)
                   mf_valid[0] |-> &mf_valid);

endmodule
