// qudit_readout_top: real-time three-level readout discriminator for a group
// of frequency-multiplexed superconducting qubits.
//
// One ADC I/Q stream carries the readout signal of all NQ qubits. For every
// qubit the design
//   1. demodulates the stream at that qubit's intermediate frequency
//      (iq_demodulator),
//   2. correlates the demodulated trace with nine calibrated envelopes:
//      three qubit-state, three relaxation and three excitation matched
//      filters (mf_bank),
// then
//   3. merges the 9 x NQ scores into one feature vector (feature_merge), and
//   4. runs one small network per qubit on the whole vector, so each qubit's
//      label uses the other qubits' signals to cancel crosstalk, ending in an
//      argmax that names the state 0, 1 or 2 (leaked) (qudit_fnn).
// This data path is the paper's. The configuration bus, the fixed-point
// formats and all handshakes are this design's choices.
//
// Interface
//   cfg         one write per cycle: LO frequency words, envelope words and
//               network weights (readout_pkg::cfg_wr_t, cfg_target_e).
//   trace_len   samples integrated per trace (0 or > NSAMP: NSAMP). Shorter
//               windows give a faster readout with the same calibration.
//   adc_*       one I/Q sample per cycle when adc_valid; adc_sot flags the
//               first sample of a trace. Samples after trace_len are ignored
//               until the next adc_sot.
//   out_valid   pulses once per trace; out_states[j] is qubit j's label.
// Timing: out_valid comes 10 cycles after the last integrated sample is
// presented (2 demodulation + 2 filter + 1 merge + 5 network).
module qudit_readout_top
  import readout_pkg::*;
#(
  parameter int unsigned NQ       = N_QUBITS,
  parameter int unsigned NSAMP    = N_SAMPLES,
  parameter int unsigned MF_SHIFT = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  cfg_wr_t                       cfg,
  input  logic [$clog2(NSAMP+1)-1:0]    trace_len,
  input  logic                          adc_valid,
  input  logic                          adc_sot,
  input  logic signed [ADC_W-1:0]       adc_i,
  input  logic signed [ADC_W-1:0]       adc_q,
  output logic                          out_valid,
  output qudit_state_e                  out_states [NQ],
  output logic signed [FEAT_W-1:0]      out_logits [NQ][N_LEVELS]
);

  localparam int unsigned IW   = $clog2(NSAMP);
  localparam int unsigned NFEAT = NQ * N_MF;

  // ---- Configuration decode ----------------------------------------------------
  logic [NQ-1:0] sel_q;
  always_comb
    for (int j = 0; j < NQ; j++) sel_q[j] = cfg.we && cfg.qubit == 3'(j);

  // ---- Per-qubit demodulation and matched filtering ----------------------------
  logic [NQ-1:0]            bank_valid;
  logic signed [FEAT_W-1:0] bank_scores [NQ][N_MF];

  for (genvar j = 0; j < NQ; j++) begin : g_qubit
    logic                      dm_valid, dm_sot;
    logic signed [DEMOD_W-1:0] dm_i, dm_q;
    logic signed [FEAT_W-1:0]  sc [N_MF];

    iq_demodulator u_demod (
      .clk      (clk),
      .rst_n    (rst_n),
      .ftw_we   (sel_q[j] && cfg.target == CFG_LO_FTW),
      .ftw_data (cfg.data),
      .in_valid (adc_valid),
      .in_sot   (adc_sot),
      .in_i     (adc_i),
      .in_q     (adc_q),
      .out_valid(dm_valid),
      .out_sot  (dm_sot),
      .out_i    (dm_i),
      .out_q    (dm_q)
    );

    mf_bank #(
      .NSAMP   (NSAMP),
      .NMF     (N_MF),
      .MF_SHIFT(MF_SHIFT)
    ) u_bank (
      .clk         (clk),
      .rst_n       (rst_n),
      .trace_len   (trace_len),
      .k_we        (sel_q[j] && cfg.target == CFG_KERNEL),
      .k_mf        (cfg.addr[KADDR_MF_LSB +: 4]),
      .k_iq        (cfg.addr[KADDR_IQ_BIT]),
      .k_addr      (cfg.addr[IW-1:0]),
      .k_data      (cfg.data[KERNEL_W-1:0]),
      .in_valid    (dm_valid),
      .in_sot      (dm_sot),
      .in_i        (dm_i),
      .in_q        (dm_q),
      .scores_valid(bank_valid[j]),
      .scores      (sc)
    );

    always_comb bank_scores[j] = sc;
  end

  // ---- Merge --------------------------------------------------------------------
  logic                     feat_valid;
  logic signed [FEAT_W-1:0] feat [NFEAT];

  feature_merge #(.NQ(NQ), .NMF(N_MF)) u_merge (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (bank_valid),
    .in_scores (bank_scores),
    .feat_valid(feat_valid),
    .feat      (feat)
  );

  // ---- Per-qubit networks -----------------------------------------------------
  logic [NQ-1:0] nn_valid;

  for (genvar j = 0; j < NQ; j++) begin : g_nn
    qudit_fnn #(.NIN(NFEAT)) u_fnn (
      .clk       (clk),
      .rst_n     (rst_n),
      .w_we      (sel_q[j] && cfg.target == CFG_NN),
      .w_addr    (cfg.addr),
      .w_data    (cfg.data[NN_W-1:0]),
      .in_valid  (feat_valid),
      .in_feat   (feat),
      .out_valid (nn_valid[j]),
      .out_state (out_states[j]),
      .out_logits(out_logits[j])
    );
  end

  assign out_valid = nn_valid[0];

  // All networks see the same feature vector, so they finish together.
  assert property (@(posedge clk) disable iff (!rst_n) nn_valid[0] |-> &nn_valid);

  // The envelope address field holds at most 512 samples.
  initial assert (NSAMP <= 2**KADDR_SAMPLE_W && NQ <= 8);

endmodule
