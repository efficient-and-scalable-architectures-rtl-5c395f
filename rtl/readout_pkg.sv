// readout_pkg: sizes, number formats and shared types of the three-level
// (qutrit) readout discriminator.
//
// The discriminator turns one frequency-multiplexed readout trace of a group
// of qubits into one state label per qubit: 0, 1 or 2 (leaked). Its data path
// is demodulation -> 9 matched filters per qubit -> merge of all scores ->
// one small feed-forward network per qubit -> argmax.
//
// Numbers that follow the paper: 5 qubits, 3 levels, 500 samples per trace
// (1 us at 500 MS/s), 9 matched filters per qubit (3 qubit, 3 relaxation and
// 3 excitation filters), a network of 45-22-11-3 neurons. Every word width
// and fixed-point format here is this design's own choice; the paper gives
// none.
//
// The configuration port is one write bus (cfg_wr_t) that loads the
// calibration results: the local-oscillator frequency word of each qubit, the
// matched-filter envelopes and the network weights.
package readout_pkg;

  // ---- System size (paper) ------------------------------------------------
  localparam int unsigned N_QUBITS   = 5;    // five-qubit chip
  localparam int unsigned N_LEVELS   = 3;    // |0>, |1>, |2>
  localparam int unsigned N_SAMPLES  = 500;  // 1 us at 500 MS/s
  localparam int unsigned N_MF       = 9;    // 3 QMF + 3 RMF + 3 EMF

  // ---- Number formats (this design's choice) ------------------------------
  localparam int unsigned ADC_W    = 16;  // signed ADC sample
  localparam int unsigned LO_W     = 16;  // signed Q1.15 cosine / sine
  localparam int unsigned DEMOD_W  = 16;  // signed demodulated sample
  localparam int unsigned KERNEL_W = 16;  // signed matched-filter envelope
  localparam int unsigned MF_ACC_W = 48;  // matched-filter accumulator
  localparam int unsigned FEAT_W   = 16;  // signed feature / activation
  localparam int unsigned NN_W     = 16;  // signed weight or bias
  localparam int unsigned NN_FRAC  = 10;  // fractional bits of features and weights
  localparam int unsigned PHASE_W  = 32;  // NCO phase accumulator
  localparam int unsigned LUT_AW   = 10;  // NCO sine table address bits

  // Matched-filter kernel index: which envelope of the 9 (Table III order,
  // as drawn top to bottom in the figure of the per-qubit filter set).
  typedef enum logic [3:0] {
    MF_QMF_01 = 4'd0,  // qubit filters: separate |0>/|1>, |0>/|2>, |1>/|2>
    MF_QMF_02 = 4'd1,
    MF_QMF_12 = 4'd2,
    MF_RMF_10 = 4'd3,  // relaxation filters: 1->0, 2->0, 2->1
    MF_RMF_20 = 4'd4,
    MF_RMF_21 = 4'd5,
    MF_EMF_01 = 4'd6,  // excitation filters: 0->1, 0->2, 1->2
    MF_EMF_02 = 4'd7,
    MF_EMF_12 = 4'd8
  } mf_index_e;

  // Discriminated state of one qudit.
  typedef enum logic [1:0] {
    STATE_0 = 2'd0,
    STATE_1 = 2'd1,
    STATE_L = 2'd2    // leaked, |2>
  } qudit_state_e;

  // Configuration targets.
  typedef enum logic [1:0] {
    CFG_LO_FTW = 2'd0,  // data[31:0]: NCO frequency tuning word of a qubit
    CFG_KERNEL = 2'd1,  // addr = {mf[3:0], iq, sample[8:0]}; data[15:0]
    CFG_NN     = 2'd2   // addr = flat weight index (see qudit_fnn); data[15:0]
  } cfg_target_e;

  typedef struct packed {
    logic        we;
    cfg_target_e target;
    logic [2:0]  qubit;
    logic [15:0] addr;
    logic [31:0] data;
  } cfg_wr_t;

  // Kernel address fields inside cfg_wr_t.addr.
  localparam int unsigned KADDR_SAMPLE_W = 9;
  localparam int unsigned KADDR_IQ_BIT   = 9;
  localparam int unsigned KADDR_MF_LSB   = 10;

  // ---- Helpers ------------------------------------------------------------
  // Saturate a wide signed value to a FEAT_W-bit signed value.
  function automatic logic signed [FEAT_W-1:0] sat_feat(input logic signed [63:0] v);
    localparam logic signed [63:0] MAXV = (64'sd1 <<< (FEAT_W-1)) - 1;
    localparam logic signed [63:0] MINV = -(64'sd1 <<< (FEAT_W-1));
    if (v > MAXV)      return MAXV[FEAT_W-1:0];
    else if (v < MINV) return MINV[FEAT_W-1:0];
    else               return v[FEAT_W-1:0];
  endfunction

  // One full period of sin() in Q1.15, 2**LUT_AW entries, computed at
  // elaboration with a 6-term Taylor series in Q2.30 fixed point on the first
  // quarter period and mirrored to the other three.
  typedef logic signed [LO_W-1:0] sin_lut_t [2**LUT_AW];

  function automatic sin_lut_t make_sin_lut();
    sin_lut_t     lut;
    longint       pi_q30;
    longint       x, x2, term, acc;
    int unsigned  quarter;
    quarter = 2**(LUT_AW-2);
    pi_q30  = 64'd3373259426;  // round(pi * 2**30)
    for (int unsigned i = 0; i <= quarter; i++) begin
      x    = (pi_q30 * longint'(i)) / longint'(2**(LUT_AW-1));  // 2*pi*i/N
      x2   = (x * x) >>> 30;
      term = x;
      acc  = x;
      for (int k = 1; k <= 6; k++) begin
        term = -((term * x2) >>> 30) / longint'((2*k) * (2*k+1));
        acc  = acc + term;
      end
      // Q2.30 -> Q1.15 with rounding, clipped to +32767.
      acc = (acc * 32767 + (64'sd1 <<< 29)) >>> 30;
      if (acc > 32767) acc = 32767;
      lut[i] = LO_W'(acc);
      if (i > 0 && i < quarter) lut[2*quarter - i] = LO_W'(acc);
      if (i > 0) lut[4*quarter - i] = LO_W'(-acc);
      lut[2*quarter + i] = LO_W'(-acc);
    end
    lut[0]         = '0;
    lut[2*quarter] = '0;
    return lut;
  endfunction

endpackage
