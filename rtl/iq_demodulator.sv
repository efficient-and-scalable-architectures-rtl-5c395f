// iq_demodulator: digital down-conversion of the shared readout feedline to
// one qubit's baseband.
//
// All qubits of a group are read through one feedline at different
// intermediate frequencies, so the same ADC I/Q stream reaches one
// demodulator per qubit. Each multiplies the complex sample (I + jQ) by
// exp(-j*phi), where phi comes from a numerically controlled oscillator:
//     out_i = I*cos(phi) + Q*sin(phi)
//     out_q = Q*cos(phi) - I*sin(phi)
// The paper states only that demodulation needs two fused multiply-add
// units; here each output lane is one multiplier stage followed by one
// multiply-add stage, which is that reading. The NCO (32-bit phase
// accumulator, 1024-entry sine table computed at elaboration) and the reset
// of the phase to zero at every trace start, so that every trace sees the
// same demodulation phase, are this design's choices.
//
// Interface: in_valid qualifies one ADC sample; in_sot marks the first sample
// of a trace. ftw_we loads the frequency tuning word (phase step per sample
// = ftw / 2**32 of a turn). Outputs carry valid and sot along.
// Timing: two cycles from an input sample to its output, one sample per
// cycle at most.
module iq_demodulator
  import readout_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      ftw_we,
  input  logic [PHASE_W-1:0]        ftw_data,
  input  logic                      in_valid,
  input  logic                      in_sot,
  input  logic signed [ADC_W-1:0]   in_i,
  input  logic signed [ADC_W-1:0]   in_q,
  output logic                      out_valid,
  output logic                      out_sot,
  output logic signed [DEMOD_W-1:0] out_i,
  output logic signed [DEMOD_W-1:0] out_q
);

  localparam sin_lut_t SIN_LUT = make_sin_lut();
  localparam int unsigned QUARTER = 2**(LUT_AW-2);
  localparam int unsigned PW = ADC_W + LO_W;  // product width

  logic [PHASE_W-1:0] ftw_q;
  logic [PHASE_W-1:0] phase_q;

  // Phase of the current sample: zero at a trace start.
  logic [PHASE_W-1:0] phase_now;
  logic [LUT_AW-1:0]  idx_sin, idx_cos;
  logic signed [LO_W-1:0] lo_sin, lo_cos;

  always_comb begin
    phase_now = in_sot ? '0 : phase_q;
    idx_sin   = phase_now[PHASE_W-1 -: LUT_AW];
    idx_cos   = idx_sin + LUT_AW'(QUARTER);
    lo_sin    = SIN_LUT[idx_sin];
    lo_cos    = SIN_LUT[idx_cos];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ftw_q   <= '0;
      phase_q <= '0;
    end else begin
      if (ftw_we) ftw_q <= ftw_data;
      if (in_valid) phase_q <= phase_now + ftw_q;
    end
  end

  // Stage 1: first multiply of each lane; operands for the FMA held.
  logic                   s1_valid, s1_sot;
  logic signed [PW-1:0]   s1_p_i, s1_p_q;        // I*cos, Q*cos
  logic signed [ADC_W-1:0] s1_i, s1_q;
  logic signed [LO_W-1:0]  s1_sin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_sot   <= 1'b0;
      s1_p_i   <= '0;
      s1_p_q   <= '0;
      s1_i     <= '0;
      s1_q     <= '0;
      s1_sin   <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_sot   <= in_valid && in_sot;
      if (in_valid) begin
        s1_p_i <= in_i * lo_cos;
        s1_p_q <= in_q * lo_cos;
        s1_i   <= in_i;
        s1_q   <= in_q;
        s1_sin <= lo_sin;
      end
    end
  end

  // Stage 2: one fused multiply-add per lane, scale back from Q1.15.
  logic signed [PW:0] fma_i, fma_q;
  always_comb begin
    fma_i = (PW+1)'(s1_p_i) + (PW+1)'(s1_q * s1_sin);
    fma_q = (PW+1)'(s1_p_q) - (PW+1)'(s1_i * s1_sin);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sot   <= 1'b0;
      out_i     <= '0;
      out_q     <= '0;
    end else begin
      out_valid <= s1_valid;
      out_sot   <= s1_sot;
      if (s1_valid) begin
        out_i <= sat_feat(64'(fma_i >>> (LO_W-1)));
        out_q <= sat_feat(64'(fma_q >>> (LO_W-1)));
      end
    end
  end

  // A trace start is a sample.
  assert property (@(posedge clk) disable iff (!rst_n) in_sot |-> in_valid);

endmodule
