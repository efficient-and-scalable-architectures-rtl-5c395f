// tb_qudit_readout_top: end-to-end test of the whole discriminator at its
// default size (5 qubits, 500-sample traces, 45-22-11-3 networks).
//
// The testbench synthesises a frequency-multiplexed readout signal: each
// qubit j is prepared in a random state s in {0,1,2} and adds a tone at its
// own intermediate frequency whose baseband point is A*exp(i*2*pi*s/3), plus
// a little uniform noise. ADC samples arrive every other cycle (500 MS/s on a
// 1 GHz clock), with occasional extra idle cycles.
//
// Phase 1 ("nearest state"): each qubit's three qubit-filter envelopes are the
// three constellation points, the other six filters get random envelopes, and
// the networks are loaded so that they pass the qubit's own three filter
// scores through to the argmax. The label must then equal the prepared state.
// Phase 2 ("random network"): all network weights random, so every label
// depends on all 45 scores.
// In both phases every label and logit is compared bit-exactly with a 64-bit
// reference of the whole chain (readout_ref_pkg), and each result must come
// 10 cycles after the last integrated sample. Traces use the full 1 us window
// and the shortened 800 ns window (400 samples), and phase 1 also sweeps the
// window from 100 ns to 1000 ns (50 to 500 samples); samples past the window
// must be ignored. The test counts each of these events and fails if one never
// happened.
`timescale 1ns/1ps
module tb_qudit_readout_top;
  import readout_pkg::*;
  import readout_ref_pkg::*;

  localparam int unsigned NQ     = N_QUBITS;
  localparam int unsigned NSAMP  = N_SAMPLES;
  localparam int unsigned SHIFT  = 16;            // MF_SHIFT default of the top
  localparam int unsigned NFEAT  = NQ * N_MF;
  localparam int unsigned H1     = NFEAT / 2;
  localparam int unsigned H2     = NFEAT / 4;
  localparam int unsigned NOUT   = N_LEVELS;
  localparam int unsigned NPARAM = H1*NFEAT + H1 + H2*H1 + H2 + NOUT*H2 + NOUT;
  localparam int unsigned LW     = $clog2(NSAMP+1);
  localparam real         AMP    = 1500.0;
  localparam int          NOISE  = 150;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #0.5 clk = ~clk;

  cfg_wr_t                  cfg;
  logic [LW-1:0]            trace_len;
  logic                     adc_valid, adc_sot;
  logic signed [ADC_W-1:0]  adc_i, adc_q;
  logic                     out_valid;
  qudit_state_e             out_states [NQ];
  logic signed [FEAT_W-1:0] out_logits [NQ][N_LEVELS];

  qudit_readout_top dut (.*);

  int checks = 0, failures = 0;
  int n_full = 0, n_fast = 0, n_ignored = 0, n_gap = 0, n_reload = 0;
  int n_label [3] = '{0, 0, 0};
  int n_match = 0, n_nearest = 0, n_sweep = 0;
  bit phase1;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Reference copies of everything loaded.
  longint unsigned ftw [NQ];
  longint kI [NQ][N_MF][NSAMP], kQ [NQ][N_MF][NSAMP];
  longint prm [NQ][NPARAM];

  typedef struct { longint due; int st [NQ]; longint lg [NQ][NOUT]; int prep [NQ]; bit nearest; } exp_t;
  exp_t exp_q[$];

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL spurious result at %0d", cycle);
    end else begin
      e = exp_q.pop_front();
      if (e.due != cycle) begin
        failures++; $display("FAIL result at %0d, due %0d", cycle, e.due);
      end
      for (int j = 0; j < NQ; j++) begin
        checks++;
        if (int'(out_states[j]) != e.st[j]) begin
          failures++; $display("FAIL qubit %0d label %0d exp %0d", j, out_states[j], e.st[j]);
        end
        for (int o = 0; o < NOUT; o++) begin
          checks++;
          if (longint'(out_logits[j][o]) != e.lg[j][o]) begin
            failures++;
            $display("FAIL qubit %0d logit %0d: %0d exp %0d", j, o, out_logits[j][o], e.lg[j][o]);
          end
        end
        n_label[int'(out_states[j])]++;
        if (e.nearest) begin
          checks++;
          if (int'(out_states[j]) != e.prep[j]) begin
            failures++;
            $display("FAIL qubit %0d prepared %0d read %0d", j, e.prep[j], out_states[j]);
          end else n_match++;
        end
      end
    end
  end

  // ---- Configuration -------------------------------------------------------------
  task automatic cfg_write(input cfg_target_e tg, input int q, input int addr, input longint data);
    cfg.we     = 1'b1;
    cfg.target = tg;
    cfg.qubit  = 3'(q);
    cfg.addr   = 16'(addr);
    cfg.data   = 32'(data);
    @(negedge clk);
    cfg.we     = 1'b0;
  endtask

  task automatic load_kernels();
    for (int j = 0; j < NQ; j++)
      for (int m = 0; m < N_MF; m++)
        for (int s = 0; s < NSAMP; s++) begin
          if (m < 3) begin   // qubit filters: constellation point of state m
            kI[j][m][s] = longint'($rtoi(1000.0 * $cos(2.0*PI*real'(m)/3.0) + 1000.5)) - 1000;
            kQ[j][m][s] = longint'($rtoi(1000.0 * $sin(2.0*PI*real'(m)/3.0) + 1000.5)) - 1000;
          end else begin
            kI[j][m][s] = longint'($urandom_range(0, 600)) - 300;
            kQ[j][m][s] = longint'($urandom_range(0, 600)) - 300;
          end
          cfg_write(CFG_KERNEL, j, (m << KADDR_MF_LSB) | s, kI[j][m][s]);
          cfg_write(CFG_KERNEL, j, (m << KADDR_MF_LSB) | (1 << KADDR_IQ_BIT) | s, kQ[j][m][s]);
        end
  endtask

  // Network that hands qubit j's three qubit-filter scores to the argmax.
  task automatic load_nearest_net();
    int offb1, offw2, offb2, offw3, offb3;
    offb1 = H1*NFEAT; offw2 = offb1 + H1; offb2 = offw2 + H2*H1;
    offw3 = offb2 + H2; offb3 = offw3 + NOUT*H2;
    for (int j = 0; j < NQ; j++) begin
      for (int a = 0; a < int'(NPARAM); a++) prm[j][a] = 0;
      for (int k = 0; k < 3; k++) begin
        prm[j][k*NFEAT + j*N_MF + k] = 1024;   // 1.0
        prm[j][offb1 + k]            = 8192;   // +8.0 keeps ReLU linear
        prm[j][offw2 + k*H1 + k]     = 1024;
        prm[j][offw3 + k*H2 + k]     = 1024;
      end
      for (int a = 0; a < int'(NPARAM); a++) cfg_write(CFG_NN, j, a, prm[j][a]);
    end
    n_reload++;
  endtask

  task automatic load_random_net();
    for (int j = 0; j < NQ; j++)
      for (int a = 0; a < int'(NPARAM); a++) begin
        prm[j][a] = longint'($urandom_range(0, 240)) - 120;
        cfg_write(CFG_NN, j, a, prm[j][a]);
      end
    n_reload++;
  endtask

  // ---- Reference network -----------------------------------------------------------
  function automatic void ref_net(input int j, input longint x [NFEAT],
                                  output longint lg [NOUT], output int st);
    longint h1 [H1], h2 [H2], acc;
    int     off;
    for (int o = 0; o < H1; o++) begin
      acc = prm[j][H1*NFEAT + o] <<< 10;
      for (int i = 0; i < NFEAT; i++) acc += x[i] * prm[j][o*NFEAT + i];
      h1[o] = ref_neuron(acc, 1'b1);
    end
    off = H1*NFEAT + H1;
    for (int o = 0; o < H2; o++) begin
      acc = prm[j][off + H2*H1 + o] <<< 10;
      for (int i = 0; i < H1; i++) acc += h1[i] * prm[j][off + o*H1 + i];
      h2[o] = ref_neuron(acc, 1'b1);
    end
    off = off + H2*H1 + H2;
    for (int o = 0; o < NOUT; o++) begin
      acc = prm[j][off + NOUT*H2 + o] <<< 10;
      for (int i = 0; i < H2; i++) acc += h2[i] * prm[j][off + o*H2 + i];
      lg[o] = ref_neuron(acc, 1'b0);
    end
    st = 0;
    for (int o = 1; o < NOUT; o++) if (lg[o] > lg[st]) st = o;
  endfunction

  // ---- One readout trace -------------------------------------------------------
  task automatic run_trace(input int len_cfg, input int extra);
    int              n;
    int              prep [NQ];
    longint unsigned ph [NQ];
    longint          acc [NQ][N_MF];
    longint          x [NFEAT];
    exp_t            e;
    n = (len_cfg == 0 || len_cfg > int'(NSAMP)) ? int'(NSAMP) : len_cfg;
    for (int j = 0; j < NQ; j++) begin
      prep[j] = int'($urandom_range(0, 2));
      ph[j]   = 0;
      for (int m = 0; m < N_MF; m++) acc[j][m] = 0;
    end
    trace_len = LW'(len_cfg);
    for (int s = 0; s < n + extra; s++) begin
      real    vi, vq;
      longint si, sq;
      // one idle cycle per sample (500 MS/s at 1 GHz), sometimes more
      adc_valid = 1'b0; adc_sot = 1'b0;
      @(negedge clk);
      if ($urandom_range(0, 15) == 0) begin n_gap++; @(negedge clk); end
      vi = 0.0; vq = 0.0;
      for (int j = 0; j < NQ; j++) begin
        real th;
        th = 2.0*PI*real'(prep[j])/3.0 + 2.0*PI*real'(ph[j])/4294967296.0;
        vi += AMP * $cos(th);
        vq += AMP * $sin(th);
      end
      si = longint'($rtoi(vi + 100000.5)) - 100000 + longint'($urandom_range(0, 2*NOISE)) - NOISE;
      sq = longint'($rtoi(vq + 100000.5)) - 100000 + longint'($urandom_range(0, 2*NOISE)) - NOISE;
      adc_valid = 1'b1;
      adc_sot   = (s == 0);
      adc_i     = ADC_W'(si);
      adc_q     = ADC_W'(sq);
      if (s < n)
        for (int j = 0; j < NQ; j++) begin
          longint di, dq;
          ref_demod(si, sq, ph[j], di, dq);
          for (int m = 0; m < N_MF; m++) acc[j][m] += kI[j][m][s] * di + kQ[j][m][s] * dq;
        end
      for (int j = 0; j < NQ; j++) ph[j] = (ph[j] + ftw[j]) & 64'hFFFF_FFFF;
      if (s == n-1) begin
        for (int j = 0; j < NQ; j++)
          for (int m = 0; m < N_MF; m++) x[j*N_MF + m] = sat16(acc[j][m] >>> SHIFT);
        for (int j = 0; j < NQ; j++) begin
          longint lg [NOUT];
          int     st;
          ref_net(j, x, lg, st);
          e.st[j] = st;
          e.lg[j] = lg;
          e.prep[j] = prep[j];
        end
        e.nearest = phase1;
        e.due = cycle + 10;
        exp_q.push_back(e);
      end
      @(negedge clk);
    end
    adc_valid = 1'b0; adc_sot = 1'b0;
    if (n < int'(NSAMP)) n_fast++; else n_full++;
    if (extra > 0) n_ignored++;
    if (phase1) n_nearest++;
  endtask

  initial begin
    cfg = '0; trace_len = '0; adc_valid = 0; adc_sot = 0; adc_i = '0; adc_q = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // Intermediate frequencies 0.07, 0.13, ... of the sample rate.
    for (int j = 0; j < NQ; j++) begin
      ftw[j] = longint'($rtoi((0.07 + 0.06*real'(j)) * 4294967296.0)) & 64'hFFFF_FFFF;
      cfg_write(CFG_LO_FTW, j, 0, longint'(ftw[j]));
    end
    load_kernels();
    load_nearest_net();
    phase1 = 1'b1;
    run_trace(500, 6);    // full 1 us window, then samples to ignore
    run_trace(400, 0);    // 800 ns fast readout
    run_trace(0, 0);
    run_trace(400, 20);
    for (int t = 0; t < 4; t++) run_trace((t % 2 == 0) ? 500 : 400, 0);
    // readout-duration sweep, 100 ns to 1000 ns in 100 ns steps
    for (int d = 1; d <= 10; d++) begin run_trace(50 * d, 0); n_sweep++; end
    repeat (20) @(negedge clk);
    load_random_net();
    phase1 = 1'b0;
    for (int t = 0; t < 6; t++) run_trace((t % 2 == 0) ? 500 : 400, t % 3);
    repeat (20) @(negedge clk);

    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    $display("events: full %0d fast %0d ignored-tail %0d extra-gaps %0d reloads %0d labels %0d/%0d/%0d nearest-match %0d",
             n_full, n_fast, n_ignored, n_gap, n_reload, n_label[0], n_label[1], n_label[2], n_match);
    checks++;
    if (n_full == 0 || n_fast == 0 || n_ignored == 0 || n_gap == 0 || n_reload < 2 ||
        n_label[0] == 0 || n_label[1] == 0 || n_label[2] == 0 || n_match == 0 || n_nearest == 0 ||
        n_sweep != 10) begin
      failures++; $display("FAIL an event never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
