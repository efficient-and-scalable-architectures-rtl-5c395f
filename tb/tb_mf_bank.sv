// tb_mf_bank: self-checking test of one qubit's nine-filter bank.
//
// Loads nine random envelope pairs, then sends traces under different
// integration lengths: the full window, a shortened (fast-readout) window,
// a length of 0 and one above the window (both meaning the full window) and a
// single sample. Each trace carries extra samples past its length, which must
// be ignored. All nine scores are compared with a 64-bit reference, and
// scores_valid must come two cycles after the last integrated sample.
`timescale 1ns/1ps
module tb_mf_bank;
  import readout_pkg::*;
  import readout_ref_pkg::*;

  localparam int unsigned NSAMP    = 32;
  localparam int unsigned MF_SHIFT = 8;
  localparam int unsigned LW       = $clog2(NSAMP+1);
  localparam int unsigned IW       = $clog2(NSAMP);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic [LW-1:0]              trace_len;
  logic                       k_we, k_iq;
  logic [3:0]                 k_mf;
  logic [IW-1:0]              k_addr;
  logic signed [KERNEL_W-1:0] k_data;
  logic                       in_valid, in_sot;
  logic signed [DEMOD_W-1:0]  in_i, in_q;
  logic                       scores_valid;
  logic signed [FEAT_W-1:0]   scores [N_MF];

  mf_bank #(.NSAMP(NSAMP), .NMF(N_MF), .MF_SHIFT(MF_SHIFT)) dut (.*);

  int checks = 0, failures = 0;
  int n_fast = 0, n_full = 0, n_ignored = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  longint ki [N_MF][NSAMP], kq [N_MF][NSAMP];
  typedef struct { longint due; longint val [N_MF]; } exp_t;
  exp_t exp_q[$];

  always @(negedge clk) if (rst_n && scores_valid) begin
    exp_t e;
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL spurious scores at %0d", cycle);
    end else begin
      e = exp_q.pop_front();
      if (e.due != cycle) begin
        failures++; $display("FAIL scores at %0d, due %0d", cycle, e.due);
      end
      for (int m = 0; m < N_MF; m++) begin
        checks++;
        if (longint'(scores[m]) != e.val[m]) begin
          failures++;
          $display("FAIL mf %0d: %0d exp %0d", m, scores[m], e.val[m]);
        end
      end
    end
  end

  task automatic run_trace(input int len_cfg, input int extra);
    int     n;
    longint acc [N_MF];
    exp_t   e;
    n = (len_cfg == 0 || len_cfg > int'(NSAMP)) ? int'(NSAMP) : len_cfg;
    for (int m = 0; m < N_MF; m++) acc[m] = 0;
    trace_len = LW'(len_cfg);
    for (int s = 0; s < n + extra; s++) begin
      while ($urandom_range(0, 3) == 0) begin
        in_valid = 1'b0; in_sot = 1'b0;
        @(negedge clk);
      end
      in_valid = 1'b1;
      in_sot   = (s == 0);
      in_i     = DEMOD_W'(longint'($urandom_range(0, 8000)) - 4000);
      in_q     = DEMOD_W'(longint'($urandom_range(0, 8000)) - 4000);
      if (s < n)
        for (int m = 0; m < N_MF; m++)
          acc[m] += ki[m][s] * longint'(in_i) + kq[m][s] * longint'(in_q);
      if (s == n-1) begin
        e.due = cycle + 2;
        for (int m = 0; m < N_MF; m++) e.val[m] = sat16(acc[m] >>> MF_SHIFT);
        exp_q.push_back(e);
      end
      if (s == 1) trace_len = LW'($urandom);  // must not matter after the start
      @(negedge clk);
    end
    in_valid = 1'b0; in_sot = 1'b0;
    if (n < int'(NSAMP)) n_fast++; else n_full++;
    if (extra > 0) n_ignored++;
  endtask

  initial begin
    k_we = 0; k_iq = 0; k_mf = '0; k_addr = '0; k_data = '0;
    in_valid = 0; in_sot = 0; in_i = '0; in_q = '0; trace_len = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < N_MF; m++)
      for (int s = 0; s < NSAMP; s++)
        for (int h = 0; h < 2; h++) begin
          longint v;
          v = longint'($urandom_range(0, 4000)) - 2000;
          if (h == 0) ki[m][s] = v; else kq[m][s] = v;
          @(negedge clk);
          k_we = 1'b1; k_mf = 4'(m); k_iq = h[0]; k_addr = IW'(s); k_data = KERNEL_W'(v);
        end
    @(negedge clk);
    k_we = 1'b0;
    run_trace(NSAMP, 5);
    run_trace(24, 8);      // shortened window
    run_trace(0, 0);       // 0 means the full window
    run_trace(40, 3);      // above the window: full window
    run_trace(1, 4);       // single sample
    for (int t = 0; t < 10; t++) run_trace(int'($urandom_range(1, NSAMP)), int'($urandom_range(0, 4)));
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    checks++;
    if (n_fast == 0 || n_full == 0 || n_ignored == 0) begin
      failures++; $display("FAIL coverage fast=%0d full=%0d ignored=%0d", n_fast, n_full, n_ignored);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
