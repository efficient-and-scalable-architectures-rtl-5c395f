// tb_matched_filter: self-checking test of one matched filter.
//
// Loads random I and Q envelopes, then runs traces of several lengths (down
// to a single sample, with idle gaps and a back-to-back restart) and compares
// each score with a 64-bit reference dot product, scaled and saturated as the
// RTL header states. Also checks that score_valid comes exactly two cycles
// after the last sample and never otherwise, and one saturating trace.
`timescale 1ns/1ps
module tb_matched_filter;
  import readout_pkg::*;
  import readout_ref_pkg::*;

  localparam int unsigned NSAMP    = 16;
  localparam int unsigned MF_SHIFT = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic                       k_we, k_iq;
  logic [$clog2(NSAMP)-1:0]   k_addr;
  logic signed [KERNEL_W-1:0] k_data;
  logic                       in_valid, in_first, in_last;
  logic [$clog2(NSAMP)-1:0]   in_idx;
  logic signed [DEMOD_W-1:0]  in_i, in_q;
  logic                       score_valid;
  logic signed [FEAT_W-1:0]   score;

  matched_filter #(.NSAMP(NSAMP), .MF_SHIFT(MF_SHIFT)) dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  longint ki [NSAMP], kq [NSAMP];
  typedef struct { longint due; longint val; } exp_t;
  exp_t exp_q[$];

  always @(negedge clk) if (rst_n && score_valid) begin
    exp_t e;
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL spurious score at %0d", cycle);
    end else begin
      e = exp_q.pop_front();
      if (e.due != cycle || longint'(score) != e.val) begin
        failures++;
        $display("FAIL cycle %0d due %0d: score %0d exp %0d", cycle, e.due, score, e.val);
      end
    end
  end

  task automatic load_env(input int amp);
    for (int s = 0; s < NSAMP; s++)
      for (int h = 0; h < 2; h++) begin
        longint v;
        v = longint'($urandom_range(0, 2*amp)) - amp;
        if (h == 0) ki[s] = v; else kq[s] = v;
        @(negedge clk);
        k_we = 1'b1; k_iq = h[0]; k_addr = s[$clog2(NSAMP)-1:0]; k_data = KERNEL_W'(v);
      end
    @(negedge clk);
    k_we = 1'b0;
  endtask

  task automatic run_trace(input int n, input int amp, input bit gaps);
    longint acc = 0;
    for (int s = 0; s < n; s++) begin
      while (gaps && $urandom_range(0, 2) == 0) begin
        in_valid = 1'b0; in_first = 1'b0; in_last = 1'b0;
        @(negedge clk);
      end
      in_valid = 1'b1;
      in_first = (s == 0);
      in_last  = (s == n-1);
      in_idx   = s[$clog2(NSAMP)-1:0];
      in_i     = DEMOD_W'(longint'($urandom_range(0, 2*amp)) - amp);
      in_q     = DEMOD_W'(longint'($urandom_range(0, 2*amp)) - amp);
      acc += ki[s] * longint'(in_i) + kq[s] * longint'(in_q);
      if (s == n-1) exp_q.push_back('{cycle + 2, sat16(acc >>> MF_SHIFT)});
      @(negedge clk);
    end
    in_valid = 1'b0; in_first = 1'b0; in_last = 1'b0;
  endtask

  initial begin
    k_we = 0; k_iq = 0; k_addr = '0; k_data = '0;
    in_valid = 0; in_first = 0; in_last = 0; in_idx = '0; in_i = '0; in_q = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_env(3000);
    run_trace(NSAMP, 3000, 1'b1);
    run_trace(NSAMP, 3000, 1'b0);   // back to back with the next one
    run_trace(12, 3000, 1'b0);
    run_trace(1, 3000, 1'b1);
    run_trace(7, 3000, 1'b1);
    load_env(32767);
    run_trace(NSAMP, 32767, 1'b0);  // large values: saturation possible
    for (int t = 0; t < 20; t++) run_trace(int'($urandom_range(1, NSAMP)), 2000, 1'b1);
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d scores missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
