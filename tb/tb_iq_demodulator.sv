// tb_iq_demodulator: self-checking test of the per-qubit down-converter.
//
// Loads a frequency word, streams random I/Q samples in traces with random
// gaps, and compares every output with a double-precision-sine reference
// (readout_ref_pkg), including the trace-start flag and the two-cycle
// latency. A second trace after a new frequency word checks that the phase
// restarts at zero on each trace start.
`timescale 1ns/1ps
module tb_iq_demodulator;
  import readout_pkg::*;
  import readout_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic                      ftw_we;
  logic [PHASE_W-1:0]        ftw_data;
  logic                      in_valid, in_sot;
  logic signed [ADC_W-1:0]   in_i, in_q;
  logic                      out_valid, out_sot;
  logic signed [DEMOD_W-1:0] out_i, out_q;

  iq_demodulator dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { longint due; longint ei; longint eq; bit sot; } exp_t;
  exp_t exp_q[$];

  // Output monitor: every output must be the oldest expected one, on time.
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      exp_t e;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected output at cycle %0d", cycle);
      end else begin
        e = exp_q.pop_front();
        if (e.due != cycle || longint'(out_i) != e.ei || longint'(out_q) != e.eq || out_sot != e.sot) begin
          failures++;
          $display("FAIL cycle %0d (due %0d): got %0d,%0d sot %0b exp %0d,%0d sot %0b",
                   cycle, e.due, out_i, out_q, out_sot, e.ei, e.eq, e.sot);
        end
      end
    end
  end

  longint unsigned ph, ftw;

  task automatic run_trace(input longint unsigned f, input int n);
    ftw = f;
    @(negedge clk);
    ftw_we = 1'b1; ftw_data = PHASE_W'(f);
    @(negedge clk);
    ftw_we = 1'b0;
    for (int s = 0; s < n; s++) begin
      longint ei, eq;
      // random idle cycles between samples
      while ($urandom_range(0, 3) == 0) begin
        in_valid = 1'b0; in_sot = 1'b0;
        @(negedge clk);
      end
      in_valid = 1'b1;
      in_sot   = (s == 0);
      in_i     = ADC_W'($urandom_range(0, 65535));
      in_q     = ADC_W'($urandom_range(0, 65535));
      if (s == 0) ph = 0;
      ref_demod(longint'(in_i), longint'(in_q), ph, ei, eq);
      exp_q.push_back('{cycle + 2, ei, eq, (s == 0)});
      ph = (ph + ftw) & 64'hFFFF_FFFF;
      @(negedge clk);
    end
    in_valid = 1'b0; in_sot = 1'b0;
  endtask

  initial begin
    ftw_we = 1'b0; ftw_data = '0; in_valid = 1'b0; in_sot = 1'b0; in_i = '0; in_q = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_trace(64'h1999_999A, 300);   // 0.1 turn per sample
    run_trace(64'hE38E_38E4, 300);   // negative-frequency tone
    run_trace(64'h0000_0000, 20);    // zero frequency: plain pass of I and Q
    repeat (6) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d outputs missing", exp_q.size());
    end
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
