// tb_qudit_fnn: self-checking test of one qubit's 45-22-11-3 network.
//
// Loads random weights through the flat weight port, then sends random
// feature vectors, some back to back (one per cycle) and some with gaps.
// Logits and the argmax label are compared with a 64-bit reference network
// (ReLU hidden layers, saturation to 16 bits), and each result must appear
// exactly 5 cycles after its input. A final phase zeroes the output weights
// and sets equal biases to check that ties go to state 0. All three labels
// must occur.
`timescale 1ns/1ps
module tb_qudit_fnn;
  import readout_pkg::*;
  import readout_ref_pkg::*;

  localparam int unsigned NIN  = N_QUBITS * N_MF;
  localparam int unsigned H1   = NIN / 2;
  localparam int unsigned H2   = NIN / 4;
  localparam int unsigned NOUT = N_LEVELS;
  localparam int unsigned NPARAM = H1*NIN + H1 + H2*H1 + H2 + NOUT*H2 + NOUT;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic                     w_we;
  logic [15:0]              w_addr;
  logic signed [NN_W-1:0]   w_data;
  logic                     in_valid;
  logic signed [FEAT_W-1:0] in_feat [NIN];
  logic                     out_valid;
  qudit_state_e             out_state;
  logic signed [FEAT_W-1:0] out_logits [NOUT];

  qudit_fnn dut (.*);

  int checks = 0, failures = 0;
  int n_state [3] = '{0, 0, 0};
  int n_tie = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  longint prm [NPARAM];

  typedef struct { longint due; longint lg [NOUT]; int st; } exp_t;
  exp_t exp_q[$];

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL spurious output at %0d", cycle);
    end else begin
      e = exp_q.pop_front();
      if (e.due != cycle || int'(out_state) != e.st) begin
        failures++;
        $display("FAIL at %0d due %0d: state %0d exp %0d", cycle, e.due, out_state, e.st);
      end
      for (int o = 0; o < NOUT; o++) begin
        checks++;
        if (longint'(out_logits[o]) != e.lg[o]) begin
          failures++; $display("FAIL logit %0d: %0d exp %0d", o, out_logits[o], e.lg[o]);
        end
      end
      n_state[int'(out_state)]++;
    end
  end

  // Reference network on feature vector x.
  function automatic exp_t ref_net(input longint x [NIN]);
    longint h1 [H1], h2 [H2], acc;
    exp_t   e;
    int     off;
    for (int o = 0; o < H1; o++) begin
      acc = prm[H1*NIN + o] <<< 10;
      for (int i = 0; i < NIN; i++) acc += x[i] * prm[o*NIN + i];
      h1[o] = ref_neuron(acc, 1'b1);
    end
    off = H1*NIN + H1;
    for (int o = 0; o < H2; o++) begin
      acc = prm[off + H2*H1 + o] <<< 10;
      for (int i = 0; i < H1; i++) acc += h1[i] * prm[off + o*H1 + i];
      h2[o] = ref_neuron(acc, 1'b1);
    end
    off = off + H2*H1 + H2;
    for (int o = 0; o < NOUT; o++) begin
      acc = prm[off + NOUT*H2 + o] <<< 10;
      for (int i = 0; i < H2; i++) acc += h2[i] * prm[off + o*H2 + i];
      e.lg[o] = ref_neuron(acc, 1'b0);
    end
    e.st = 0;
    for (int o = 1; o < NOUT; o++) if (e.lg[o] > e.lg[e.st]) e.st = o;
    return e;
  endfunction

  task automatic write_w(input int a, input longint v);
    prm[a] = v;
    @(negedge clk);
    w_we = 1'b1; w_addr = 16'(a); w_data = NN_W'(v);
    @(negedge clk);
    w_we = 1'b0;
  endtask

  task automatic send(input bit gap);
    longint x [NIN];
    exp_t   e;
    for (int i = 0; i < NIN; i++) begin
      x[i] = longint'($urandom_range(0, 4000)) - 2000;
      in_feat[i] = FEAT_W'(x[i]);
    end
    e = ref_net(x);
    e.due = cycle + 5;
    exp_q.push_back(e);
    in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    if (gap) repeat ($urandom_range(1, 6)) @(negedge clk);
  endtask

  initial begin
    w_we = 0; w_addr = '0; w_data = '0; in_valid = 0;
    for (int i = 0; i < NIN; i++) in_feat[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < int'(NPARAM); a++)
      write_w(a, longint'($urandom_range(0, 1400)) - 700);
    for (int t = 0; t < 60; t++) send(t % 3 == 0);   // mostly back to back
    repeat (8) @(negedge clk);
    // ties: output weights zero, equal biases -> state 0
    for (int a = H1*NIN + H1 + H2*H1 + H2; a < int'(NPARAM); a++)
      write_w(a, (a >= int'(NPARAM) - int'(NOUT)) ? 64'sd100 : 64'sd0);
    for (int t = 0; t < 3; t++) begin send(1'b1); n_tie++; end
    repeat (8) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    for (int s = 0; s < 3; s++) begin
      checks++;
      if (n_state[s] == 0) begin failures++; $display("FAIL state %0d never produced", s); end
    end
    $display("states: %0d %0d %0d, ties %0d", n_state[0], n_state[1], n_state[2], n_tie);
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
