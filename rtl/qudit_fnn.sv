// qudit_fnn: the small feed-forward network of one qubit, with its weight
// store and the final argmax.
//
// Each qubit has its own network, but every network reads the merged scores
// of all qubits, so it can correct crosstalk while its output grows with the
// number of levels k, not with k**n. The shape follows the paper: input size
// P = 45 (9 filters x 5 qubits), hidden layers of floor(P/2) = 22 and
// floor(P/4) = 11 neurons and an output layer of k = 3. The label is the
// index of the largest output (ties go to the lower state). Fully parallel
// layers and ReLU on the hidden layers are this design's choices.
//
// Weight store: NPARAM words written through w_we/w_addr/w_data, laid out as
//   W1[o][i] at o*NIN + i, then b1[o], then W2[o][i], b2[o], then W3, b3,
// each matrix row-major by output neuron. The offsets are the localparams
// OFF_* below; for 45-22-11-3 there are 1301 words.
//
// Timing: a five-stage pipeline (input register, two hidden layers, output
// layer, argmax), so out_valid follows in_valid by exactly 5 cycles, the
// latency the paper reports for its design at 1 GHz; one new feature vector
// may enter every cycle.
module qudit_fnn
  import readout_pkg::*;
#(
  parameter int unsigned NIN  = N_QUBITS * N_MF,
  parameter int unsigned H1   = NIN / 2,
  parameter int unsigned H2   = NIN / 4,
  parameter int unsigned NOUT = N_LEVELS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // weight load
  input  logic                     w_we,
  input  logic [15:0]              w_addr,
  input  logic signed [NN_W-1:0]   w_data,
  // features
  input  logic                     in_valid,
  input  logic signed [FEAT_W-1:0] in_feat [NIN],
  // result
  output logic                     out_valid,
  output qudit_state_e             out_state,
  output logic signed [FEAT_W-1:0] out_logits [NOUT]
);

  localparam int unsigned OFF_W1 = 0;
  localparam int unsigned OFF_B1 = OFF_W1 + H1 * NIN;
  localparam int unsigned OFF_W2 = OFF_B1 + H1;
  localparam int unsigned OFF_B2 = OFF_W2 + H2 * H1;
  localparam int unsigned OFF_W3 = OFF_B2 + H2;
  localparam int unsigned OFF_B3 = OFF_W3 + NOUT * H2;
  localparam int unsigned NPARAM = OFF_B3 + NOUT;

  // ---- Weight store ----------------------------------------------------------
  logic signed [NN_W-1:0] prm [NPARAM];

  localparam int unsigned PAW = $clog2(NPARAM);

  always_ff @(posedge clk) begin
    if (w_we && w_addr < 16'(NPARAM)) prm[PAW'(w_addr)] <= w_data;
  end

  logic signed [NN_W-1:0] w1 [H1][NIN];
  logic signed [NN_W-1:0] b1 [H1];
  logic signed [NN_W-1:0] w2 [H2][H1];
  logic signed [NN_W-1:0] b2 [H2];
  logic signed [NN_W-1:0] w3 [NOUT][H2];
  logic signed [NN_W-1:0] b3 [NOUT];

  always_comb begin
    for (int o = 0; o < H1; o++) begin
      b1[o] = prm[OFF_B1 + o];
      for (int i = 0; i < NIN; i++) w1[o][i] = prm[OFF_W1 + o*NIN + i];
    end
    for (int o = 0; o < H2; o++) begin
      b2[o] = prm[OFF_B2 + o];
      for (int i = 0; i < H1; i++) w2[o][i] = prm[OFF_W2 + o*H1 + i];
    end
    for (int o = 0; o < NOUT; o++) begin
      b3[o] = prm[OFF_B3 + o];
      for (int i = 0; i < H2; i++) w3[o][i] = prm[OFF_W3 + o*H2 + i];
    end
  end

  // ---- Pipeline ----------------------------------------------------------------
  logic signed [FEAT_W-1:0] x_q  [NIN];
  logic signed [FEAT_W-1:0] h1_d [H1];
  logic signed [FEAT_W-1:0] h1_q [H1];
  logic signed [FEAT_W-1:0] h2_d [H2];
  logic signed [FEAT_W-1:0] h2_q [H2];
  logic signed [FEAT_W-1:0] lg_d [NOUT];
  logic signed [FEAT_W-1:0] lg_q [NOUT];
  logic [4:0]               vld_q;

  dense_layer #(.NIN(NIN), .NOUT(H1),   .RELU(1'b1)) u_l1 (.x(x_q),  .w(w1), .b(b1), .y(h1_d));
  dense_layer #(.NIN(H1),  .NOUT(H2),   .RELU(1'b1)) u_l2 (.x(h1_q), .w(w2), .b(b2), .y(h2_d));
  dense_layer #(.NIN(H2),  .NOUT(NOUT), .RELU(1'b0)) u_l3 (.x(h2_q), .w(w3), .b(b3), .y(lg_d));

  // Argmax over the output layer, lowest index on a tie.
  logic [$clog2(NOUT)-1:0] best;
  always_comb begin
    best = '0;
    for (int o = 1; o < NOUT; o++)
      if (lg_q[o] > lg_q[best]) best = ($clog2(NOUT))'(o);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q     <= '0;
      out_state <= STATE_0;
      for (int i = 0; i < NIN; i++)  x_q[i]  <= '0;
      for (int i = 0; i < H1; i++)   h1_q[i] <= '0;
      for (int i = 0; i < H2; i++)   h2_q[i] <= '0;
      for (int i = 0; i < NOUT; i++) begin
        lg_q[i]       <= '0;
        out_logits[i] <= '0;
      end
    end else begin
      vld_q <= {vld_q[3:0], in_valid};
      if (in_valid) x_q  <= in_feat;
      if (vld_q[0]) h1_q <= h1_d;
      if (vld_q[1]) h2_q <= h2_d;
      if (vld_q[2]) lg_q <= lg_d;
      if (vld_q[3]) begin
        out_state  <= qudit_state_e'(2'(best));
        out_logits <= lg_q;
      end
    end
  end

  assign out_valid = vld_q[4];

endmodule
