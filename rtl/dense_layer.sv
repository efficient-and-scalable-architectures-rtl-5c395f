// dense_layer: one fully connected layer of the qudit network, computed in
// one combinational step (all NOUT*NIN products in parallel).
//
//     y[o] = sat( (sum_i x[i]*w[o][i] + (b[o] << NN_FRAC)) >>> NN_FRAC )
//
// followed by ReLU when RELU is set. Inputs, weights, biases and outputs all
// use the signed fixed-point format of readout_pkg (16 bits, NN_FRAC
// fractional bits); the sum is kept at full precision and saturated once at
// the end. The layer itself is the paper's; the number format, the
// saturation and the choice of ReLU for hidden layers are this design's
// (the paper names no activation function).
//
// Timing: purely combinational; the caller registers the result.
module dense_layer
  import readout_pkg::*;
#(
  parameter int unsigned NIN  = 45,
  parameter int unsigned NOUT = 22,
  parameter bit          RELU = 1'b1
) (
  input  logic signed [FEAT_W-1:0] x [NIN],
  input  logic signed [NN_W-1:0]   w [NOUT][NIN],
  input  logic signed [NN_W-1:0]   b [NOUT],
  output logic signed [FEAT_W-1:0] y [NOUT]
);

  localparam int unsigned AW = FEAT_W + NN_W + $clog2(NIN+1) + 1;

  always_comb begin
    for (int o = 0; o < NOUT; o++) begin
      logic signed [AW-1:0] acc;
      logic signed [AW-1:0] scaled;
      acc = AW'(b[o]) <<< NN_FRAC;
      for (int i = 0; i < NIN; i++)
        acc = acc + AW'(x[i] * w[o][i]);
      scaled = acc >>> NN_FRAC;
      if (RELU && scaled < 0) scaled = '0;
      y[o] = sat_feat(64'(scaled));
    end
  end

endmodule
