// cnn_tagging: pulse-tagging half of the 3-Conv / 4-Conv CNN.
//
// Conv 1 (kernel 3, 5 feature maps, ReLU) followed by Conv 2 (kernel 6, one
// output map, sigmoid) turn a window of digitised samples into a detection
// probability for each bunch crossing: the network is trained to fire on
// deposits above three times the electronic-noise level. Each tag sees 8
// consecutive samples. The module evaluates TAG_LEN consecutive tags at
// once, which is what the energy half needs (6 for both CNN variants), so
// the input window holds TAG_LEN + 7 samples, x[0] oldest.
//
// Coefficients, flat in coef: Conv 1 weights (map, tap), Conv 1 biases,
// Conv 2 weights (map, tap), Conv 2 bias.
// Timing: two register stages (one per layer), initiation interval 1.
// Layer sizes follow the source's CNN diagram; the hidden ReLU and the
// sigmoid output (the tag is described as a probability) are this design's
// reading, since the activations are not stated.
module cnn_tagging
  import lar_pkg::*;
#(
  parameter int  TAG_LEN = C3_K + C4_K - 1,
  localparam int IN_LEN  = TAG_LEN + C1_K + C2_K - 2,
  localparam int C1_LEN  = IN_LEN - C1_K + 1,
  localparam int NW1     = C1_MAPS * C1_K,
  localparam int NW2     = C1_MAPS * C2_K,
  localparam int NCOEF   = NW1 + C1_MAPS + NW2 + 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  x [IN_LEN],
  input  fx_t  coef [NCOEF],
  output logic out_valid,
  output fx_t  tag [TAG_LEN]
);
  fx_t  x1 [1][IN_LEN];
  fx_t  w1 [NW1];
  fx_t  b1 [C1_MAPS];
  fx_t  w2 [NW2];
  fx_t  b2 [1];
  fx_t  h1 [C1_MAPS][C1_LEN];
  fx_t  t2 [1][TAG_LEN];
  logic v1;

  always_comb begin
    for (int i = 0; i < IN_LEN; i++)  x1[0][i] = x[i];
    for (int i = 0; i < NW1; i++)     w1[i] = coef[i];
    for (int i = 0; i < C1_MAPS; i++) b1[i] = coef[NW1 + i];
    for (int i = 0; i < NW2; i++)     w2[i] = coef[NW1 + C1_MAPS + i];
    b2[0] = coef[NCOEF - 1];
    for (int i = 0; i < TAG_LEN; i++) tag[i] = t2[0][i];
  end

  conv1d_layer #(.IN_CH(1), .OUT_CH(C1_MAPS), .K(C1_K), .IN_LEN(IN_LEN), .ACT(ACT_RELU))
    u_conv1 (.clk, .rst_n, .in_valid, .x(x1), .w(w1), .b(b1), .out_valid(v1), .y(h1));

  conv1d_layer #(.IN_CH(C1_MAPS), .OUT_CH(1), .K(C2_K), .IN_LEN(C1_LEN), .ACT(ACT_SIGMOID))
    u_conv2 (.clk, .rst_n, .in_valid(v1), .x(h1), .w(w2), .b(b2), .out_valid, .y(t2));

endmodule
