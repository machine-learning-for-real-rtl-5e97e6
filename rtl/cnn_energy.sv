// cnn_energy: energy-reconstruction half of the 3-Conv / 4-Conv CNN.
//
// The tag probabilities from cnn_tagging are concatenated with the samples
// they belong to, giving two input channels (channel 0 the sample, channel 1
// the tag) over LEN = 6 positions. With N_ECONV = 2 (4-Conv) Conv 3
// (kernel 4, 3 feature maps, ReLU) and Conv 4 (kernel 3, one output) follow;
// with N_ECONV = 1 (3-Conv) a single layer of kernel 6 maps the two
// channels to the energy. Either way the result is one transverse-energy
// value per window.
//
// Coefficients, flat in coef: per layer, weights (out map, in channel, tap)
// then biases.
// Timing: N_ECONV register stages, initiation interval 1.
// The layer sizes of 4-Conv follow the source's diagram. The source does not
// give the kernel of 3-Conv's single energy layer; 6 keeps the receptive
// field at 13 samples. The output layer is linear and the hidden layer ReLU
// (activations not stated in the source).
module cnn_energy
  import lar_pkg::*;
#(
  parameter int  N_ECONV = 2,
  localparam int LEN     = C3_K + C4_K - 1,
  localparam int C3_OUT  = (N_ECONV == 2) ? C3_MAPS : 1,
  localparam int K3      = (N_ECONV == 2) ? C3_K : C3_ONLY_K,
  localparam int L3      = LEN - K3 + 1,
  localparam int NW3     = C3_OUT * 2 * K3,
  localparam int NW4     = C3_MAPS * C4_K,
  localparam int NCOEF   = NW3 + C3_OUT + ((N_ECONV == 2) ? NW4 + 1 : 0)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  samp [LEN],
  input  fx_t  tag  [LEN],
  input  fx_t  coef [NCOEF],
  output logic out_valid,
  output fx_t  energy
);
  fx_t  cat [2][LEN];
  fx_t  w3 [NW3];
  fx_t  b3 [C3_OUT];
  fx_t  h3 [C3_OUT][L3];

  always_comb begin
    for (int i = 0; i < LEN; i++) begin
      cat[0][i] = samp[i];
      cat[1][i] = tag[i];
    end
    for (int i = 0; i < NW3; i++)    w3[i] = coef[i];
    for (int i = 0; i < C3_OUT; i++) b3[i] = coef[NW3 + i];
  end

  if (N_ECONV == 2) begin : g_4conv
    fx_t w4 [NW4];
    fx_t b4 [1];
    fx_t e4 [1][1];
    logic v3;
    always_comb begin
      for (int i = 0; i < NW4; i++) w4[i] = coef[NW3 + C3_OUT + i];
      b4[0] = coef[NCOEF - 1];
    end
    conv1d_layer #(.IN_CH(2), .OUT_CH(C3_MAPS), .K(C3_K), .IN_LEN(LEN), .ACT(ACT_RELU))
      u_conv3 (.clk, .rst_n, .in_valid, .x(cat), .w(w3), .b(b3), .out_valid(v3), .y(h3));
    conv1d_layer #(.IN_CH(C3_MAPS), .OUT_CH(1), .K(C4_K), .IN_LEN(L3), .ACT(ACT_NONE))
      u_conv4 (.clk, .rst_n, .in_valid(v3), .x(h3), .w(w4), .b(b4), .out_valid, .y(e4));
    assign energy = e4[0][0];
  end else begin : g_3conv
    conv1d_layer #(.IN_CH(2), .OUT_CH(1), .K(K3), .IN_LEN(LEN), .ACT(ACT_NONE))
      u_conv3 (.clk, .rst_n, .in_valid, .x(cat), .w(w3), .b(b3), .out_valid, .y(h3));
    assign energy = h3[0][0];
  end

endmodule
