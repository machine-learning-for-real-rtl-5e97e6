// conv1d_layer: one 1-D convolutional layer over a fixed time window.
//
// The CNNs of the source slide over the digitised pulse one bunch crossing
// at a time. This layer evaluates, in one clock, every output position a
// window needs: x[c][i] is input channel c at window position i (0 oldest),
// and output y[o][j], j = 0 .. IN_LEN-K, is
//     act( b[o] + sum_c sum_k w[(o*IN_CH + c)*K + k] * x[c][j+k] ).
// Coefficients are inputs (w flat, ordered o, then c, then k) so that trained
// values can be loaded at run time. ACT selects no activation, ReLU, or a
// LUT sigmoid/tanh (act_lut).
//
// Timing: one register stage; y and out_valid follow x and in_valid by one
// clock. A new window may enter every clock (initiation interval 1).
// Kernel sizes and feature-map counts come from the instantiating engine;
// the fixed-point arithmetic is that of lar_pkg.
module conv1d_layer
  import lar_pkg::*;
#(
  parameter int   IN_CH  = 1,
  parameter int   OUT_CH = 5,
  parameter int   K      = 3,
  parameter int   IN_LEN = 13,
  parameter act_e ACT    = ACT_RELU,
  localparam int  OUT_LEN = IN_LEN - K + 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  x [IN_CH][IN_LEN],
  input  fx_t  w [OUT_CH*IN_CH*K],
  input  fx_t  b [OUT_CH],
  output logic out_valid,
  output fx_t  y [OUT_CH][OUT_LEN]
);
  fx_t pre [OUT_CH][OUT_LEN];
  fx_t act [OUT_CH][OUT_LEN];

  always_comb begin
    for (int o = 0; o < OUT_CH; o++) begin
      for (int j = 0; j < OUT_LEN; j++) begin
        acc_t acc;
        acc = fx_bias(b[o]);
        for (int c = 0; c < IN_CH; c++)
          for (int k = 0; k < K; k++)
            acc += fx_mul(w[(o*IN_CH + c)*K + k], x[c][j+k]);
        pre[o][j] = fx_sat(acc);
      end
    end
  end

  for (genvar o = 0; o < OUT_CH; o++) begin : g_o
    for (genvar j = 0; j < OUT_LEN; j++) begin : g_j
      if (ACT == ACT_SIGMOID || ACT == ACT_TANH) begin : g_lut
        act_lut #(.FUNC(ACT)) u_lut (.x(pre[o][j]), .y(act[o][j]));
      end else if (ACT == ACT_RELU) begin : g_relu
        assign act[o][j] = fx_relu(pre[o][j]);
      end else begin : g_lin
        assign act[o][j] = pre[o][j];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int o = 0; o < OUT_CH; o++)
        for (int j = 0; j < OUT_LEN; j++)
          y[o][j] <= '0;
    end else begin
      out_valid <= in_valid;
      y         <= act;
    end
  end

endmodule
