// lar_pkg: types, fixed-point format and helper functions shared by the
// neural-network energy-reconstruction datapath for LAr calorimeter channels.
//
// All activations, samples and coefficients use one signed fixed-point
// format, fx_t: DW = 16 bits with FRAC = 10 fractional bits (range about
// +/-32, step 1/1024). Products are widened to acc_t and summed there; a
// layer output is the accumulator shifted right by FRAC (arithmetic, so it
// rounds toward minus infinity) and saturated back to fx_t. The source work
// quantises its networks but does not state the formats; these widths are
// this design's choice.
//
// nn_e names the five network variants that were implemented on the FPGA:
// 3-Conv and 4-Conv CNNs, the sliding-window vanilla RNN, and the LSTM in its
// sliding-window and single-cell forms. nn_ncoef() returns how many
// coefficients (weights and biases) each variant reads from the coefficient
// bank, and nn_win() how many samples of history it needs per step.
package lar_pkg;

  localparam int DW    = 16;
  localparam int FRAC  = 10;
  localparam int ACCW  = 40;

  typedef logic signed [DW-1:0]   fx_t;
  typedef logic signed [ACCW-1:0] acc_t;

  typedef enum logic [1:0] {ACT_NONE, ACT_RELU, ACT_SIGMOID, ACT_TANH} act_e;

  typedef enum logic [2:0] {
    NN_3CONV, NN_4CONV, NN_VANILLA, NN_LSTM_SLIDING, NN_LSTM_SINGLE
  } nn_e;

  // CNN geometry (Fig. 1 of the source): tagging Conv1 kernel 3 with 5
  // feature maps, Conv2 kernel 6 with one output (the tag probability);
  // energy Conv3 kernel 4 with 3 feature maps, Conv4 kernel 3.
  localparam int C1_MAPS = 5;
  localparam int C1_K    = 3;
  localparam int C2_K    = 6;
  localparam int C3_MAPS = 3;
  localparam int C3_K    = 4;
  localparam int C4_K    = 3;
  // 3-Conv: a single energy layer; kernel chosen so that the receptive
  // field stays 13 samples like 4-Conv.
  localparam int C3_ONLY_K = C3_K + C4_K - 1;
  localparam int CNN_RF    = C1_K + C2_K - 1 + C3_K + C4_K - 2;   // 13

  // Recurrent networks: sliding window of 5 samples (Fig. 2).
  localparam int RNN_WIN  = 5;
  localparam int RNN_H    = 8;    // vanilla RNN state size
  localparam int LSTM_H   = 10;   // LSTM state size

  function automatic int conv_ncoef(int in_ch, int out_ch, int k);
    return out_ch * in_ch * k + out_ch;
  endfunction

  function automatic int nn_ncoef(nn_e nn);
    case (nn)
      NN_3CONV:  return conv_ncoef(1, C1_MAPS, C1_K) + conv_ncoef(C1_MAPS, 1, C2_K)
                      + conv_ncoef(2, 1, C3_ONLY_K);
      NN_4CONV:  return conv_ncoef(1, C1_MAPS, C1_K) + conv_ncoef(C1_MAPS, 1, C2_K)
                      + conv_ncoef(2, C3_MAPS, C3_K) + conv_ncoef(C3_MAPS, 1, C4_K);
      NN_VANILLA: return RNN_H + RNN_H * RNN_H + RNN_H + RNN_H + 1;
      default:   return 4 * (LSTM_H + LSTM_H * LSTM_H + LSTM_H) + LSTM_H + 1;
    endcase
  endfunction

  function automatic int nn_win(nn_e nn);
    case (nn)
      NN_3CONV, NN_4CONV:  return CNN_RF;
      NN_VANILLA, NN_LSTM_SLIDING: return RNN_WIN;
      default:             return 1;
    endcase
  endfunction

  // Product of two fx_t values, still carrying 2*FRAC fractional bits.
  function automatic acc_t fx_mul(fx_t a, fx_t b);
    return acc_t'(a) * acc_t'(b);
  endfunction

  // Bias aligned to the 2*FRAC accumulator scale.
  function automatic acc_t fx_bias(fx_t b);
    return acc_t'(b) <<< FRAC;
  endfunction

  // Accumulator (2*FRAC fractional bits) back to fx_t with saturation.
  function automatic fx_t fx_sat(acc_t a);
    acc_t s;
    s = a >>> FRAC;
    if (s > acc_t'(32767))       return fx_t'(16'sh7fff);
    else if (s < -acc_t'(32768)) return fx_t'(-16'sh8000);
    else                         return fx_t'(s);
  endfunction

  function automatic fx_t fx_relu(fx_t a);
    return (a < 0) ? '0 : a;
  endfunction

endpackage
