// rnn_cell: one time step of the vanilla recurrent network.
//
// Computes the next state h_out[i] = ReLU(wx[i]*x + sum_j wh[i*H+j]*h_in[j]
// + b[i]) from one digitised sample x and the previous state h_in. ReLU is
// the single activation the source uses for its vanilla RNN. The state size
// H is not given in the source; 8 is this design's default.
//
// Timing: one register stage; out_valid/h_out follow in_valid by one clock,
// initiation interval 1. Unrolled copies form the sliding-window network.
module rnn_cell
  import lar_pkg::*;
#(
  parameter int H = RNN_H
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  x,
  input  fx_t  h_in [H],
  input  fx_t  wx [H],
  input  fx_t  wh [H*H],
  input  fx_t  b  [H],
  output logic out_valid,
  output fx_t  h_out [H]
);
  fx_t nxt [H];

  always_comb begin
    for (int i = 0; i < H; i++) begin
      acc_t acc;
      acc = fx_bias(b[i]) + fx_mul(wx[i], x);
      for (int j = 0; j < H; j++)
        acc += fx_mul(wh[i*H + j], h_in[j]);
      nxt[i] = fx_relu(fx_sat(acc));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < H; i++) h_out[i] <= '0;
    end else begin
      out_valid <= in_valid;
      h_out     <= nxt;
    end
  end

endmodule
