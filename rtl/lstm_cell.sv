// lstm_cell: one time step of a long short-term memory network.
//
// Gates, each a vector of H units driven by the sample x and the previous
// output h_in:
//     i = sigmoid(Wi x + Ui h + bi)     f = sigmoid(Wf x + Uf h + bf)
//     g = tanh   (Wg x + Ug h + bg)     o = sigmoid(Wo x + Uo h + bo)
//     c_out = f*c_in + i*g              h_out = o * tanh(c_out)
// The sigmoid and tanh are act_lut tables, as the source realises its
// activations with LUTs. Coefficients, flat in coef, per gate in the order
// i, f, g, o: w[H], u[H*H] (row = unit, column = input unit), b[H].
// The state size H is not given in the source; 10 is this design's default.
//
// Timing: two register stages. Stage 1 registers the four activated gate
// vectors (and c_in); stage 2 the new cell state and output.
// out_valid/h_out/c_out follow in_valid by two clocks; initiation interval 1.
module lstm_cell
  import lar_pkg::*;
#(
  parameter int  H     = LSTM_H,
  localparam int NG    = H + H*H + H,       // coefficients per gate
  localparam int NCOEF = 4 * NG
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  x,
  input  fx_t  h_in [H],
  input  fx_t  c_in [H],
  input  fx_t  coef [NCOEF],
  output logic out_valid,
  output fx_t  h_out [H],
  output fx_t  c_out [H]
);
  fx_t  pre  [4][H];
  fx_t  gact [4][H];
  fx_t  gate_q [4][H];
  fx_t  c_q [H];
  logic v1;
  fx_t  c_nxt [H];
  fx_t  c_tanh [H];
  fx_t  h_nxt [H];

  always_comb begin
    for (int g = 0; g < 4; g++)
      for (int i = 0; i < H; i++) begin
        acc_t acc;
        acc = fx_bias(coef[g*NG + H + H*H + i]) + fx_mul(coef[g*NG + i], x);
        for (int j = 0; j < H; j++)
          acc += fx_mul(coef[g*NG + H + i*H + j], h_in[j]);
        pre[g][i] = fx_sat(acc);
      end
  end

  for (genvar g = 0; g < 4; g++) begin : g_gate
    for (genvar i = 0; i < H; i++) begin : g_unit
      act_lut #(.FUNC(g == 2 ? ACT_TANH : ACT_SIGMOID)) u_act (.x(pre[g][i]), .y(gact[g][i]));
    end
  end

  always_comb begin
    for (int i = 0; i < H; i++)
      c_nxt[i] = fx_sat(fx_mul(gate_q[1][i], c_q[i]) + fx_mul(gate_q[0][i], gate_q[2][i]));
  end

  for (genvar i = 0; i < H; i++) begin : g_out
    act_lut #(.FUNC(ACT_TANH)) u_tanh (.x(c_nxt[i]), .y(c_tanh[i]));
    assign h_nxt[i] = fx_sat(fx_mul(gate_q[3][i], c_tanh[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
      for (int i = 0; i < H; i++) begin
        for (int g = 0; g < 4; g++) gate_q[g][i] <= '0;
        c_q[i]   <= '0;
        h_out[i] <= '0;
        c_out[i] <= '0;
      end
    end else begin
      v1        <= in_valid;
      gate_q    <= gact;
      c_q       <= c_in;
      out_valid <= v1;
      h_out     <= h_nxt;
      c_out     <= c_nxt;
    end
  end

endmodule
