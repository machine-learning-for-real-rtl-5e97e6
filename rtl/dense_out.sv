// dense_out: final dense (fully connected) layer of the recurrent networks.
//
// Maps the last hidden state h[H] to one transverse-energy value,
// y = wd . h + bd, linear and saturated to fx_t. In the source a dense layer
// sits on top of the last RNN step (sliding window) or of every step (single
// cell); its activation is not stated, a linear output is this design's
// choice. Timing: one register stage, initiation interval 1.
module dense_out
  import lar_pkg::*;
#(
  parameter int H = RNN_H
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  h  [H],
  input  fx_t  wd [H],
  input  fx_t  bd,
  output logic out_valid,
  output fx_t  y
);
  fx_t nxt;

  always_comb begin
    acc_t acc;
    acc = fx_bias(bd);
    for (int i = 0; i < H; i++) acc += fx_mul(wd[i], h[i]);
    nxt = fx_sat(acc);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      y         <= nxt;
    end
  end

endmodule
