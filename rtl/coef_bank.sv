// coef_bank: run-time loadable store for the network coefficients.
//
// The trained weights and biases are not part of the hardware description:
// they are written once through a simple write port (cfg_we, cfg_addr,
// cfg_wdata) and then held in registers that drive every multiplier of the
// engine in parallel. Addresses at or beyond NCOEF are ignored. All
// coefficients are zero after reset. Timing: a write is visible on coef the
// clock after cfg_we. The port and its layout are this design's choice.
module coef_bank
  import lar_pkg::*;
#(
  parameter int NCOEF = 88,
  parameter int AW    = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cfg_we,
  input  logic [AW-1:0] cfg_addr,
  input  fx_t           cfg_wdata,
  output fx_t           coef [NCOEF]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NCOEF; i++) coef[i] <= '0;
    end else if (cfg_we) begin
      for (int i = 0; i < NCOEF; i++)
        if (cfg_addr == AW'(i)) coef[i] <= cfg_wdata;
    end
  end
endmodule
