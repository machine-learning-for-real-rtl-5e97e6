// lstm_sliding_engine: sliding-window LSTM, one window per clock.
//
// Same scheme as the sliding vanilla RNN: a window of WIN = 5 samples
// (x[0] oldest) runs through WIN unrolled lstm_cell steps from a zero state
// (h = c = 0), and a dense layer maps the last output to the energy of the
// window's second bunch crossing. Stage t receives x[t] delayed 2t clocks.
//
// Coefficients, flat in coef: the lstm_cell block (4 gates), then wd[H], bd.
// Timing: LATENCY = 2*WIN + 1 clocks, initiation interval 1 as in the
// source's sliding LSTM (II 1; its 363-cycle latency is that of a
// high-level-synthesis build at a higher clock).
module lstm_sliding_engine
  import lar_pkg::*;
#(
  parameter int  CHW     = 4,
  parameter int  WIN     = RNN_WIN,
  parameter int  H       = LSTM_H,
  localparam int NCELL   = 4 * (H + H*H + H),
  localparam int NCOEF   = NCELL + H + 1,
  localparam int LATENCY = 2*WIN + 1,
  localparam int XD      = 2*WIN - 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [CHW-1:0] in_ch,
  input  fx_t            x [WIN],
  input  fx_t            coef [NCOEF],
  output logic           out_valid,
  output logic [CHW-1:0] out_ch,
  output fx_t            energy
);
  fx_t  cc [NCELL];
  fx_t  wd [H];
  fx_t  bd;
  fx_t  h  [WIN+1][H];
  fx_t  c  [WIN+1][H];
  logic v  [WIN+1];
  fx_t  xd [XD][WIN];              // xd[d] = input window delayed d clocks
  logic [CHW-1:0] ch_d [LATENCY];

  always_comb begin
    for (int i = 0; i < NCELL; i++) cc[i] = coef[i];
    for (int i = 0; i < H; i++)     wd[i] = coef[NCELL + i];
    bd = coef[NCOEF-1];
    for (int i = 0; i < H; i++) begin
      h[0][i] = '0;
      c[0][i] = '0;
    end
    xd[0] = x;
  end
  assign v[0] = in_valid;

  for (genvar t = 0; t < WIN; t++) begin : g_step
    lstm_cell #(.H(H)) u_cell (
      .clk, .rst_n, .in_valid(v[t]), .x(xd[2*t][t]), .h_in(h[t]), .c_in(c[t]),
      .coef(cc), .out_valid(v[t+1]), .h_out(h[t+1]), .c_out(c[t+1]));
  end

  dense_out #(.H(H)) u_dense (
    .clk, .rst_n, .in_valid(v[WIN]), .h(h[WIN]), .wd, .bd, .out_valid, .y(energy));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 1; d < XD; d++)
        for (int i = 0; i < WIN; i++) xd[d][i] <= '0;
      for (int s = 0; s < LATENCY; s++) ch_d[s] <= '0;
    end else begin
      for (int d = 1; d < XD; d++) xd[d] <= xd[d-1];
      ch_d[0] <= in_ch;
      for (int s = 1; s < LATENCY; s++) ch_d[s] <= ch_d[s-1];
    end
  end

  assign out_ch = ch_d[LATENCY-1];

endmodule
