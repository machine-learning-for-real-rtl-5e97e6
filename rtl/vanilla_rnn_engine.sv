// vanilla_rnn_engine: sliding-window vanilla RNN, one window per clock.
//
// Each window of WIN = 5 consecutive samples of a channel (x[0] oldest) is
// run through WIN unrolled rnn_cell steps starting from a zero state, and a
// dense layer turns the final state into one energy. Following the source's
// sliding-window picture, a window of samples BC n-4 .. n yields the energy
// of BC n-3, the second sample of the window: one sample of history before
// the deposit and three after it. The unrolled cells share one set of
// coefficients; stage t receives sample x[t], delayed t clocks to meet the
// state computed so far. A channel number travels alongside.
//
// Coefficients, flat in coef: wx[H], wh[H*H], b[H], wd[H], bd.
// Timing: LATENCY = WIN + 1 clocks, initiation interval 1, as the source's
// sliding vanilla RNN (II 1); its 206-cycle latency belongs to a high-level
// synthesis implementation at a higher clock.
module vanilla_rnn_engine
  import lar_pkg::*;
#(
  parameter int  CHW     = 4,
  parameter int  WIN     = RNN_WIN,
  parameter int  H       = RNN_H,
  localparam int NCOEF   = H + H*H + H + H + 1,
  localparam int LATENCY = WIN + 1
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
  fx_t  wx [H];
  fx_t  wh [H*H];
  fx_t  b  [H];
  fx_t  wd [H];
  fx_t  bd;
  fx_t  h  [WIN+1][H];
  logic v  [WIN+1];
  fx_t  xd [WIN][WIN];             // xd[t] = input window delayed t clocks
  logic [CHW-1:0] ch_d [LATENCY];

  always_comb begin
    for (int i = 0; i < H; i++)   wx[i] = coef[i];
    for (int i = 0; i < H*H; i++) wh[i] = coef[H + i];
    for (int i = 0; i < H; i++)   b[i]  = coef[H + H*H + i];
    for (int i = 0; i < H; i++)   wd[i] = coef[2*H + H*H + i];
    bd = coef[NCOEF-1];
    for (int i = 0; i < H; i++)   h[0][i] = '0;
    xd[0] = x;
  end
  assign v[0] = in_valid;

  for (genvar t = 0; t < WIN; t++) begin : g_step
    rnn_cell #(.H(H)) u_cell (
      .clk, .rst_n, .in_valid(v[t]), .x(xd[t][t]), .h_in(h[t]),
      .wx, .wh, .b, .out_valid(v[t+1]), .h_out(h[t+1]));
  end

  dense_out #(.H(H)) u_dense (
    .clk, .rst_n, .in_valid(v[WIN]), .h(h[WIN]), .wd, .bd, .out_valid, .y(energy));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 1; t < WIN; t++)
        for (int i = 0; i < WIN; i++) xd[t][i] <= '0;
      for (int s = 0; s < LATENCY; s++) ch_d[s] <= '0;
    end else begin
      for (int t = 1; t < WIN; t++) xd[t] <= xd[t-1];
      ch_d[0] <= in_ch;
      for (int s = 1; s < LATENCY; s++) ch_d[s] <= ch_d[s-1];
    end
  end

  assign out_ch = ch_d[LATENCY-1];

endmodule
