// lstm_single_engine: single-cell LSTM with continuous state per channel.
//
// Instead of re-running a window, one lstm_cell step is taken for every new
// sample of a channel, and the cell's state (h, c) is kept from one bunch
// crossing to the next, so the network sees the whole sample history. The
// energy of each step comes from a dense layer on the new h. Several
// time-multiplexed channels share the cell: the state of each is held in a
// per-channel register file (NCH entries, cleared at reset), read when the
// channel's sample enters and written back two clocks later.
//
// Coefficients, flat in coef: the lstm_cell block, then wd[H], bd.
// Timing: LATENCY = 3 clocks (cell 2, dense 1); initiation interval 1 across
// channels. A channel must not return within 2 clocks of its previous
// sample (its state would not be written back yet); the multiplexer
// guarantees this whenever NCH >= 2 and an assertion checks it. The source's
// single-cell LSTM instead runs with an initiation interval of 220 cycles
// and no multiplexing; the pipelined, shared form is this design's choice.
module lstm_single_engine
  import lar_pkg::*;
#(
  parameter int  NCH     = 4,
  parameter int  CHW     = 4,
  parameter int  H       = LSTM_H,
  localparam int NCELL   = 4 * (H + H*H + H),
  localparam int NCOEF   = NCELL + H + 1,
  localparam int LATENCY = 3
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [CHW-1:0] in_ch,
  input  fx_t            x,
  input  fx_t            coef [NCOEF],
  output logic           out_valid,
  output logic [CHW-1:0] out_ch,
  output fx_t            energy
);
  fx_t  cc [NCELL];
  fx_t  wd [H];
  fx_t  bd;
  fx_t  h_mem [NCH][H];
  fx_t  c_mem [NCH][H];
  fx_t  h_rd [H];
  fx_t  c_rd [H];
  fx_t  h_new [H];
  fx_t  c_new [H];
  logic cell_v;
  logic [CHW-1:0] ch_d [LATENCY];

  always_comb begin
    for (int i = 0; i < NCELL; i++) cc[i] = coef[i];
    for (int i = 0; i < H; i++)     wd[i] = coef[NCELL + i];
    bd = coef[NCOEF-1];
    for (int i = 0; i < H; i++) begin
      h_rd[i] = '0;
      c_rd[i] = '0;
    end
    for (int n = 0; n < NCH; n++)
      if (in_ch == CHW'(n)) begin
        h_rd = h_mem[n];
        c_rd = c_mem[n];
      end
  end

  lstm_cell #(.H(H)) u_cell (
    .clk, .rst_n, .in_valid, .x, .h_in(h_rd), .c_in(c_rd), .coef(cc),
    .out_valid(cell_v), .h_out(h_new), .c_out(c_new));

  dense_out #(.H(H)) u_dense (
    .clk, .rst_n, .in_valid(cell_v), .h(h_new), .wd, .bd, .out_valid, .y(energy));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < NCH; n++)
        for (int i = 0; i < H; i++) begin
          h_mem[n][i] <= '0;
          c_mem[n][i] <= '0;
        end
      for (int s = 0; s < LATENCY; s++) ch_d[s] <= '0;
    end else begin
      ch_d[0] <= in_ch;
      for (int s = 1; s < LATENCY; s++) ch_d[s] <= ch_d[s-1];
      if (cell_v)
        for (int n = 0; n < NCH; n++)
          if (ch_d[1] == CHW'(n)) begin
            h_mem[n] <= h_new;
            c_mem[n] <= c_new;
          end
    end
  end

  assign out_ch = ch_d[LATENCY-1];

  // A channel's state must be written back before that channel is read again.
  logic [CHW-1:0] ch_v0;
  logic           v_0, v_1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_0 <= 1'b0; v_1 <= 1'b0; ch_v0 <= '0;
    end else begin
      v_0 <= in_valid; v_1 <= v_0; ch_v0 <= in_ch;
      a_no_state_hazard: assert (!(in_valid && ((v_0 && ch_v0 == in_ch) || (v_1 && ch_d[1] == in_ch))))
        else $error("lstm_single_engine: channel re-entered before its state was written back");
    end
  end

endmodule
