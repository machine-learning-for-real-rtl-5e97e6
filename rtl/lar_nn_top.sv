// lar_nn_top: neural-network energy reconstruction for a group of LAr
// calorimeter channels.
//
// Each channel delivers one digitised, pedestal-subtracted sample per
// bunch crossing (40 MHz). The design turns these samples into one
// transverse-energy value per channel and crossing with a neural network,
// time-multiplexing NCH channels on one network engine that runs at NCH or
// more clocks per crossing:
//
//   adc[] --> channel_mux --> engine (selected by NN) --> channel_demux --> et[]
//                 |                ^
//   cfg_* --------+---> coef_bank -+  (trained coefficients)
//
// NN selects one of the five networks that were put on the FPGA: NN_3CONV
// and NN_4CONV (cnn_engine, two CNN sub-networks: pulse tagging and energy
// reconstruction), NN_VANILLA (vanilla_rnn_engine), NN_LSTM_SLIDING
// (lstm_sliding_engine) and NN_LSTM_SINGLE (lstm_single_engine). Only the
// selected engine is built. The default, 4-Conv with six channels, is the
// network whose structure the source draws in full and the multiplicity it
// reaches with the CNNs; the vanilla RNN reaches fifteen. tag[] carries the
// CNN's pulse-tag probability of each channel's current sample (Q.10, 1.0 =
// 1024); the recurrent networks have no tagging output and leave it at 0.
//
// Interface: load the nn_ncoef(NN) coefficients through cfg_we / cfg_addr /
// cfg_wdata (layouts in each engine), then present a frame of NCH samples
// with bc_valid at most once every NCH clocks (every 3 clocks at least
// for NN_LSTM_SINGLE, whose channel state needs 3 clocks to come back).
// frame_valid pulses when all
// results of a frame are in et[]/tag[]. overflow is sticky and set when
// frames come faster than the engine can take them; frame_err pulses with
// a frame that was incomplete.
// Timing: the results of a frame appear NCH + engine latency + 2 clocks
// after its bc_valid. Loading coefficients at run time, the frame
// interface and these latencies are this design's choices.
module lar_nn_top
  import lar_pkg::*;
#(
  parameter nn_e NN    = NN_4CONV,
  parameter int  NCH   = (NN == NN_VANILLA) ? 15 : (NN == NN_LSTM_SINGLE) ? 1 : 6,
  localparam int CHW   = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int NCOEF = nn_ncoef(NN),
  localparam int WIN   = nn_win(NN),
  localparam int AW    = 10,
  // the single-cell LSTM needs 3 clocks before a channel's state is back
  localparam int MIN_PERIOD = (NN == NN_LSTM_SINGLE && NCH < 3) ? 3 : NCH
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cfg_we,
  input  logic [AW-1:0] cfg_addr,
  input  fx_t           cfg_wdata,
  input  logic          bc_valid,
  input  fx_t           adc [NCH],
  output logic          frame_valid,
  output logic          frame_err,
  output logic [15:0]   frame_cnt,
  output fx_t           et  [NCH],
  output fx_t           tag [NCH],
  output logic          overflow,
  output logic [15:0]   overflow_cnt
);
  fx_t            coef [NCOEF];
  logic           mv;
  logic [CHW-1:0] mch;
  fx_t            mwin [WIN];
  logic           ev;
  logic [CHW-1:0] ech;
  fx_t            eet, etag;

  coef_bank #(.NCOEF(NCOEF), .AW(AW)) u_coef (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .coef);

  channel_mux #(.NCH(NCH), .WIN(WIN), .MIN_PERIOD(MIN_PERIOD)) u_mux (
    .clk, .rst_n, .bc_valid, .adc, .out_valid(mv), .out_ch(mch),
    .out_win(mwin), .overflow, .overflow_cnt);

  if (NN == NN_3CONV || NN == NN_4CONV) begin : g_cnn
    cnn_engine #(.NN(NN), .CHW(CHW)) u_engine (
      .clk, .rst_n, .in_valid(mv), .in_ch(mch), .x(mwin), .coef,
      .out_valid(ev), .out_ch(ech), .energy(eet), .tag(etag));
  end else if (NN == NN_VANILLA) begin : g_vanilla
    vanilla_rnn_engine #(.CHW(CHW)) u_engine (
      .clk, .rst_n, .in_valid(mv), .in_ch(mch), .x(mwin), .coef,
      .out_valid(ev), .out_ch(ech), .energy(eet));
    assign etag = '0;
  end else if (NN == NN_LSTM_SLIDING) begin : g_lstm_sliding
    lstm_sliding_engine #(.CHW(CHW)) u_engine (
      .clk, .rst_n, .in_valid(mv), .in_ch(mch), .x(mwin), .coef,
      .out_valid(ev), .out_ch(ech), .energy(eet));
    assign etag = '0;
  end else begin : g_lstm_single
    lstm_single_engine #(.NCH(NCH), .CHW(CHW)) u_engine (
      .clk, .rst_n, .in_valid(mv), .in_ch(mch), .x(mwin[WIN-1]), .coef,
      .out_valid(ev), .out_ch(ech), .energy(eet));
    assign etag = '0;
  end

  channel_demux #(.NCH(NCH)) u_demux (
    .clk, .rst_n, .in_valid(ev), .in_ch(ech), .in_et(eet), .in_tag(etag),
    .frame_valid, .frame_err, .frame_cnt, .et, .tag);

endmodule
