// lar_fpga_top: energy reconstruction for all calorimeter cells of one
// processing FPGA.
//
// One FPGA of the readout receives the cells of three or four front-end
// boards, 384 or 512 cells, and must return one energy per cell and bunch
// crossing. This module covers NCELLS cells (default 384) with
// NENG = ceil(NCELLS / NCH) copies of lar_nn_top, each serving NCH
// consecutive cells on one time-multiplexed network engine (64 copies of
// the six-channel 4-Conv engine by default). If NCELLS is not a multiple of
// NCH the last copy gets zero samples on its spare channels, whose results
// are discarded.
//
// All copies run in lockstep from the same bc_valid. Each copy has its own
// coefficient bank, so cells with different pulse shapes can get their own
// trained network: a write goes to copy cfg_eng, or to every copy when
// cfg_bcast is set. frame_valid pulses when every copy has delivered its
// frame; et[]/tag[] then hold one result per cell. frame_err and overflow
// are the OR of the copies' flags, overflow_cnt and frame_cnt are those of
// copy 0, and sync_err flags any copy that has fallen out of step with copy
// 0 (never expected, since they share all control inputs).
// Timing: as lar_nn_top. The cell count follows the source; the partition
// into copies, per-copy coefficients and the broadcast write are this
// design's choices.
module lar_fpga_top
  import lar_pkg::*;
#(
  parameter nn_e NN     = NN_4CONV,
  parameter int  NCELLS = 384,
  parameter int  NCH    = (NN == NN_VANILLA) ? 15 : (NN == NN_LSTM_SINGLE) ? 1 : 6,
  localparam int NENG   = (NCELLS + NCH - 1) / NCH,
  localparam int EW     = (NENG > 1) ? $clog2(NENG) : 1,
  localparam int AW     = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cfg_we,
  input  logic          cfg_bcast,
  input  logic [EW-1:0] cfg_eng,
  input  logic [AW-1:0] cfg_addr,
  input  fx_t           cfg_wdata,
  input  logic          bc_valid,
  input  fx_t           adc [NCELLS],
  output logic          frame_valid,
  output logic          frame_err,
  output logic [15:0]   frame_cnt,
  output fx_t           et  [NCELLS],
  output fx_t           tag [NCELLS],
  output logic          overflow,
  output logic [15:0]   overflow_cnt,
  output logic          sync_err
);
  logic        fv  [NENG];
  logic        fe  [NENG];
  logic        ov  [NENG];
  logic [15:0] fc  [NENG];
  logic [15:0] oc  [NENG];

  for (genvar e = 0; e < NENG; e++) begin : g_eng
    fx_t grp_adc [NCH];
    fx_t grp_et  [NCH];
    fx_t grp_tag [NCH];

    for (genvar i = 0; i < NCH; i++) begin : g_ch
      if (e * NCH + i < NCELLS) begin : g_used
        assign grp_adc[i]       = adc[e*NCH + i];
        assign et[e*NCH + i]    = grp_et[i];
        assign tag[e*NCH + i]   = grp_tag[i];
      end else begin : g_spare
        assign grp_adc[i] = '0;
      end
    end

    lar_nn_top #(.NN(NN), .NCH(NCH)) u_grp (
      .clk, .rst_n,
      .cfg_we(cfg_we && (cfg_bcast || cfg_eng == EW'(e))), .cfg_addr, .cfg_wdata,
      .bc_valid, .adc(grp_adc),
      .frame_valid(fv[e]), .frame_err(fe[e]), .frame_cnt(fc[e]),
      .et(grp_et), .tag(grp_tag), .overflow(ov[e]), .overflow_cnt(oc[e]));
  end

  always_comb begin
    frame_valid = 1'b1;
    frame_err   = 1'b0;
    overflow    = 1'b0;
    sync_err    = 1'b0;
    for (int e = 0; e < NENG; e++) begin
      frame_valid &= fv[e];
      frame_err   |= fe[e];
      overflow    |= ov[e];
      sync_err    |= (fv[e] != fv[0]) || (fc[e] != fc[0]) || (oc[e] != oc[0]);
    end
    frame_cnt    = fc[0];
    overflow_cnt = oc[0];
  end

endmodule
