// channel_mux: time-multiplexes NCH calorimeter channels onto one engine.
//
// The networks run at several hundred MHz while each channel delivers one
// sample per bunch crossing (40 MHz), so one engine with an initiation
// interval of 1 can serve several channels in turn: six for the CNNs and
// fifteen for the vanilla RNN in the source. Here, on bc_valid the NCH new
// samples adc[] are latched as a frame, and over the next NCH clocks channel
// 0, 1, .. NCH-1 is issued, one per clock. Each channel keeps a history of
// its last WIN samples in a register file; the issued window out_win holds
// that history shifted by the new sample (out_win[0] oldest, out_win[WIN-1]
// the sample of this bunch crossing).
//
// A new frame is accepted while idle or in the clock that issues the last
// channel, and no sooner than MIN_PERIOD clocks after the previous one
// (default NCH, so the bunch-crossing period may be as short as NCH clocks;
// an engine that needs more time per channel sets it higher). A frame
// arriving earlier is dropped and counted in overflow_cnt, and the
// sticky overflow flag is raised: the clock was too slow for the chosen
// multiplicity. Histories start at zero after reset.
// Timing: channel n of a frame appears on the outputs n+2 clocks after the
// bc_valid that brought it. Frame latching and the overflow policy are this
// design's choices.
module channel_mux
  import lar_pkg::*;
#(
  parameter int  NCH = 6,
  parameter int  WIN = CNN_RF,
  parameter int  MIN_PERIOD = NCH,
  localparam int CHW = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int SW  = $clog2(MIN_PERIOD + 1) + 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           bc_valid,
  input  fx_t            adc [NCH],
  output logic           out_valid,
  output logic [CHW-1:0] out_ch,
  output fx_t            out_win [WIN],
  output logic           overflow,
  output logic [15:0]    overflow_cnt
);
  fx_t            frame [NCH];
  fx_t            hist  [NCH][WIN];
  logic           active;
  logic [CHW-1:0] cnt;
  logic           last, accept;
  logic [SW-1:0]  since;           // clocks since the last accepted frame
  fx_t            nxt_win [WIN];

  assign last   = active && (cnt == CHW'(NCH - 1));
  assign accept = bc_valid && (!active || last) && (since >= SW'(MIN_PERIOD));

  always_comb begin
    nxt_win = hist[0];
    for (int n = 0; n < NCH; n++)
      if (cnt == CHW'(n)) nxt_win = hist[n];
    for (int i = 0; i < WIN - 1; i++) nxt_win[i] = nxt_win[i+1];
    nxt_win[WIN-1] = frame[0];
    for (int n = 0; n < NCH; n++)
      if (cnt == CHW'(n)) nxt_win[WIN-1] = frame[n];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active       <= 1'b0;
      cnt          <= '0;
      out_valid    <= 1'b0;
      out_ch       <= '0;
      overflow     <= 1'b0;
      overflow_cnt <= '0;
      since        <= SW'(MIN_PERIOD);
      for (int n = 0; n < NCH; n++) begin
        frame[n] <= '0;
        for (int i = 0; i < WIN; i++) hist[n][i] <= '0;
      end
      for (int i = 0; i < WIN; i++) out_win[i] <= '0;
    end else begin
      out_valid <= active;
      if (active) begin
        out_ch  <= cnt;
        out_win <= nxt_win;
        for (int n = 0; n < NCH; n++)
          if (cnt == CHW'(n)) hist[n] <= nxt_win;
      end
      if (accept)                         since <= SW'(1);
      else if (since < SW'(MIN_PERIOD))  since <= since + 1'b1;
      if (accept) begin
        frame  <= adc;
        active <= 1'b1;
        cnt    <= '0;
      end else if (last) begin
        active <= 1'b0;
      end else if (active) begin
        cnt <= cnt + 1'b1;
      end
      if (bc_valid && !accept) begin
        overflow     <= 1'b1;
        overflow_cnt <= overflow_cnt + 1'b1;
      end
    end
  end

endmodule
