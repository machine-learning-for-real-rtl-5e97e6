// channel_demux: gathers the multiplexed engine results into one frame.
//
// The engine returns one (channel, energy, tag) result per clock, channels
// in the order they were issued. Results are written into a staging
// register per channel; the result of the last channel, NCH-1, completes
// the frame: et[]/tag[] are updated together, frame_valid pulses for one
// clock and frame_cnt counts frames. If the frame did not contain every
// channel exactly once, frame_err pulses with it (a sign that frames
// overlapped upstream). Timing: frame_valid follows the last channel's
// result by one clock. This is the reverse of channel_mux; its form is
// this design's choice.
module channel_demux
  import lar_pkg::*;
#(
  parameter int  NCH = 6,
  localparam int CHW = (NCH > 1) ? $clog2(NCH) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [CHW-1:0] in_ch,
  input  fx_t            in_et,
  input  fx_t            in_tag,
  output logic           frame_valid,
  output logic           frame_err,
  output logic [15:0]    frame_cnt,
  output fx_t            et  [NCH],
  output fx_t            tag [NCH]
);
  fx_t            st_et  [NCH];
  fx_t            st_tag [NCH];
  logic [NCH-1:0] seen;
  logic           dup;

  assign dup = in_valid && seen[in_ch];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame_valid <= 1'b0;
      frame_err   <= 1'b0;
      frame_cnt   <= '0;
      seen        <= '0;
      for (int n = 0; n < NCH; n++) begin
        st_et[n] <= '0; st_tag[n] <= '0; et[n] <= '0; tag[n] <= '0;
      end
    end else begin
      frame_valid <= 1'b0;
      frame_err   <= 1'b0;
      if (in_valid) begin
        for (int n = 0; n < NCH; n++)
          if (in_ch == CHW'(n)) begin
            st_et[n]  <= in_et;
            st_tag[n] <= in_tag;
          end
        if (in_ch == CHW'(NCH - 1)) begin
          for (int n = 0; n < NCH - 1; n++) begin
            et[n]  <= st_et[n];
            tag[n] <= st_tag[n];
          end
          et[NCH-1]   <= in_et;
          tag[NCH-1]  <= in_tag;
          frame_valid <= 1'b1;
          frame_cnt   <= frame_cnt + 1'b1;
          frame_err   <= dup || (seen != NCH'((64'd1 << (NCH - 1)) - 64'd1));
          seen        <= '0;
        end else begin
          seen[in_ch] <= 1'b1;
        end
      end
    end
  end

endmodule
