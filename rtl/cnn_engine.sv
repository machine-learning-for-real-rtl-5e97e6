// cnn_engine: complete 3-Conv or 4-Conv CNN for one window per clock.
//
// Takes the last 13 samples of a channel (x[0] oldest, x[12] the newest,
// the bunch crossing being processed) and returns the reconstructed energy
// for that window together with the tag probability of the newest sample.
// cnn_tagging produces six consecutive tags; the six newest samples, delayed
// to meet them, are concatenated with the tags (tag j with the sample that is
// newest in its 8-sample tagging window) and fed to cnn_energy. A channel
// number travels alongside so that one engine can serve several
// time-multiplexed channels.
//
// NN = NN_3CONV or NN_4CONV; coef holds the tagging coefficients followed by
// the energy coefficients. Timing: LATENCY = 3 (3-Conv) or 4 (4-Conv)
// clocks, initiation interval 1, matching the source's II of 1 for both CNNs
// (its latency figures belong to a deeper-pipelined implementation).
module cnn_engine
  import lar_pkg::*;
#(
  parameter nn_e NN      = NN_4CONV,
  parameter int  CHW     = 4,
  localparam int N_ECONV = (NN == NN_3CONV) ? 1 : 2,
  localparam int TAG_LEN = C3_K + C4_K - 1,
  localparam int WIN     = CNN_RF,
  localparam int NCT     = C1_MAPS * C1_K + C1_MAPS + C1_MAPS * C2_K + 1,
  localparam int NCOEF   = nn_ncoef(NN),
  localparam int NCE     = NCOEF - NCT,
  localparam int LATENCY = 2 + N_ECONV
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [CHW-1:0] in_ch,
  input  fx_t            x [WIN],
  input  fx_t            coef [NCOEF],
  output logic           out_valid,
  output logic [CHW-1:0] out_ch,
  output fx_t            energy,
  output fx_t            tag
);
  fx_t  ct [NCT];
  fx_t  ce [NCE];
  fx_t  tags [TAG_LEN];
  fx_t  samp_d [2][TAG_LEN];       // samples delayed over the tagging stages
  fx_t  tag_d  [N_ECONV];          // newest tag delayed over the energy stages
  logic [CHW-1:0] ch_d [LATENCY];
  logic tv;

  always_comb begin
    for (int i = 0; i < NCT; i++) ct[i] = coef[i];
    for (int i = 0; i < NCE; i++) ce[i] = coef[NCT + i];
  end

  cnn_tagging #(.TAG_LEN(TAG_LEN)) u_tag (
    .clk, .rst_n, .in_valid, .x, .coef(ct), .out_valid(tv), .tag(tags));

  cnn_energy #(.N_ECONV(N_ECONV)) u_energy (
    .clk, .rst_n, .in_valid(tv), .samp(samp_d[1]), .tag(tags), .coef(ce),
    .out_valid, .energy);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < 2; s++)
        for (int i = 0; i < TAG_LEN; i++) samp_d[s][i] <= '0;
      for (int s = 0; s < N_ECONV; s++) tag_d[s] <= '0;
      for (int s = 0; s < LATENCY; s++) ch_d[s] <= '0;
    end else begin
      for (int i = 0; i < TAG_LEN; i++) samp_d[0][i] <= x[WIN - TAG_LEN + i];
      samp_d[1] <= samp_d[0];
      tag_d[0] <= tags[TAG_LEN-1];
      for (int s = 1; s < N_ECONV; s++) tag_d[s] <= tag_d[s-1];
      ch_d[0] <= in_ch;
      for (int s = 1; s < LATENCY; s++) ch_d[s] <= ch_d[s-1];
    end
  end

  assign out_ch = ch_d[LATENCY-1];
  assign tag    = tag_d[N_ECONV-1];

endmodule
