// channel_demux_tb: streams of per-channel results, in order with random
// gaps, for a 5-channel demultiplexer. Each completed frame must carry the
// energies and tags of its channels, pulse frame_valid one clock after the
// last channel and count frames; frames with a channel missing or repeated
// must raise frame_err.
module channel_demux_tb;
  import lar_pkg::*;
  import nn_ref_pkg::*;

  localparam int NCH = 5;

  logic       clk = 0, rst_n = 0, in_valid = 0, frame_valid, frame_err;
  logic [2:0] in_ch = '0;
  fx_t        in_et, in_tag;
  logic [15:0] frame_cnt;
  fx_t        et [NCH];
  fx_t        tag [NCH];
  int         checks = 0, failures = 0, cyc = 0, nframes = 0, nerr = 0, seen_err = 0;
  iq_t        eq [$];
  int         et_q [$];
  bit         err_q [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  channel_demux #(.NCH(NCH)) u_dut (.clk, .rst_n, .in_valid, .in_ch, .in_et, .in_tag,
    .frame_valid, .frame_err, .frame_cnt, .et, .tag);

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && frame_valid) begin
    iq_t e;
    bit  er;
    checks += 3;
    if (eq.size() == 0) failures++;
    else begin
      e  = eq.pop_front();
      er = err_q.pop_front();
      if (cyc != et_q.pop_front()) failures++;
      if (frame_err != er) begin failures++; $display("frame_err %0b expected %0b", frame_err, er); end
      if (frame_err) seen_err++;
      if (!er)
        for (int c = 0; c < NCH; c++) begin
          checks += 2;
          if (int'(et[c]) != e[c])        begin failures++; $display("et[%0d] %0d expected %0d", c, et[c], e[c]); end
          if (int'(tag[c]) != e[NCH + c]) failures++;
        end
    end
  end

  initial begin
    in_et = '0; in_tag = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 150; f++) begin
      iq_t e;
      int  ev [NCH], tv [NCH];
      int  skip;
      e.delete();
      skip = (f % 13 == 7) ? int'($urandom_range(NCH - 2)) : -1;
      for (int c = 0; c < NCH; c++) begin ev[c] = r_rand(20000); tv[c] = int'($urandom_range(1024)); end
      for (int c = 0; c < NCH; c++) begin
        if (c == skip) continue;
        @(negedge clk);
        in_valid = 1'b1;
        in_ch    = 3'(c);
        in_et    = fx_t'(ev[c]);
        in_tag   = fx_t'(tv[c]);
        if ($urandom_range(3) == 0) begin
          @(negedge clk);
          in_valid = 1'b0;
        end
      end
      for (int c = 0; c < NCH; c++) e.push_back(ev[c]);
      for (int c = 0; c < NCH; c++) e.push_back(tv[c]);
      eq.push_back(e);
      err_q.push_back(skip >= 0);
      if (skip >= 0) nerr++;
      et_q.push_back(cyc + 1 + (in_valid ? 0 : -1));
      nframes++;
      @(negedge clk);
      in_valid = 1'b0;
    end
    repeat (4) @(negedge clk);
    checks += 3;
    if (eq.size() != 0) failures++;
    if (int'(frame_cnt) != nframes) begin failures++; $display("frame_cnt %0d expected %0d", frame_cnt, nframes); end
    if (seen_err != nerr || nerr == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
