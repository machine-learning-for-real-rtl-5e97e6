// channel_mux_tb: frames of random samples at random bunch-crossing
// periods (down to the minimum of NCH clocks) for a 6-channel, 13-deep
// multiplexer. Every issued window is compared with a per-channel history
// kept here, channels must come out in order 0..NCH-1 with channel n
// n+2 clocks after bc_valid, and frames sent too early must be dropped
// and counted as overflow.
module channel_mux_tb;
  import lar_pkg::*;
  import nn_ref_pkg::*;

  localparam int NCH = 6, WIN = 13;

  logic       clk = 0, rst_n = 0, bc_valid = 0, out_valid, overflow;
  fx_t        adc [NCH];
  logic [2:0] out_ch;
  fx_t        out_win [WIN];
  logic [15:0] overflow_cnt;
  int         checks = 0, failures = 0, cyc = 0, n_ovf = 0, n_fast = 0;
  int         hist [NCH][WIN];
  iq_t        eq [$];           // expected {ch, window...}
  int         et [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  channel_mux #(.NCH(NCH), .WIN(WIN)) u_dut (
    .clk, .rst_n, .bc_valid, .adc, .out_valid, .out_ch, .out_win, .overflow, .overflow_cnt);

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    iq_t e;
    checks += 2;
    if (eq.size() == 0) failures++;
    else begin
      e = eq.pop_front();
      if (cyc != et.pop_front()) begin failures++; $display("channel %0d at wrong clock", out_ch); end
      if (int'(out_ch) != e[0]) begin failures++; $display("cyc %0d channel %0d expected %0d", cyc, out_ch, e[0]); end
      for (int i = 0; i < WIN; i++) begin
        checks++;
        if (int'(out_win[i]) != e[1+i]) begin failures++; $display("ch %0d win[%0d] %0d expected %0d", out_ch, i, out_win[i], e[1+i]); end
      end
    end
  end

  initial begin
    for (int c = 0; c < NCH; c++) begin
      adc[c] = '0;
      for (int i = 0; i < WIN; i++) hist[c][i] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 200; f++) begin
      int gap;
      @(negedge clk);
      bc_valid = 1'b1;
      for (int c = 0; c < NCH; c++) begin
        iq_t e;
        e.delete();
        adc[c] = fx_t'(r_rand(30000));
        for (int i = 0; i < WIN - 1; i++) hist[c][i] = hist[c][i+1];
        hist[c][WIN-1] = int'(adc[c]);
        e.push_back(c);
        for (int i = 0; i < WIN; i++) e.push_back(hist[c][i]);
        eq.push_back(e);
        et.push_back(cyc + 2 + c);
      end
      gap = (f % 3 == 0) ? NCH : NCH + int'($urandom_range(4));
      if (gap == NCH) n_fast++;
      if (f % 17 == 5) begin
        // a frame sent too early: must be dropped
        @(negedge clk);
        for (int c = 0; c < NCH; c++) adc[c] = fx_t'(r_rand(30000));
        n_ovf++;
        gap--;
      end
      @(negedge clk);
      bc_valid = 1'b0;
      repeat (gap - 2) @(negedge clk);
    end
    repeat (NCH + 4) @(negedge clk);
    checks += 3;
    if (eq.size() != 0) begin failures++; $display("%0d windows missing", eq.size()); end
    if (int'(overflow_cnt) != n_ovf || !overflow) begin failures++; $display("overflow count %0d expected %0d", overflow_cnt, n_ovf); end
    if (n_fast == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
