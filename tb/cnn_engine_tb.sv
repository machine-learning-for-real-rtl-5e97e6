// cnn_engine_tb: random 13-sample windows with channel numbers, one per
// clock with gaps, through a 4-Conv and a 3-Conv engine; energy, tag and
// channel number are compared with the reference model, and the latency
// must be 4 and 3 clocks.
module cnn_engine_tb;
  import lar_pkg::*;
  import nn_ref_pkg::*;

  logic       clk = 0, rst_n = 0, in_valid = 0;
  logic [3:0] in_ch = '0;
  fx_t        x [13];
  fx_t        c4 [88];
  fx_t        c3 [64];
  logic       ov [2];
  logic [3:0] och [2];
  fx_t        en [2];
  fx_t        tg [2];
  int         checks = 0, failures = 0, cyc = 0;
  iq_t        eq [2][$];
  int         et [2][$];
  iq_t        cq [2];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  cnn_engine #(.NN(NN_4CONV)) u4 (.clk, .rst_n, .in_valid, .in_ch, .x, .coef(c4),
    .out_valid(ov[0]), .out_ch(och[0]), .energy(en[0]), .tag(tg[0]));
  cnn_engine #(.NN(NN_3CONV)) u3 (.clk, .rst_n, .in_valid, .in_ch, .x, .coef(c3),
    .out_valid(ov[1]), .out_ch(och[1]), .energy(en[1]), .tag(tg[1]));

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n)
    for (int a = 0; a < 2; a++) if (ov[a]) begin
      iq_t e;
      checks += 4;
      if (eq[a].size() == 0) failures++;
      else begin
        e = eq[a].pop_front();
        if (cyc - et[a].pop_front() != 4 - a) begin failures++; $display("latency"); end
        if (int'(en[a]) != e[0]) begin failures++; $display("engine %0d energy %0d expected %0d", a, en[a], e[0]); end
        if (int'(tg[a]) != e[1]) begin failures++; $display("engine %0d tag %0d expected %0d", a, tg[a], e[1]); end
        if (int'(och[a]) != e[2]) begin failures++; $display("engine %0d channel", a); end
      end
    end

  initial begin
    iq_t xq, r;
    for (int i = 0; i < 13; i++) x[i] = '0;
    for (int i = 0; i < 88; i++) begin c4[i] = fx_t'(r_rand(700)); cq[0].push_back(int'(c4[i])); end
    for (int i = 0; i < 64; i++) begin c3[i] = fx_t'(r_rand(700)); cq[1].push_back(int'(c3[i])); end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      xq.delete();
      for (int i = 0; i < 13; i++) begin
        x[i] = fx_t'(r_rand(4096));
        xq.push_back(int'(x[i]));
      end
      in_ch    = 4'($urandom_range(15));
      in_valid = ($urandom_range(3) != 0);
      if (in_valid)
        for (int a = 0; a < 2; a++) begin
          r = r_cnn(xq, cq[a], a == 0);
          r.push_back(int'(in_ch));
          eq[a].push_back(r);
          et[a].push_back(cyc);
        end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (8) @(negedge clk);
    checks++;
    if (eq[0].size() != 0 || eq[1].size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
