// cnn_energy_tb: random sample/tag pairs through both energy
// sub-networks (4-Conv: two layers, 3-Conv: one layer), one set per clock;
// energies are compared with the reference model, with latencies of two
// and one clocks.
module cnn_energy_tb;
  import lar_pkg::*;
  import nn_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, ov4, ov3;
  fx_t  samp [6];
  fx_t  tag  [6];
  fx_t  c4 [37];
  fx_t  c3 [13];
  fx_t  e4, e3;
  int   checks = 0, failures = 0, cyc = 0;
  int   q4 [$], q3 [$], t4 [$], t3 [$];
  iq_t  cq4, cq3;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  cnn_energy #(.N_ECONV(2)) u4 (.clk, .rst_n, .in_valid, .samp, .tag, .coef(c4), .out_valid(ov4), .energy(e4));
  cnn_energy #(.N_ECONV(1)) u3 (.clk, .rst_n, .in_valid, .samp, .tag, .coef(c3), .out_valid(ov3), .energy(e3));

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (ov4) begin
      checks += 2;
      if (q4.size() == 0) failures++;
      else begin
        int e;
        e = q4.pop_front();
        if (cyc - t4.pop_front() != 2) failures++;
        if (int'(e4) != e) begin failures++; $display("4-Conv energy %0d expected %0d", e4, e); end
      end
    end
    if (ov3) begin
      checks += 2;
      if (q3.size() == 0) failures++;
      else begin
        int e;
        e = q3.pop_front();
        if (cyc - t3.pop_front() != 1) failures++;
        if (int'(e3) != e) begin failures++; $display("3-Conv energy %0d expected %0d", e3, e); end
      end
    end
  end

  initial begin
    iq_t cat, r;
    for (int i = 0; i < 6; i++) begin samp[i] = '0; tag[i] = '0; end
    for (int i = 0; i < 37; i++) begin c4[i] = fx_t'(r_rand(800)); cq4.push_back(int'(c4[i])); end
    for (int i = 0; i < 13; i++) begin c3[i] = fx_t'(r_rand(800)); cq3.push_back(int'(c3[i])); end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      cat.delete();
      for (int i = 0; i < 6; i++) begin
        samp[i] = fx_t'(r_rand(6000));
        tag[i]  = fx_t'($urandom_range(1024));
      end
      for (int i = 0; i < 6; i++) cat.push_back(int'(samp[i]));
      for (int i = 0; i < 6; i++) cat.push_back(int'(tag[i]));
      in_valid = 1'b1;
      r = r_conv(r_conv(cat, 2, 6, cq4, 0, 3, 4, A_RELU), 3, 3, cq4, 27, 1, 3, A_NONE);
      q4.push_back(r[0]); t4.push_back(cyc);
      r = r_conv(cat, 2, 6, cq3, 0, 1, 6, A_NONE);
      q3.push_back(r[0]); t3.push_back(cyc);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (q4.size() != 0 || q3.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
