// rnn_cell_tb: random samples, states and coefficients, one step per
// clock; the next state is compared with the reference ReLU step and must
// appear one clock later. Checks that ReLU clamping was exercised.
module rnn_cell_tb;
  import lar_pkg::*;
  import nn_ref_pkg::*;

  localparam int H = 8;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fx_t  x;
  fx_t  h_in [H];
  fx_t  wx [H];
  fx_t  wh [H*H];
  fx_t  b [H];
  fx_t  h_out [H];
  int   checks = 0, failures = 0, cyc = 0, zeros = 0;
  iq_t  eq [$];
  int   et [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  rnn_cell #(.H(H)) u_dut (.clk, .rst_n, .in_valid, .x, .h_in, .wx, .wh, .b, .out_valid, .h_out);

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    iq_t e;
    checks++;
    if (eq.size() == 0) failures++;
    else begin
      e = eq.pop_front();
      if (cyc - et.pop_front() != 1) failures++;
      for (int i = 0; i < H; i++) begin
        checks++;
        if (int'(h_out[i]) != e[i]) begin failures++; $display("h[%0d] = %0d expected %0d", i, h_out[i], e[i]); end
        if (h_out[i] == 0) zeros++;
      end
    end
  end

  initial begin
    iq_t cq, hq;
    x = '0;
    for (int i = 0; i < H; i++) h_in[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      if (n % 20 == 0) begin
        for (int i = 0; i < H; i++)   wx[i] = fx_t'(r_rand(1500));
        for (int i = 0; i < H*H; i++) wh[i] = fx_t'(r_rand(600));
        for (int i = 0; i < H; i++)   b[i]  = fx_t'(r_rand(1000));
      end
      cq.delete(); hq.delete();
      for (int i = 0; i < H; i++)   cq.push_back(int'(wx[i]));
      for (int i = 0; i < H*H; i++) cq.push_back(int'(wh[i]));
      for (int i = 0; i < H; i++)   cq.push_back(int'(b[i]));
      x = fx_t'(r_rand(n < 280 ? 5000 : 32767));
      for (int i = 0; i < H; i++) begin h_in[i] = fx_t'($urandom_range(n < 280 ? 4000 : 32767)); hq.push_back(int'(h_in[i])); end
      in_valid = 1'b1;
      eq.push_back(r_rnn_step(int'(x), hq, cq, H));
      et.push_back(cyc);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (4) @(negedge clk);
    checks += 2;
    if (eq.size() != 0) failures++;
    if (zeros == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
