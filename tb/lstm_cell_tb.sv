// lstm_cell_tb: random samples, states and coefficients, one step per
// clock; new h and c are compared with the reference LSTM step and must
// appear two clocks later.
module lstm_cell_tb;
  import lar_pkg::*;
  import nn_ref_pkg::*;

  localparam int H = 10, NC = 4*(H + H*H + H);

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fx_t  x;
  fx_t  h_in [H];
  fx_t  c_in [H];
  fx_t  coef [NC];
  fx_t  h_out [H];
  fx_t  c_out [H];
  int   checks = 0, failures = 0, cyc = 0;
  iq_t  eq [$];
  int   et [$];
  iq_t  cq;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  lstm_cell #(.H(H)) u_dut (.clk, .rst_n, .in_valid, .x, .h_in, .c_in, .coef, .out_valid, .h_out, .c_out);

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
      if (cyc - et.pop_front() != 2) begin failures++; $display("latency"); end
      for (int i = 0; i < H; i++) begin
        checks += 2;
        if (int'(h_out[i]) != e[i]) begin failures++; $display("h[%0d] = %0d expected %0d", i, h_out[i], e[i]); end
        if (int'(c_out[i]) != e[H+i]) begin failures++; $display("c[%0d] = %0d expected %0d", i, c_out[i], e[H+i]); end
      end
    end
  end

  initial begin
    iq_t hc;
    x = '0;
    for (int i = 0; i < H; i++) begin h_in[i] = '0; c_in[i] = '0; end
    for (int i = 0; i < NC; i++) begin coef[i] = fx_t'(r_rand(700)); cq.push_back(int'(coef[i])); end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      hc.delete();
      x = fx_t'(r_rand(4096));
      for (int i = 0; i < H; i++) h_in[i] = fx_t'(r_rand(1024));
      for (int i = 0; i < H; i++) c_in[i] = fx_t'(r_rand(3000));
      for (int i = 0; i < H; i++) hc.push_back(int'(h_in[i]));
      for (int i = 0; i < H; i++) hc.push_back(int'(c_in[i]));
      in_valid = ($urandom_range(5) != 0);
      if (in_valid) begin
        eq.push_back(r_lstm_step(int'(x), hc, cq, H));
        et.push_back(cyc);
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (eq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
