// cnn_tagging_tb: random 13-sample windows, one per clock, through the
// tagging network with random coefficients; the six tag probabilities
// are compared with the reference model and must appear two clocks after
// the window.
module cnn_tagging_tb;
  import lar_pkg::*;
  import nn_ref_pkg::*;

  localparam int NC = 51;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fx_t  x [13];
  fx_t  coef [NC];
  fx_t  tag [6];
  int   checks = 0, failures = 0, cyc = 0, hi = 0, lo = 0;
  iq_t  exp_q [$];
  int   exp_t [$];
  iq_t  cq;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  cnn_tagging u_dut (.clk, .rst_n, .in_valid, .x, .coef, .out_valid, .tag);

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
    if (exp_q.size() == 0) failures++;
    else begin
      e = exp_q.pop_front();
      if (cyc - exp_t.pop_front() != 2) failures++;
      for (int i = 0; i < 6; i++) begin
        checks++;
        if (int'(tag[i]) != e[i]) begin
          failures++; $display("tag[%0d] = %0d expected %0d", i, tag[i], e[i]);
        end
        if (tag[i] > 900) hi++;
        if (tag[i] < 100) lo++;
      end
    end
  end

  initial begin
    iq_t xq, t;
    for (int i = 0; i < 13; i++) x[i] = '0;
    for (int i = 0; i < NC; i++) begin
      coef[i] = fx_t'(r_rand(600));
      cq.push_back(int'(coef[i]));
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      xq.delete();
      for (int i = 0; i < 13; i++) begin
        x[i] = fx_t'(r_rand(n < 150 ? 2048 : 8192));
        xq.push_back(int'(x[i]));
      end
      in_valid = 1'b1;
      t = r_conv(r_conv(xq, 1, 13, cq, 0, 5, 3, A_RELU), 5, 11, cq, 20, 1, 6, A_SIG);
      exp_q.push_back(t);
      exp_t.push_back(cyc);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks += 2;
    if (exp_q.size() != 0) failures++;
    if (hi == 0 || lo == 0) begin failures++; $display("tags never saturated both ways"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
