// conv1d_layer_tb: random windows and coefficients through a 2-in,
// 3-out, kernel-4 layer of each activation type, one window per clock;
// every output is compared with the reference convolution and must
// appear exactly one clock after its input.
module conv1d_layer_tb;
  import lar_pkg::*;
  import nn_ref_pkg::*;

  localparam int IC = 2, OC = 3, K = 4, L = 9, OL = L - K + 1, NW = OC*IC*K;

  logic clk = 0, rst_n = 0, in_valid = 0;
  fx_t  x [IC][L];
  fx_t  w [NW];
  fx_t  b [OC];
  logic ov [4];
  fx_t  y [4][OC][OL];
  int   checks = 0, failures = 0, cyc = 0;
  iq_t  exp_q [4][$];
  int   exp_t [4][$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  conv1d_layer #(.IN_CH(IC), .OUT_CH(OC), .K(K), .IN_LEN(L), .ACT(ACT_NONE))
    u0 (.clk, .rst_n, .in_valid, .x, .w, .b, .out_valid(ov[0]), .y(y[0]));
  conv1d_layer #(.IN_CH(IC), .OUT_CH(OC), .K(K), .IN_LEN(L), .ACT(ACT_RELU))
    u1 (.clk, .rst_n, .in_valid, .x, .w, .b, .out_valid(ov[1]), .y(y[1]));
  conv1d_layer #(.IN_CH(IC), .OUT_CH(OC), .K(K), .IN_LEN(L), .ACT(ACT_SIGMOID))
    u2 (.clk, .rst_n, .in_valid, .x, .w, .b, .out_valid(ov[2]), .y(y[2]));
  conv1d_layer #(.IN_CH(IC), .OUT_CH(OC), .K(K), .IN_LEN(L), .ACT(ACT_TANH))
    u3 (.clk, .rst_n, .in_valid, .x, .w, .b, .out_valid(ov[3]), .y(y[3]));

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    for (int a = 0; a < 4; a++)
      if (rst_n && ov[a]) begin
        iq_t e;
        int  t0;
        checks++;
        if (exp_q[a].size() == 0) begin failures++; continue; end
        e = exp_q[a].pop_front();
        t0 = exp_t[a].pop_front();
        if (cyc - t0 != 1) begin failures++; $display("latency %0d", cyc - t0); end
        for (int o = 0; o < OC; o++)
          for (int j = 0; j < OL; j++) begin
            checks++;
            if (int'(y[a][o][j]) != e[o*OL + j]) begin
              failures++;
              $display("act %0d y[%0d][%0d] = %0d expected %0d", a, o, j, y[a][o][j], e[o*OL + j]);
            end
          end
      end
  end

  initial begin
    iq_t xq, cq;
    for (int c = 0; c < IC; c++) for (int i = 0; i < L; i++) x[c][i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      xq.delete(); cq.delete();
      for (int c = 0; c < IC; c++)
        for (int i = 0; i < L; i++) begin
          x[c][i] = fx_t'(r_rand(n < 100 ? 4096 : 32767));
          xq.push_back(int'(x[c][i]));
        end
      if (n % 10 == 0) begin
        for (int i = 0; i < NW; i++) w[i] = fx_t'(r_rand(n < 150 ? 700 : 32767));
        for (int i = 0; i < OC; i++) b[i] = fx_t'(r_rand(2048));
      end
      for (int i = 0; i < NW; i++) cq.push_back(int'(w[i]));
      for (int i = 0; i < OC; i++) cq.push_back(int'(b[i]));
      in_valid = (n % 7 != 3);
      if (in_valid)
        for (int a = 0; a < 4; a++) begin
          exp_q[a].push_back(r_conv(xq, IC, L, cq, 0, OC, K, a));
          exp_t[a].push_back(cyc);
        end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(negedge clk);
    for (int a = 0; a < 4; a++) begin
      checks++;
      if (exp_q[a].size() != 0) begin failures++; $display("missing outputs"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
