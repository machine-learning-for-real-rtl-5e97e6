// vanilla_rnn_engine_tb: random 5-sample windows, one per clock, through
// the unrolled vanilla RNN; energy and channel number are compared with
// the reference network and must appear 6 clocks later.
module vanilla_rnn_engine_tb;
  import lar_pkg::*;
  import nn_ref_pkg::*;

  localparam int H = 8, NC = 2*H + H*H + H + 1;

  logic       clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [3:0] in_ch = '0, out_ch;
  fx_t        x [5];
  fx_t        coef [NC];
  fx_t        energy;
  int         checks = 0, failures = 0, cyc = 0;
  iq_t        eq [$];
  int         et [$];
  iq_t        cq;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  vanilla_rnn_engine u_dut (.clk, .rst_n, .in_valid, .in_ch, .x, .coef, .out_valid, .out_ch, .energy);

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    iq_t e;
    checks += 3;
    if (eq.size() == 0) failures++;
    else begin
      e = eq.pop_front();
      if (cyc - et.pop_front() != 6) begin failures++; $display("latency"); end
      if (int'(energy) != e[0]) begin failures++; $display("energy %0d expected %0d", energy, e[0]); end
      if (int'(out_ch) != e[1]) failures++;
    end
  end

  initial begin
    iq_t xq, r;
    for (int i = 0; i < 5; i++) x[i] = '0;
    for (int i = 0; i < NC; i++) begin coef[i] = fx_t'(r_rand(i < H ? 1500 : 500)); cq.push_back(int'(coef[i])); end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      xq.delete();
      for (int i = 0; i < 5; i++) begin x[i] = fx_t'(r_rand(4096)); xq.push_back(int'(x[i])); end
      in_ch    = 4'($urandom_range(15));
      in_valid = ($urandom_range(4) != 0);
      if (in_valid) begin
        r.delete();
        r.push_back(r_vanilla(xq, cq, H));
        r.push_back(int'(in_ch));
        eq.push_back(r);
        et.push_back(cyc);
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (eq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
