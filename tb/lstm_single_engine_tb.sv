// lstm_single_engine_tb: four channels visited round-robin with random
// gaps, one new sample per visit; the reference keeps each channel's LSTM
// state separately, so every energy checks that the right state was read,
// updated and written back. Latency must be 3 clocks.
module lstm_single_engine_tb;
  import lar_pkg::*;
  import nn_ref_pkg::*;

  localparam int H = 10, NCH = 4, NC = 4*(H + H*H + H) + H + 1;

  logic       clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [3:0] in_ch = '0, out_ch;
  fx_t        x;
  fx_t        coef [NC];
  fx_t        energy;
  int         checks = 0, failures = 0, cyc = 0;
  iq_t        eq [$];
  int         et [$];
  iq_t        cq;
  iq_t        st [NCH];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  lstm_single_engine #(.NCH(NCH)) u_dut (.clk, .rst_n, .in_valid, .in_ch, .x, .coef, .out_valid, .out_ch, .energy);

  initial begin
    #800000;
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
      if (cyc - et.pop_front() != 3) begin failures++; $display("latency"); end
      if (int'(energy) != e[0]) begin failures++; $display("ch %0d energy %0d expected %0d", out_ch, energy, e[0]); end
      if (int'(out_ch) != e[1]) failures++;
    end
  end

  initial begin
    iq_t r, h;
    x = '0;
    for (int c = 0; c < NCH; c++) for (int i = 0; i < 2*H; i++) st[c].push_back(0);
    for (int i = 0; i < NC; i++) begin coef[i] = fx_t'(r_rand(700)); cq.push_back(int'(coef[i])); end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++)
      for (int c = 0; c < NCH; c++) begin
        @(negedge clk);
        in_valid = 1'b1;
        in_ch    = 4'(c);
        x        = fx_t'(r_rand(4096));
        st[c] = r_lstm_step(int'(x), st[c], cq, H);
        h.delete();
        for (int i = 0; i < H; i++) h.push_back(st[c][i]);
        r.delete();
        r.push_back(r_dense(h, cq, 4*(H + H*H + H), H));
        r.push_back(c);
        eq.push_back(r);
        et.push_back(cyc);
        if ($urandom_range(5) == 0) begin
          @(negedge clk);
          in_valid = 1'b0;
        end
      end
    @(negedge clk);
    in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (eq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
