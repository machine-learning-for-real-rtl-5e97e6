// lar_nn_top_full_tb: one complete run of lar_nn_top exactly as built by
// default (4-Conv CNN, six multiplexed channels): coefficient loading, 200
// frames of synthetic pulses at full and reduced rate with some frames sent
// too early, and every frame checked against the reference model (energies,
// tags, order and latency). Same stimulus and checks as top_harness.
module lar_nn_top_full_tb;
  import lar_pkg::*;
  import nn_ref_pkg::*;

  localparam nn_e NN      = NN_4CONV;
  localparam int  NCH     = 6;
  localparam int  NFRAMES = 200;

  logic clk = 0;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NCOEF = nn_ncoef(NN);
  localparam int WIN   = nn_win(NN);
  localparam int LAT   = (NN == NN_3CONV) ? 3 : (NN == NN_4CONV) ? 4 :
                         (NN == NN_VANILLA) ? 6 : (NN == NN_LSTM_SLIDING) ? 11 : 3;
  localparam bit IS_CNN = (NN == NN_3CONV || NN == NN_4CONV);
  localparam int HN    = (NN == NN_VANILLA) ? RNN_H : LSTM_H;
  localparam int MINP  = (NCH < 3) ? 3 : NCH;

  logic        rst_n = 0, cfg_we = 0, bc_valid = 0;
  logic [9:0]  cfg_addr = '0;
  fx_t         cfg_wdata = '0;
  fx_t         adc [NCH];
  logic        frame_valid, frame_err, overflow;
  logic [15:0] frame_cnt, overflow_cnt;
  fx_t         et [NCH];
  fx_t         tag [NCH];

  int  cyc = 0;
  iq_t cq;
  iq_t hist [NCH];
  iq_t st [NCH];
  iq_t pend [NCH];
  iq_t eq [$];
  int  et_q [$];
  int  n_full = 0, n_ovf = 0, n_frames = 0, n_tag_hi = 0, n_tag_lo = 0;
  real shape [12] = '{0.55, 1.0, 0.7, 0.35, 0.1, -0.1, -0.18, -0.2, -0.18, -0.14, -0.08, -0.03};

  lar_nn_top u_dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .bc_valid, .adc,
    .frame_valid, .frame_err, .frame_cnt, .et, .tag, .overflow, .overflow_cnt);

  always @(posedge clk) cyc++;

  always @(negedge clk) if (rst_n) begin
    if (frame_err) begin failures++; $display("[%s] frame_err", NN.name()); end
    if (frame_valid) begin
      iq_t e;
      checks += 2;
      n_frames++;
      if (eq.size() == 0) begin failures++; $display("[%s] unexpected frame", NN.name()); end
      else begin
        e = eq.pop_front();
        if (cyc != et_q.pop_front()) begin failures++; $display("[%s] frame latency", NN.name()); end
        for (int c = 0; c < NCH; c++) begin
          checks += 2;
          if (int'(et[c]) != e[2*c]) begin
            failures++;
            $display("[%s] frame %0d ch %0d et %0d expected %0d", NN.name(), frame_cnt, c, et[c], e[2*c]);
          end
          if (int'(tag[c]) != e[2*c+1]) begin
            failures++;
            $display("[%s] frame %0d ch %0d tag %0d expected %0d", NN.name(), frame_cnt, c, tag[c], e[2*c+1]);
          end
          if (IS_CNN && tag[c] > 512) n_tag_hi++;
          if (IS_CNN && tag[c] <= 512) n_tag_lo++;
        end
      end
    end
  end

  function automatic iq_t predict(int c, int x);
    iq_t r, h;
    r.delete();
    hist[c].push_back(x);
    if (hist[c].size() > WIN) void'(hist[c].pop_front());
    case (NN)
      NN_3CONV, NN_4CONV: r = r_cnn(hist[c], cq, NN == NN_4CONV);
      NN_VANILLA:         begin r.push_back(r_vanilla(hist[c], cq, HN)); r.push_back(0); end
      NN_LSTM_SLIDING:    begin r.push_back(r_lstm_window(hist[c], cq, HN)); r.push_back(0); end
      default: begin
        st[c] = r_lstm_step(x, st[c], cq, HN);
        h.delete();
        for (int i = 0; i < HN; i++) h.push_back(st[c][i]);
        r.push_back(r_dense(h, cq, 4*(HN + HN*HN + HN), HN));
        r.push_back(0);
      end
    endcase
    return r;
  endfunction

  function automatic int next_sample(int c);
    int s;
    if ($urandom_range(7) == 0) begin
      int a;
      a = int'($urandom_range(500, 5000));
      while (pend[c].size() < 12) pend[c].push_back(0);
      for (int k = 0; k < 12; k++) pend[c][k] += $rtoi(real'(a) * shape[k]);
    end
    s = r_rand(40);
    if (pend[c].size() > 0) s += pend[c].pop_front();
    return s;
  endfunction

  initial begin
    for (int c = 0; c < NCH; c++) begin
      adc[c] = '0;
      for (int i = 0; i < WIN; i++) hist[c].push_back(0);
      for (int i = 0; i < 2*HN; i++) st[c].push_back(0);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // coefficients, plus one write past the end that must be ignored
    for (int i = 0; i <= NCOEF; i++) begin
      int v;
      @(negedge clk);
      v = (i < NCOEF) ? r_rand(IS_CNN ? 700 : 450) : 12345;
      cfg_we = 1'b1; cfg_addr = 10'(i); cfg_wdata = fx_t'(v);
      if (i < NCOEF) cq.push_back(v);
    end
    @(negedge clk);
    cfg_we = 1'b0;
    for (int f = 0; f < NFRAMES; f++) begin
      iq_t e;
      int  gap;
      e.delete();
      @(negedge clk);
      bc_valid = 1'b1;
      for (int c = 0; c < NCH; c++) begin
        iq_t r;
        int  x;
        x = next_sample(c);
        adc[c] = fx_t'(x);
        r = predict(c, x);
        e.push_back(r[0]);
        e.push_back(r[1]);
      end
      eq.push_back(e);
      et_q.push_back(cyc + NCH + LAT + 2);
      gap = (f % 2 == 0) ? MINP : MINP + int'($urandom_range(5));
      if (gap == NCH) n_full++;
      if (NCH > 1 && f % 11 == 4) begin
        // one frame too early: dropped by the multiplexer
        @(negedge clk);
        for (int c = 0; c < NCH; c++) adc[c] = fx_t'(r_rand(3000));
        n_ovf++;
        gap--;
      end
      @(negedge clk);
      bc_valid = 1'b0;
      repeat (gap - 2) @(negedge clk);
    end
    repeat (NCH + LAT + 6) @(negedge clk);
    checks += 4;
    if (eq.size() != 0) begin failures++; $display("[%s] %0d frames missing", NN.name(), eq.size()); end
    if (int'(overflow_cnt) != n_ovf) begin failures++; $display("[%s] overflow count", NN.name()); end
    if (int'(frame_cnt) != NFRAMES) begin failures++; $display("[%s] frame count", NN.name()); end
    if (NFRAMES <= WIN) failures++;
    // mechanisms that must have happened
    checks += 3;
    if (n_full == 0 && NCH >= 3) begin failures++; $display("[%s] no full-rate frame", NN.name()); end
    if (NCH > 1 && (n_ovf == 0 || !overflow)) begin failures++; $display("[%s] no overflow", NN.name()); end
    if (IS_CNN && (n_tag_hi == 0 || n_tag_lo == 0)) begin failures++; $display("[%s] tags one-sided", NN.name()); end
    $display("[%s] NCH=%0d frames=%0d full-rate=%0d dropped=%0d tag>0.5=%0d tag<=0.5=%0d",
             NN.name(), NCH, n_frames, n_full, n_ovf, n_tag_hi, n_tag_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
