// lar_fpga_top_tb: end-to-end test of the FPGA-level top with 4-Conv
// networks, at a reduced size of 20 cells (four six-channel copies, the last
// with two spare channels). Coefficients are first broadcast to every copy,
// then a few are overwritten per copy so that the copies differ. Frames of
// synthetic pulses follow at full and reduced rate, with some frames sent
// too early. Every cell's energy and tag are checked against the reference
// model with that cell's own coefficients, as are frame latency, the
// overflow counter and the lockstep flag. Counts how often each mechanism
// happened (broadcast and addressed writes, full-rate frames, dropped
// frames, spare channels) and fails any that never did.
module lar_fpga_top_tb;
  import lar_pkg::*;
  import nn_ref_pkg::*;

  localparam nn_e NN      = NN_4CONV;
  localparam int  NCELLS  = 20;
  localparam int  NCH     = 6;
  localparam int  NFRAMES = 60;
  localparam int  NENG    = (NCELLS + NCH - 1) / NCH;
  localparam int  EW      = (NENG > 1) ? $clog2(NENG) : 1;
  localparam int  NCOEF   = nn_ncoef(NN);
  localparam int  LAT     = 4;

  logic          clk = 0, rst_n = 0, cfg_we = 0, cfg_bcast = 0, bc_valid = 0;
  logic [EW-1:0] cfg_eng = '0;
  logic [9:0]    cfg_addr = '0;
  fx_t           cfg_wdata = '0;
  fx_t           adc [NCELLS];
  logic          frame_valid, frame_err, overflow, sync_err;
  logic [15:0]   frame_cnt, overflow_cnt;
  fx_t           et [NCELLS];
  fx_t           tag [NCELLS];

  int  checks = 0, failures = 0, cyc = 0;
  int  cq [NENG][NCOEF];
  iq_t hist [NCELLS];
  iq_t pend [NCELLS];
  iq_t eq [$];
  int  et_q [$];
  int  n_full = 0, n_ovf = 0, n_bcast = 0, n_addr = 0, n_frames = 0;
  real shape [12] = '{0.55, 1.0, 0.7, 0.35, 0.1, -0.1, -0.18, -0.2, -0.18, -0.14, -0.08, -0.03};

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  lar_fpga_top #(.NN(NN), .NCELLS(NCELLS), .NCH(NCH)) u_dut (
    .clk, .rst_n, .cfg_we, .cfg_bcast, .cfg_eng, .cfg_addr, .cfg_wdata, .bc_valid, .adc,
    .frame_valid, .frame_err, .frame_cnt, .et, .tag, .overflow, .overflow_cnt, .sync_err);

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (frame_err || sync_err) begin failures++; $display("frame_err/sync_err"); end
    if (frame_valid) begin
      iq_t e;
      checks += 2;
      n_frames++;
      if (eq.size() == 0) failures++;
      else begin
        e = eq.pop_front();
        if (cyc != et_q.pop_front()) begin failures++; $display("frame latency"); end
        for (int c = 0; c < NCELLS; c++) begin
          checks += 2;
          if (int'(et[c]) != e[2*c]) begin
            failures++; $display("frame %0d cell %0d et %0d expected %0d", frame_cnt, c, et[c], e[2*c]);
          end
          if (int'(tag[c]) != e[2*c+1]) begin
            failures++; $display("frame %0d cell %0d tag %0d expected %0d", frame_cnt, c, tag[c], e[2*c+1]);
          end
        end
      end
    end
  end

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

  task automatic cfg_write(bit bcast, int eng, int addr, int v);
    @(negedge clk);
    cfg_we = 1'b1; cfg_bcast = bcast; cfg_eng = EW'(eng); cfg_addr = 10'(addr); cfg_wdata = fx_t'(v);
    for (int e = 0; e < NENG; e++) if (bcast || e == eng) cq[e][addr] = v;
    if (bcast) n_bcast++; else n_addr++;
  endtask

  initial begin
    for (int c = 0; c < NCELLS; c++) begin
      adc[c] = '0;
      for (int i = 0; i < CNN_RF; i++) hist[c].push_back(0);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NCOEF; i++) cfg_write(1'b1, 0, i, r_rand(700));
    for (int e = 0; e < NENG; e++)
      for (int k = 0; k < 6; k++) cfg_write(1'b0, e, int'($urandom_range(NCOEF - 1)), r_rand(700));
    @(negedge clk);
    cfg_we = 1'b0;
    for (int f = 0; f < NFRAMES; f++) begin
      iq_t e;
      int  gap;
      e.delete();
      @(negedge clk);
      bc_valid = 1'b1;
      for (int c = 0; c < NCELLS; c++) begin
        iq_t r, cqq;
        int  x;
        x = next_sample(c);
        adc[c] = fx_t'(x);
        hist[c].push_back(x);
        void'(hist[c].pop_front());
        cqq.delete();
        for (int i = 0; i < NCOEF; i++) cqq.push_back(cq[c / NCH][i]);
        r = r_cnn(hist[c], cqq, 1'b1);
        e.push_back(r[0]);
        e.push_back(r[1]);
      end
      eq.push_back(e);
      et_q.push_back(cyc + NCH + LAT + 2);
      gap = (f % 2 == 0) ? NCH : NCH + int'($urandom_range(5));
      if (gap == NCH) n_full++;
      if (f % 11 == 4) begin
        @(negedge clk);
        for (int c = 0; c < NCELLS; c++) adc[c] = fx_t'(r_rand(3000));
        n_ovf++;
        gap--;
      end
      @(negedge clk);
      bc_valid = 1'b0;
      repeat (gap - 2) @(negedge clk);
    end
    repeat (NCH + LAT + 6) @(negedge clk);
    checks += 6;
    if (eq.size() != 0) begin failures++; $display("%0d frames missing", eq.size()); end
    if (int'(overflow_cnt) != n_ovf || n_ovf == 0 || !overflow) begin failures++; $display("overflow"); end
    if (int'(frame_cnt) != NFRAMES) failures++;
    if (n_full == 0) failures++;
    if (n_bcast == 0 || n_addr == 0) failures++;
    if (NENG * NCH == NCELLS && NCELLS < 100) failures++;   // small run must have spare channels
    $display("cells=%0d copies=%0d frames=%0d full-rate=%0d dropped=%0d broadcast writes=%0d addressed writes=%0d",
             NCELLS, NENG, n_frames, n_full, n_ovf, n_bcast, n_addr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
