// act_lut_tb: checks both activation tables (sigmoid and tanh) over the
// whole input range against the reference quantisation, and against the
// exact functions within the table's step error.
module act_lut_tb;
  import lar_pkg::*;
  import nn_ref_pkg::*;

  fx_t x, ys, yt;
  int  checks = 0, failures = 0;

  act_lut #(.FUNC(ACT_SIGMOID)) u_sig  (.x, .y(ys));
  act_lut #(.FUNC(ACT_TANH))    u_tanh (.x, .y(yt));

  task automatic check(int xv);
    real xr;
    x = fx_t'(xv);
    #1;
    xr = real'(xv) / 1024.0;
    checks += 2;
    if (int'(ys) != r_act(A_SIG, xv)) begin
      failures++; $display("sigmoid(%0d) = %0d, expected %0d", xv, ys, r_act(A_SIG, xv));
    end
    if (int'(yt) != r_act(A_TANH, xv)) begin
      failures++; $display("tanh(%0d) = %0d, expected %0d", xv, yt, r_act(A_TANH, xv));
    end
    if (xr > -7.9 && xr < 7.9) begin
      checks += 2;
      if (rabs(real'(ys) / 1024.0 - 1.0 / (1.0 + $exp(-xr))) > 0.02) failures++;
      if (rabs(real'(yt) / 1024.0 - $tanh(xr)) > 0.04) failures++;
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -32768; v < 32768; v += 37) check(v);
    check(32767); check(-32768); check(0); check(1024); check(-1024);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
