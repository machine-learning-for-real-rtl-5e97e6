// lar_nn_top_tb: end-to-end test of lar_nn_top for all five networks:
// 4-Conv and 3-Conv with six channels, the vanilla RNN with fifteen, the
// sliding LSTM with four and the single-cell LSTM with three and with
// one (where frames closer than 3 clocks must be dropped). Each runs
// in its own top_harness; see there for what is checked.
module lar_nn_top_tb;
  import lar_pkg::*;

  logic clk = 0;
  logic done [6];
  int   ck [6];
  int   fl [6];
  int   checks, failures;

  always #5 clk = ~clk;

  top_harness #(.NN(NN_4CONV),        .NCH(6),  .NFRAMES(80)) h0 (.clk, .done(done[0]), .checks(ck[0]), .failures(fl[0]));
  top_harness #(.NN(NN_3CONV),        .NCH(6),  .NFRAMES(80)) h1 (.clk, .done(done[1]), .checks(ck[1]), .failures(fl[1]));
  top_harness #(.NN(NN_VANILLA),      .NCH(15), .NFRAMES(60)) h2 (.clk, .done(done[2]), .checks(ck[2]), .failures(fl[2]));
  top_harness #(.NN(NN_LSTM_SLIDING), .NCH(4),  .NFRAMES(60)) h3 (.clk, .done(done[3]), .checks(ck[3]), .failures(fl[3]));
  top_harness #(.NN(NN_LSTM_SINGLE),  .NCH(3),  .NFRAMES(60)) h4 (.clk, .done(done[4]), .checks(ck[4]), .failures(fl[4]));
  top_harness #(.NN(NN_LSTM_SINGLE),  .NCH(1),  .NFRAMES(60)) h5 (.clk, .done(done[5]), .checks(ck[5]), .failures(fl[5]));

  function automatic void tally();
    checks = 0; failures = 0;
    for (int i = 0; i < 6; i++) begin checks += ck[i]; failures += fl[i]; end
  endfunction

  initial begin
    #5000000;
    tally();
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20;
    wait (done[0] && done[1] && done[2] && done[3] && done[4] && done[5]);
    tally();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
