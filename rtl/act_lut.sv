// act_lut: look-up-table realisation of a smooth activation function.
//
// The source work realises the sigmoid and tanh activations of its networks
// with look-up tables on the FPGA, and names that as one cause of the small
// firmware/software differences. This module is such a table. The input x
// (fx_t, 10 fractional bits) is rounded to the nearest step of 1/16 and clipped
// to [-8, 8), giving a 256-entry ROM whose entry i holds f((i-128)/16) rounded to
// fx_t. The table is computed at elaboration from the exact function, so
// there is no data file. FUNC selects ACT_SIGMOID or ACT_TANH (any other
// value gives tanh).
//
// Timing: purely combinational; the enclosing layer registers the result.
// Table size and step are this design's choices; the source gives neither.
module act_lut
  import lar_pkg::*;
#(
  parameter act_e FUNC = ACT_SIGMOID
) (
  input  fx_t x,
  output fx_t y
);
  localparam int N     = 256;
  localparam int SHIFT = FRAC - 4;    // 1/16 steps

  typedef fx_t tab_t [N];

  function automatic tab_t make_table();
    tab_t t;
    for (int i = 0; i < N; i++) begin
      real v, f;
      v = real'(i - N / 2) / 16.0;
      if (FUNC == ACT_SIGMOID) f = 1.0 / (1.0 + $exp(-v));
      else                     f = (1.0 - $exp(-2.0 * v)) / (1.0 + $exp(-2.0 * v));
      t[i] = fx_t'($rtoi(f * real'(1 << FRAC) + ((f < 0.0) ? -0.5 : 0.5)));
    end
    return t;
  endfunction

  localparam tab_t TAB = make_table();

  int         q;                       // x in 1/16 steps, rounded
  logic [7:0] idx;

  always_comb begin
    q = (int'(x) + (1 << (SHIFT - 1))) >>> SHIFT;
    if (q > 127)       idx = 8'd255;
    else if (q < -128) idx = 8'd0;
    else               idx = 8'(q + 128);
    y = TAB[idx];
  end

endmodule
