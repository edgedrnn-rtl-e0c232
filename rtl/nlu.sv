// nlu -- nonlinear unit of the EdgeDRNN PE: quantised sigmoid and tanh by table look-up.
//
// The paper says only that the NLU uses look-up tables for quantised sigmoid
// and tanh, with the function chosen by the controller signal s. Here the Q8.8
// input is arithmetically shifted right by 4 and clamped to [-128, 127], which
// indexes one of two 256-entry tables covering [-8, 8) in steps of 1/16. Entry i
// holds round(256 * f((i-128)/16)) in Q8.8. Outside the range the output
// saturates to the end entries. Tables are computed at elaboration from exp().
// Purely combinational (asynchronous ROM); the table size and the sampling are
// this design's choice.
module nlu
  import edgedrnn_pkg::*;
(
  input  act_t x,
  input  logic sel_tanh,   // 0: sigmoid, 1: tanh
  output act_t y
);
  typedef logic signed [15:0] tab_t [256];

  function automatic tab_t make_tab(input bit is_tanh);
    tab_t t;
    for (int i = 0; i < 256; i++) begin
      real v, f;
      v = real'(i - 128) / 16.0;
      if (is_tanh) f = 2.0 / (1.0 + $exp(-2.0 * v)) - 1.0;
      else         f = 1.0 / (1.0 + $exp(-v));
      t[i] = 16'($rtoi(f * 256.0 + ((f >= 0.0) ? 0.5 : -0.5)));
    end
    return t;
  endfunction

  localparam tab_t SIG_TAB  = make_tab(1'b0);
  localparam tab_t TANH_TAB = make_tab(1'b1);

  logic signed [11:0] xs;
  logic [7:0]         idx;

  always_comb begin
    xs = x[15:4];
    if (xs > 12'sd127)       idx = 8'd255;
    else if (xs < -12'sd128) idx = 8'd0;
    else                     idx = 8'(xs + 12'sd128);
    y = sel_tanh ? TANH_TAB[idx] : SIG_TAB[idx];
  end
endmodule
