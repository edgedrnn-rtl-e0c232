// edgedrnn_tb_pkg -- reference arithmetic and DRAM contents shared by the
// EdgeDRNN testbenches. Written from the number formats stated in the RTL
// header comments (Q8.8 activations, Q1.7 weights, Q.15 sums), not from the
// RTL code itself.
package edgedrnn_tb_pkg;

  // DRAM byte at address a: a hash of the address, mapped to [-20, 20].
  function automatic int wbyte(input longint unsigned a);
    int unsigned h;
    h = 32'(a) * 32'h9E3779B1;
    h = h ^ (h >> 15);
    h = h * 32'h85EBCA77;
    h = h ^ (h >> 13);
    return int'(h % 41) - 20;
  endfunction

  function automatic int sat16(input longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // arithmetic shift right of a signed value (floor division by 2^n)
  function automatic longint asr(input longint v, input int n);
    return v >>> n;
  endfunction

  // 32-bit wrap-around, as in the hardware accumulator
  function automatic longint wrap32(input longint v);
    return longint'(int'(v));
  endfunction

  function automatic int acc2act(input longint a);
    return sat16(asr(a, 7));
  endfunction

  // quantised sigmoid / tanh: input sampled at multiples of 1/16 in [-8, 8)
  function automatic int ref_nl(input int x, input bit is_tanh);
    int  i;
    real v, f;
    i = x >>> 4;
    if (i > 127)  i = 127;
    if (i < -128) i = -128;
    v = real'(i) / 16.0;
    f = is_tanh ? (2.0 / (1.0 + $exp(-2.0 * v)) - 1.0) : (1.0 / (1.0 + $exp(-v)));
    return $rtoi(f * 256.0 + ((f >= 0.0) ? 0.5 : -0.5));
  endfunction

  // one neuron update from its four sums and h(t-1), as described for the PE
  function automatic int ref_neuron(input longint ar, au, acx, ach, input int hp);
    int r, u, c, d, pre_ch;
    longint m, t;
    r      = ref_nl(acc2act(ar), 1'b0);
    u      = ref_nl(acc2act(au), 1'b0);
    pre_ch = acc2act(ach);
    m      = longint'(r) * pre_ch;
    t      = wrap32(acx + asr(m, 1));
    c      = ref_nl(acc2act(t), 1'b1);
    d      = sat16(longint'(hp) - c);
    return sat16(longint'(c) + sat16(asr(longint'(u) * d, 8)));
  endfunction

endpackage
