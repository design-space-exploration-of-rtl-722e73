// snn_tb_pkg: helpers shared by the testbenches.
//
// hash32 gives a repeatable pseudo-random word for a (layer, neuron, input)
// triple, so a testbench can both load a weight and recompute it in its
// reference model without storing a table. syn_weight turns it into a weight in
// [-off, span-off). ref_lif is the reference leaky integrate-and-fire update the
// testbenches compare the hardware with, written independently of the RTL.
package snn_tb_pkg;
  import snn_pkg::*;

  function automatic logic [31:0] hash32(int a, int b, int c);
    logic [31:0] x;
    x = 32'(a) * 32'h9E37_79B1 ^ 32'(b) * 32'h85EB_CA77 ^ 32'(c) * 32'hC2B2_AE3D ^ 32'h1234_5678;
    x = x ^ (x >> 15);
    x = x * 32'h2C1B_3C6D;
    x = x ^ (x >> 12);
    x = x * 32'h297A_2D39;
    x = x ^ (x >> 15);
    return x;
  endfunction

  function automatic word_t syn_weight(int l, int n, int i, int span, int off);
    return word_t'(int'(hash32(l, n, i) % 32'(span)) - off);
  endfunction

  // v_new = beta*v + acc + bias (beta*v as a real product truncated to Q16.16),
  // spike when v_new > thr, reset by subtraction. first: start from zero.
  function automatic void ref_lif(inout word_t v, input longint acc, input word_t bias,
                                  input bit first, input int beta, input word_t thr,
                                  output bit spk);
    longint prev, nv;
    prev = first ? 0 : ((longint'(v) * beta) >>> 16);
    nv   = prev + acc + longint'(bias);
    nv   = longint'(word_t'(nv));          // 32-bit wrap, as in hardware
    spk  = (nv > longint'(thr));
    v    = word_t'(spk ? nv - longint'(thr) : nv);
  endfunction

  // Weight of a test network: uniform, spread chosen so that about 30 % of a
  // layer's PRE inputs spiking moves a neuron by about one threshold, with a small
  // positive mean (span/24 in the first layer, span/96 deeper) and a bias mean of
  // +1/16, which gives moderate, non-saturated activity in every layer.
  function automatic word_t net_weight(int l, int n, int i, int pre);
    int span;
    span = int'(2.5 * 65536.0 / $sqrt(0.3 * real'(pre)));
    if (i == pre) return syn_weight(l, n, i, 16384, 4096);   // bias
    return syn_weight(l, n, i, span, span / 2 - ((l == 0) ? span / 24 : span / 96));
  endfunction

  // Reference of one FC layer for one time step.
  function automatic void ref_layer(input int l, input int pre, input int post,
                                    input bit first, input int beta, input word_t thr,
                                    input bit in_spk[], inout word_t v[], output bit out_spk[]);
    out_spk = new[post];
    for (int n = 0; n < post; n++) begin
      longint acc;
      bit sp;
      acc = 0;
      for (int i = 0; i < pre; i++) if (in_spk[i]) acc += longint'(net_weight(l, n, i, pre));
      ref_lif(v[n], acc, net_weight(l, n, pre, pre), first, beta, thr, sp);
      out_spk[n] = sp;
    end
  endfunction
endpackage
