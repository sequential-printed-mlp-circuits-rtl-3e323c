// mlp_ref_pkg: behavioural reference of the classifier, for testbenches.
//
// It computes in plain integer arithmetic what the circuit should produce.
// It takes from mlp_pkg only the model constants (weights, biases,
// approximation choices) and none of the circuit's structure. The rules:
//   exact neuron   sum = bias + sum_i (-1)^s_i * x_i * 2^p_i      (full scale)
//   approx neuron  (x_a[B] + x_b[B]) * 2^LEAD                     (a, b, B, LEAD from mlp_pkg)
//   qReLU          min(max(sum, 0) >> SHIFT, 2^ACT_W - 1)
//   argmax         first maximum scanning 0..R-1 with >=, i.e. the last of equal maxima
package mlp_ref_pkg;

  function automatic longint exact_sum(input logic [31:0] seed, input int unsigned layer,
                                       input int unsigned neuron, input int unsigned nin,
                                       input int unsigned in_w, input int unsigned w_bits,
                                       input int x[]);
    longint acc, term;
    int unsigned pm;
    pm  = mlp_pkg::neuron_pmin(seed, layer, neuron, w_bits);
    acc = mlp_pkg::bias_red(seed, layer, neuron, in_w, w_bits) * (longint'(1) << pm);
    for (int unsigned i = 0; i < nin; i++) begin
      term = longint'(x[i]) * (longint'(1) << mlp_pkg::weight_pow(seed, layer, neuron, i, w_bits));
      if (mlp_pkg::weight_sgn(seed, layer, neuron, i)) acc -= term;
      else                                             acc += term;
    end
    return acc;
  endfunction

  function automatic longint approx_val(input logic [31:0] seed, input int unsigned layer,
                                        input int unsigned neuron, input int unsigned nin,
                                        input int unsigned in_w, input int unsigned w_bits,
                                        input int x[]);
    int unsigned a, b, bt;
    longint v;
    a  = mlp_pkg::approx_first(seed, layer, neuron, nin, w_bits);
    b  = mlp_pkg::approx_second(seed, layer, neuron, nin, w_bits);
    bt = mlp_pkg::approx_bit(in_w);
    v  = longint'((x[a] >> bt) & 1) + longint'((x[b] >> bt) & 1);
    return v * (longint'(1) << mlp_pkg::approx_lead(seed, layer, neuron, nin, in_w, w_bits));
  endfunction

  function automatic int qrelu_ref(input longint v, input int unsigned shift,
                                   input int unsigned act_w);
    longint t;
    if (v < 0) return 0;
    t = v / (longint'(1) << shift);
    if (t > (longint'(1) << act_w) - 1) return (1 << act_w) - 1;
    return int'(t);
  endfunction

  // One whole inference. hid/act/osum are resized here.
  function automatic void infer(input logic [31:0] seed, input int unsigned n, input int unsigned p,
                                input int unsigned r, input int unsigned in_w,
                                input int unsigned w_bits, input int unsigned act_w,
                                input int unsigned qshift, input logic [63:0] hid_approx,
                                input logic [63:0] out_approx, input int x[],
                                output longint hid[], output int act[], output longint osum[],
                                output int cls, output longint score);
    hid  = new[p];
    act  = new[p];
    osum = new[r];
    for (int unsigned j = 0; j < p; j++) begin
      hid[j] = hid_approx[j] ? approx_val(seed, 0, j, n, in_w, w_bits, x)
                             : exact_sum(seed, 0, j, n, in_w, w_bits, x);
      act[j] = qrelu_ref(hid[j], qshift, act_w);
    end
    for (int unsigned k = 0; k < r; k++)
      osum[k] = out_approx[k] ? approx_val(seed, 1, k, p, act_w, w_bits, act)
                              : exact_sum(seed, 1, k, p, act_w, w_bits, act);
    cls   = 0;
    score = osum[0];
    for (int unsigned k = 1; k < r; k++)
      if (osum[k] >= score) begin
        cls   = int'(k);
        score = osum[k];
      end
  endfunction

endpackage
