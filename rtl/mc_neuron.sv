// mc_neuron: multi-cycle (exact) sequential neuron with hardwired power-of-two
// weights.
//
// The neuron takes one input per cycle. `sel` is the index of that input
// within the layer, and it addresses two constant tables that are
// multiplexers in hardware:
//   POW[sel]  reduced power p_i - PMIN of weight i
//   SGN[sel]  sign s_i of weight i (1 = negative)
// The barrel shifter forms x << POW[sel]; `en` forces its output to zero.
// For s_i = 1 the shifted value is inverted and the adder's carry-in is 1,
// which subtracts it in two's complement. The adder adds this to the
// register value, or to the bias when rst = 1. Its result is both the next
// register value and the output, so the first product is counted in the
// same cycle as the bias load. After the last enabled cycle the output is
// the held sum.
//
// The register works in units of 2^PMIN, the per-neuron common denominator.
// `out` is the true sum: the adder result rewired left by PMIN.
//
// Timing: at each posedge with rst = 1, sum becomes BIAS + product. With
// rst = 0 it becomes sum + product. The product is zero when en = 0.
// `out` is combinational from sum, inp, sel, en and rst.
//
// Follows the paper (Fig. 2b, Sec. 3.1.1 and 3.1.4): the power and sign
// muxes, the barrel shifter, the inverter mux with carry-in, the bias mux
// and the common-denominator shift.
// This design's own choice: zero-extending the input and product to the full
// accumulator width SUM_W.
module mc_neuron #(
  parameter int unsigned NIN    = 4,                         // inputs of the layer
  parameter int unsigned IN_W   = 4,                         // input width (unsigned)
  parameter int unsigned W_BITS = 8,                         // pow2 weight resolution
  parameter int unsigned PW     = mlp_pkg::pow_w(W_BITS),    // power field width
  parameter int unsigned SEL_W  = mlp_pkg::idx_w(NIN),
  parameter int unsigned SUM_W  = mlp_pkg::sum_w(NIN, IN_W, W_BITS),
  parameter logic [PW-1:0] POW [NIN] = '{default: '0},     // reduced powers
  parameter logic          SGN [NIN] = '{default: 1'b0},   // signs
  parameter int unsigned PMIN   = 0,                         // common power
  parameter longint      BIAS   = 0                          // bias in units of 2^PMIN
) (
  input  logic                    clk,
  input  logic                    rst,   // new inference: load bias
  input  logic                    en,    // this input belongs to the layer
  input  logic [SEL_W-1:0]        sel,   // index of the current input
  input  logic [IN_W-1:0]         inp,
  output logic signed [SUM_W-1:0] out
);

  logic signed [SUM_W-1:0] sum, base, nxt;
  logic [SUM_W-1:0]        shifted, operand;
  logic [PW-1:0]           p_sel;
  logic                    s_sel;

  // Hardwired weight multiplexers.
  always_comb begin
    p_sel = '0;
    s_sel = 1'b0;
    for (int unsigned i = 0; i < NIN; i++) begin
      if (32'(sel) == i) begin
        p_sel = POW[i];
        s_sel = SGN[i];
      end
    end
  end

  always_comb begin
    shifted = en ? (SUM_W'(inp) << p_sel) : '0;       // barrel shifter
    operand = s_sel ? ~shifted : shifted;             // inverter mux
    base    = rst ? SUM_W'(BIAS) : sum;               // bias mux
    nxt     = base + $signed(operand) + $signed(SUM_W'(s_sel));  // carry-in
    out     = nxt <<< PMIN;                           // common-denominator rewiring
  end

  always_ff @(posedge clk) sum <= nxt;

endmodule
