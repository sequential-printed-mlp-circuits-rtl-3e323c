// sc_neuron: single-cycle (approximate) neuron.
//
// An offline analysis of a neuron picks its two most important inputs, i.e.
// those with the largest expected absolute product. It also picks the column
// LEAD where the leading 1 of that product is expected. The neuron then uses
// one bit of each of those two inputs:
//   en0 = 1 (first important input present):   r0 <= inp[BIT0]
//   en1 = 1 (second important input present):  r1 <= r0 + inp[BIT1]
// The 1-bit adder yields a 2-bit result {carry, sum}. That result is wired
// into bits LEAD+1:LEAD of the output word, so it lines up with the sums of
// the exact neurons of the same layer. `out` is taken after the en1 mux:
// it already shows the new result in the en1 cycle and holds it afterwards.
// The neuron has no bias and no sign. Its estimate is non-negative.
//
// Follows the paper (Fig. 2c, Sec. 3.1.2): the 1-bit register loaded under
// en0, the 1-bit adder, the result register with its en1 mux, and the
// rewiring to the leading-1 column.
// This design's own choices:
//  - The two sampled bits BIT0/BIT1 are separate parameters. Fig. 2c draws
//    one input wire.
//  - The registers have no reset, as in Fig. 2c. Both are rewritten in every
//    inference before the output is used.
module sc_neuron #(
  parameter int unsigned IN_W  = 4,   // input width
  parameter int unsigned OUT_W = 12,  // output width (signed, as the exact neurons)
  parameter int unsigned BIT0  = 3,   // bit of the first important input
  parameter int unsigned BIT1  = 3,   // bit of the second important input
  parameter int unsigned LEAD  = 3    // output column of the 1-bit addition
) (
  input  logic                    clk,
  input  logic                    en0,  // first important input present
  input  logic                    en1,  // second important input present
  input  logic [IN_W-1:0]         inp,
  output logic signed [OUT_W-1:0] out
);

  logic       r0;        // stored leading-1 bit of the first input
  logic [1:0] r1;        // held result
  logic [1:0] add, res;

  always_comb begin
    add = {1'b0, r0} + {1'b0, inp[BIT1]};  // 1-bit adder with carry out
    res = en1 ? add : r1;
    out = OUT_W'(res) << LEAD;             // rewiring to the leading-1 column
  end

  always_ff @(posedge clk) begin
    if (en0) r0 <= inp[BIT0];
    r1 <= res;
  end

  // The two important inputs arrive in different cycles, the first one first.
  always_ff @(posedge clk) begin
    assert (!(en0 && en1)) else $error("en0 and en1 in the same cycle");
  end

  initial begin
    assert (BIT0 < IN_W && BIT1 < IN_W) else $error("sampled bit outside the input");
    assert (LEAD + 2 < OUT_W) else $error("LEAD leaves no room for the 2-bit result and sign");
  end

endmodule
