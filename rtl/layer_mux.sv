// layer_mux: state-driven multiplexer between two layers.
//
// This replaces the shift registers that a conventional sequential MLP puts
// between layers. The preceding layer's neurons hold their results in their
// own accumulators. While the controller's state runs through
// BASE .. BASE+NSRC-1, this multiplexer forwards source state-BASE to the
// next layer, one per cycle. Outside that window it outputs source 0. The
// next layer ignores the value then, because its enable is low.
// It is combinational.
//
// Follows the paper (Fig. 3b, inputs N+0 .. N+P; Sec. 3.1.4): the
// multiplexer and its state select.
// This design's own choice: the value output outside the window.
module layer_mux #(
  parameter int unsigned NSRC    = 4,   // sources (neurons of the preceding layer)
  parameter int unsigned W       = 4,   // data width
  parameter int unsigned STATE_W = 9,
  parameter int unsigned BASE    = 0    // state of the first source
) (
  input  logic [STATE_W-1:0] state,
  input  logic [W-1:0]       in [NSRC],
  output logic [W-1:0]       out
);

  logic [STATE_W-1:0] idx;

  always_comb begin
    idx = state - STATE_W'(BASE);
    out = in[0];
    for (int unsigned i = 1; i < NSRC; i++)
      if (32'(idx) == i) out = in[i];
  end

endmodule
