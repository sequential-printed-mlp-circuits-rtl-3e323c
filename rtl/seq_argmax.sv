// seq_argmax: sequential argmax with a single comparator.
//
// While state runs through BASE .. BASE+R-1, a multiplexer driven by the
// state picks output neuron k = state-BASE. A second multiplexer picks the
// constant k. A single >= comparator checks the value against the maxVal
// register. If it wins, the value is loaded into maxVal and k into maxID.
// The first value of the window (k = 0) is loaded without a compare. This
// starts each inference fresh. Ties go to the later class, because the
// comparator is >=.
// `class_id` is the maxID register. It is final in state BASE+R, i.e. one
// cycle after the last comparison. It holds until state BASE of the next
// inference.
//
// Follows the paper (Fig. 3b, Argmax; Sec. 3.1.3): the value branch with
// maxVal, the >= comparator, and the index branch with maxID.
// This design's own choices:
//  - The unconditional load at k = 0. Fig. 3b does not show how maxVal
//    starts.
//  - The comparator's operand order: new value >= maxVal.
module seq_argmax #(
  parameter int unsigned R       = 16,  // classes
  parameter int unsigned W       = 16,  // signed value width
  parameter int unsigned STATE_W = 9,
  parameter int unsigned BASE    = 278, // state of the first comparison (N+P)
  parameter int unsigned CLS_W   = mlp_pkg::idx_w(R)
) (
  input  logic                  clk,
  input  logic [STATE_W-1:0]    state,
  input  logic signed [W-1:0]   vals [R],
  output logic [CLS_W-1:0]      class_id,
  output logic signed [W-1:0]   max_val
);

  logic [STATE_W-1:0]  k;
  logic                active, first, ge;
  logic signed [W-1:0] cur;
  logic [CLS_W-1:0]    cur_id;

  always_comb begin
    k      = state - STATE_W'(BASE);
    active = (32'(k) < R) && (32'(state) >= BASE);
    first  = (k == '0);
    cur    = vals[0];                   // value multiplexer
    for (int unsigned i = 1; i < R; i++)
      if (32'(k) == i) cur = vals[i];
    cur_id = CLS_W'(k);                 // class-index multiplexer (constants 0..R-1)
    ge     = (cur >= max_val);          // the single comparator
  end

  always_ff @(posedge clk) begin
    if (active && (first || ge)) begin
      max_val  <= cur;
      class_id <= cur_id;
    end
  end

endmodule
