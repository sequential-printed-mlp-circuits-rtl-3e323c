// seq_mlp_controller: the counter state machine that sequences one inference.
//
// A single counter `state` runs 0, 1, ..., MAXST = N+P+R and then wraps to 0.
// Every other block decodes this one value, so no data is ever shifted
// between layers. The windows are:
//   state 0 .. N-1       en0 = 1 : hidden layer takes input x[state]
//   state N .. N+P-1     en1 = 1 : output layer takes hidden activation state-N
//   state N+P .. N+P+R-1           argmax compares output neuron state-N-P
//   state MAXST          done = 1: class output is valid this cycle
// rst is high in state 0. It loads each accumulator with its bias, and the
// hidden layer adds its first product in the same cycle. One inference
// therefore takes MAXST+1 = N+P+R+1 clock cycles.
//
// Follows the paper:
//  - The increment/wrap counter with wrap at maxST = N+P+R.
//  - The windows en0 = (state < N) and en1 = (N <= state < N+P), as printed
//    in Fig. 3b. The text instead writes them with closed bounds.
//  - One layer reset per inference.
// This design's own choices:
//  - The asynchronous active-low power-on reset rst_ni, which clears the
//    counter.
//  - The layer reset placed in state 0.
//  - The done flag.
module seq_mlp_controller #(
  parameter int unsigned N       = mlp_pkg::N_IN_DEF,   // inputs
  parameter int unsigned P       = mlp_pkg::N_HID_DEF,  // hidden neurons
  parameter int unsigned R       = mlp_pkg::N_OUT_DEF,  // output neurons
  parameter int unsigned STATE_W = $clog2(N + P + R + 1)
) (
  input  logic               clk,
  input  logic               rst_ni,  // power-on reset, active low
  output logic [STATE_W-1:0] state,   // shared state value
  output logic               en0,     // hidden layer enable
  output logic               en1,     // output layer enable
  output logic               rst,     // per-inference layer reset (bias load)
  output logic               done     // last state: class output valid
);

  localparam logic [STATE_W-1:0] MAXST = STATE_W'(N + P + R);

  always_ff @(posedge clk or negedge rst_ni) begin
    if (!rst_ni)             state <= '0;
    else if (state == MAXST) state <= '0;
    else                     state <= state + 1'b1;
  end

  always_comb begin
    en0  = (32'(state) < N);
    en1  = (32'(state) >= N) && (32'(state) < N + P);
    rst  = (state == '0);
    done = (state == MAXST);
  end

  // Rules of the schedule, checked from the first clock edge (the counter
  // must have been reset before it): the state stays in range and the two
  // layer windows never overlap.
  always_ff @(posedge clk) begin
    assert (state <= MAXST) else $error("state %0d beyond maxST", state);
    assert (!(en0 && en1)) else $error("hidden and output windows overlap");
  end

  initial begin
    assert (N >= 1 && P >= 1 && R >= 1) else $error("N, P and R must be at least 1");
  end

endmodule
