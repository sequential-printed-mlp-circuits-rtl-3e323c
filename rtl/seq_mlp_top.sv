// seq_mlp_top: hybrid sequential printed MLP classifier
// (N inputs, P hidden neurons, R classes).
//
// Instead of a fully parallel network, the circuit folds the MLP in time.
// The controller's counter state steps through N + P + R + 1 cycles per
// inference:
//   state 0 .. N-1      The sensor input x[state] arrives on `inp`, one per
//                       cycle. `adc_sel` = state names the sensor/ADC to
//                       sample, and `adc_en` is high. All hidden neurons
//                       consume it in parallel.
//   state N .. N+P-1    layer_mux forwards hidden activation state-N, after
//                       qReLU, to all output neurons.
//   state N+P .. N+P+R-1  seq_argmax compares output neuron state-N-P.
//   state N+P+R         valid = 1. class_id holds the winning class.
// The counter then wraps, and the next inference starts without a gap.
// `class_id` stays stable from the valid cycle until state N+P of the next
// inference.
//
// The only registers are the state counter, one accumulator per exact
// neuron, three bits per single-cycle neuron, and maxVal/maxID. All weights
// and biases are constants. HID_APPROX and OUT_APPROX select which neurons
// are single-cycle approximations. Their defaults follow the example of
// Fig. 3b: hidden neuron 1 and output neurons 2, 5 and 6.
//
// Follows the paper (Fig. 3b, Sec. 3.1): the block structure, the state
// windows, muxes in place of inter-layer shift registers, and qReLU on the
// hidden layer.
// This design's own choices:
//  - The reset pin and the valid flag.
//  - The ADC select/enable outputs.
//  - The qReLU shift and the activation width.
//  - The stand-in model in mlp_pkg.
module seq_mlp_top #(
  parameter int unsigned N           = mlp_pkg::N_IN_DEF,
  parameter int unsigned P           = mlp_pkg::N_HID_DEF,
  parameter int unsigned R           = mlp_pkg::N_OUT_DEF,
  parameter int unsigned IN_W        = mlp_pkg::IN_W_DEF,
  parameter int unsigned W_BITS      = mlp_pkg::W_BITS_DEF,
  parameter int unsigned ACT_W       = mlp_pkg::ACT_W_DEF,
  parameter int unsigned QRELU_SHIFT = mlp_pkg::QRELU_SHIFT_DEF,
  parameter logic [31:0] SEED        = mlp_pkg::SEED_DEF,
  parameter logic [P-1:0] HID_APPROX = P'(1 << 1),
  parameter logic [R-1:0] OUT_APPROX = R'((1 << 2) | (1 << 5) | (1 << 6)),
  parameter int unsigned STATE_W     = $clog2(N + P + R + 1),
  parameter int unsigned CLS_W       = mlp_pkg::idx_w(R)
) (
  input  logic               clk,
  input  logic               rst_ni,    // power-on reset, active low
  input  logic [IN_W-1:0]    inp,       // sensor value x[adc_sel] while adc_en
  output logic [STATE_W-1:0] adc_sel,   // which sensor/ADC to sample now
  output logic               adc_en,    // an input is consumed this cycle
  output logic [CLS_W-1:0]   class_id,  // winning class
  output logic signed [mlp_pkg::sum_w(P, ACT_W, W_BITS)-1:0] score,  // its output-layer sum
  output logic               valid      // class_id final for this inference
);

  localparam int unsigned HSUM_W = mlp_pkg::sum_w(N, IN_W, W_BITS);
  localparam int unsigned OSUM_W = mlp_pkg::sum_w(P, ACT_W, W_BITS);

  logic [STATE_W-1:0]       state;
  logic                     en0, en1, lrst, done;
  logic signed [HSUM_W-1:0] hid_sum [P];
  logic [ACT_W-1:0]         hid_act [P];
  logic [ACT_W-1:0]         ol_in;
  logic signed [OSUM_W-1:0] out_sum [R];

  seq_mlp_controller #(.N(N), .P(P), .R(R), .STATE_W(STATE_W)) u_ctrl (
    .clk(clk), .rst_ni(rst_ni), .state(state),
    .en0(en0), .en1(en1), .rst(lrst), .done(done)
  );

  mlp_layer #(
    .NIN(N), .NNEU(P), .IN_W(IN_W), .W_BITS(W_BITS), .LAYER(mlp_pkg::LAYER_HID),
    .SEED(SEED), .APPROX(HID_APPROX), .STATE_W(STATE_W), .BASE(0), .SUM_W(HSUM_W)
  ) u_hidden (
    .clk(clk), .rst(lrst), .en(en0), .state(state), .inp(inp), .out(hid_sum)
  );

  for (genvar j = 0; j < P; j++) begin : g_qrelu
    qrelu #(.IN_W(HSUM_W), .OUT_W(ACT_W), .SHIFT(QRELU_SHIFT)) u_qrelu (
      .in(hid_sum[j]), .out(hid_act[j])
    );
  end

  layer_mux #(.NSRC(P), .W(ACT_W), .STATE_W(STATE_W), .BASE(N)) u_mux (
    .state(state), .in(hid_act), .out(ol_in)
  );

  mlp_layer #(
    .NIN(P), .NNEU(R), .IN_W(ACT_W), .W_BITS(W_BITS), .LAYER(mlp_pkg::LAYER_OUT),
    .SEED(SEED), .APPROX(OUT_APPROX), .STATE_W(STATE_W), .BASE(N), .SUM_W(OSUM_W)
  ) u_output (
    .clk(clk), .rst(lrst), .en(en1), .state(state), .inp(ol_in), .out(out_sum)
  );

  seq_argmax #(.R(R), .W(OSUM_W), .STATE_W(STATE_W), .BASE(N + P), .CLS_W(CLS_W)) u_argmax (
    .clk(clk), .state(state), .vals(out_sum), .class_id(class_id), .max_val(score)
  );

  always_comb begin
    adc_sel = state;
    adc_en  = en0;
    valid   = done;
  end

endmodule
