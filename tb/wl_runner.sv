// wl_runner: builds the classifier at one dataset's size, runs it, and
// scores it against mlp_ref_pkg. Used by tb_workloads.
//
// It plays the sensors: while adc_en is high it returns x[adc_sel]. It runs
// NINF back-to-back inferences. They alternate between uniform random inputs
// and vectors that push one hidden neuron to saturation. In each valid cycle
// it compares class_id and score with the reference and checks the
// inference period N+P+R+1. The qReLU shift grows with the weight range and
// with log2(N)/2 (the spread of a sum of N random-sign terms), so that the
// activations use their range at every size.
// When it is finished, `finished` goes high and checks/failures hold the
// counts.
module wl_runner #(
  parameter string       NAME   = "wl",
  parameter int unsigned N      = 44,
  parameter int unsigned P      = 4,
  parameter int unsigned R      = 2,
  parameter int unsigned W_BITS = 8,
  parameter int unsigned NINF   = 4
) (
  input  logic clk,
  output logic finished,
  output int   checks,
  output int   failures
);
  import mlp_ref_pkg::*;
  localparam int unsigned IN_W = 4, ACT_W = 4;
  localparam int unsigned QS = IN_W + W_BITS - 7 + $clog2(N) / 2;
  localparam logic [31:0] SEED = 32'hC0FF_EE00 ^ 32'(N);
  localparam int unsigned PERIOD = N + P + R + 1;
  localparam int unsigned STATE_W = $clog2(N + P + R + 1);
  localparam logic [P-1:0] HAPX = P'(2);              // hidden neuron 1 single-cycle
  localparam logic [R-1:0] OAPX = R'(1 << (R - 1));   // last output neuron single-cycle

  logic rst_ni = 1'b1;
  logic [IN_W-1:0] inp;
  logic [STATE_W-1:0] adc_sel;
  logic adc_en, valid;
  logic [mlp_pkg::idx_w(R)-1:0] class_id;
  logic signed [mlp_pkg::sum_w(P, ACT_W, W_BITS)-1:0] score;
  int x [];

  seq_mlp_top #(.N(N), .P(P), .R(R), .IN_W(IN_W), .W_BITS(W_BITS), .ACT_W(ACT_W),
                .QRELU_SHIFT(QS), .SEED(SEED), .HID_APPROX(HAPX), .OUT_APPROX(OAPX)) dut (
    .clk(clk), .rst_ni(rst_ni), .inp(inp), .adc_sel(adc_sel), .adc_en(adc_en),
    .class_id(class_id), .score(score), .valid(valid));

  always_comb inp = (adc_en && int'(adc_sel) < N) ? IN_W'(x[adc_sel]) : '0;

  initial begin
    longint hid [], osum [];
    int act [], cls, ncls;
    longint sc;
    int cyc;
    finished = 1'b0; checks = 0; failures = 0; ncls = 0;
    x = new[N];
    foreach (x[i]) x[i] = 0;
    #1 rst_ni = 1'b0;
    @(negedge clk);
    rst_ni = 1'b1;
    for (int t = 0; t < NINF; t++) begin
      foreach (x[i])
        x[i] = (t % 2 == 0) ? int'($urandom_range(0, 15))
                            : (mlp_pkg::weight_sgn(SEED, 0, (t / 2) % P, i) ? 0 : 15);
      infer(SEED, N, P, R, IN_W, W_BITS, ACT_W, QS, 64'(HAPX), 64'(OAPX), x, hid, act, osum,
            cls, sc);
      cyc = 0;
      while (!valid) begin
        @(negedge clk);
        cyc++;
      end
      checks += 3;
      if (int'(class_id) != cls || longint'(score) != sc) begin
        failures++;
        $display("FAIL %s inference %0d: class %0d score %0d, expected %0d %0d",
                 NAME, t, class_id, score, cls, sc);
      end
      // The first inference starts right after reset, in state 0.
      if (cyc != int'(PERIOD) - 1) begin
        failures++;
        $display("FAIL %s inference %0d took %0d cycles", NAME, t, cyc + 1);
      end
      if (cls != 0) ncls++;
      if (act.sum() == 0 && t % 2 == 1) begin
        failures++;
        $display("FAIL %s inference %0d: no hidden activation", NAME, t);
      end
      @(negedge clk);
    end
    $display("%s: N=%0d P=%0d R=%0d W_BITS=%0d, %0d cycles per inference, %0d inferences, %0d with class>0",
             NAME, N, P, R, W_BITS, PERIOD, NINF, ncls);
    finished = 1'b1;
  end
endmodule
