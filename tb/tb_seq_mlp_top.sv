// tb_seq_mlp_top: end-to-end test of the classifier at its default size
// (N = 274 inputs, P = 4 hidden, R = 16 classes, 295 cycles per inference).
//
// The testbench stands in for the sensors and ADCs. It holds a feature
// vector x, and whenever adc_en is high it returns x[adc_sel] on `inp`. It
// runs 12 inferences back to back, with input patterns of several kinds:
// uniform random, all 15, all 0, low values, high values, and
// vectors aimed at driving one hidden neuron into saturation. For each
// inference it checks against mlp_ref_pkg:
//   - the qReLU activation of every hidden neuron in state N,
//   - the sum of every output neuron in state N+P,
//   - class_id and score in the valid cycle, and that valid comes every
//     N+P+R+1 = 295 cycles,
//   - that adc_sel counts 0..N-1 while adc_en is high.
// It also counts how often each mechanism of the design was exercised:
// subtraction of negative-weight products, single-cycle neuron estimates
// (hidden and output layer), qReLU clamping at zero and saturation,
// argmax winners after class 0, and back-to-back inferences. A mechanism
// that never occurs is a failure.
module tb_seq_mlp_top;
  import mlp_ref_pkg::*;
  localparam int unsigned N = mlp_pkg::N_IN_DEF, P = mlp_pkg::N_HID_DEF, R = mlp_pkg::N_OUT_DEF;
  localparam int unsigned IN_W = mlp_pkg::IN_W_DEF, W_BITS = mlp_pkg::W_BITS_DEF;
  localparam int unsigned ACT_W = mlp_pkg::ACT_W_DEF, QS = mlp_pkg::QRELU_SHIFT_DEF;
  localparam logic [31:0] SEED = mlp_pkg::SEED_DEF;
  localparam int unsigned PERIOD = N + P + R + 1;
  localparam int unsigned STATE_W = $clog2(N + P + R + 1);
  localparam int unsigned NINF = 12;

  logic clk = 1'b0, rst_ni = 1'b1;
  logic [IN_W-1:0] inp;
  logic [STATE_W-1:0] adc_sel;
  logic adc_en, valid;
  logic [mlp_pkg::idx_w(R)-1:0] class_id;
  logic signed [mlp_pkg::sum_w(P, ACT_W, W_BITS)-1:0] score;

  seq_mlp_top dut (
    .clk(clk), .rst_ni(rst_ni), .inp(inp), .adc_sel(adc_sel), .adc_en(adc_en),
    .class_id(class_id), .score(score), .valid(valid));

  always #5 clk = ~clk;

  int x [];
  int checks = 0, failures = 0;
  // mechanism counters
  int n_sub = 0, n_apx_hid = 0, n_apx_out = 0, n_q_zero = 0, n_q_sat = 0, n_q_mid = 0;
  int n_late_win = 0, n_b2b = 0;
  logic [63:0] hid_apx, out_apx;

  always_comb inp = (adc_en && int'(adc_sel) < N) ? IN_W'(x[adc_sel]) : '0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at t=%0t", what, $time);
    end
  endtask

  // Inferences 0..4: random, all 15, all 0, low, high. From inference 5 on,
  // the input favours hidden neuron j = (t-5) mod P: 15 where its weight is
  // positive, 0 where it is negative. This drives that neuron into
  // saturation.
  function automatic int pattern(input int t, input int i);
    int unsigned j;
    j = (t - 5) % P;
    case (t)
      0: return int'($urandom_range(0, 15));
      1: return 15;
      2: return 0;
      3: return int'($urandom_range(0, 3));
      4: return int'($urandom_range(12, 15));
      default: return mlp_pkg::weight_sgn(SEED, 0, j, i) ? 0 : 15;
    endcase
  endfunction

  initial begin
    repeat (PERIOD * (NINF + 3)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint hid [], osum [];
    int act [], cls;
    longint sc;
    int last_valid;
    hid_apx = 64'(dut.HID_APPROX);
    out_apx = 64'(dut.OUT_APPROX);
    x = new[N];
    foreach (x[i]) x[i] = 0;
    #1 rst_ni = 1'b0;
    @(negedge clk);
    @(negedge clk);
    rst_ni = 1'b1;
    last_valid = -1;
    for (int t = 0; t < NINF; t++) begin
      foreach (x[i]) x[i] = pattern(t, i);
      infer(SEED, N, P, R, IN_W, W_BITS, ACT_W, QS, hid_apx, out_apx, x, hid, act, osum, cls, sc);
      // mechanism bookkeeping from the reference
      for (int j = 0; j < P; j++) begin
        if (hid_apx[j]) begin
          if (hid[j] != 0) n_apx_hid++;
        end else begin
          for (int i = 0; i < N; i++)
            if (mlp_pkg::weight_sgn(SEED, 0, j, i) && x[i] != 0) n_sub++;
        end
        if (act[j] == 0) n_q_zero++;
        else if (act[j] == (1 << ACT_W) - 1) n_q_sat++;
        else n_q_mid++;
      end
      for (int k = 0; k < R; k++) if (out_apx[k] && osum[k] != 0) n_apx_out++;
      if (cls != 0) n_late_win++;
      // walk the states of one inference
      for (int s = 0; s < PERIOD; s++) begin
        #1;
        check(int'(adc_sel) == s, "adc_sel follows the state");
        check(adc_en == (s < N), "adc_en window");
        check(valid == (s == PERIOD - 1), "valid only in the last state");
        if (s == N)
          for (int j = 0; j < P; j++)
            check(int'(dut.hid_act[j]) == act[j], $sformatf("hidden activation %0d", j));
        if (s == N + P)
          for (int k = 0; k < R; k++)
            check(longint'(dut.out_sum[k]) == osum[k], $sformatf("output sum %0d", k));
        if (valid) begin
          check(int'(class_id) == cls, $sformatf("class (got %0d, expected %0d)", class_id, cls));
          check(longint'(score) == sc, "score");
          if (last_valid >= 0) begin
            check(t * int'(PERIOD) + s - last_valid == int'(PERIOD), "inference period");
            n_b2b++;
          end
          last_valid = t * int'(PERIOD) + s;
        end
        @(negedge clk);
      end
      $display("inference %0d: class %0d score %0d acts %p", t, cls, sc, act);
    end
    $display("mechanisms: subtractions=%0d approx_hidden=%0d approx_output=%0d qrelu_zero=%0d qrelu_sat=%0d qrelu_mid=%0d late_winner=%0d back_to_back=%0d",
             n_sub, n_apx_hid, n_apx_out, n_q_zero, n_q_sat, n_q_mid, n_late_win, n_b2b);
    check(n_sub > 0, "negative-weight subtraction exercised");
    check(n_apx_hid > 0, "hidden single-cycle neuron exercised");
    check(n_apx_out > 0, "output single-cycle neuron exercised");
    check(n_q_zero > 0, "qReLU clamp exercised");
    check(n_q_sat > 0, "qReLU saturation exercised");
    check(n_q_mid > 0, "qReLU linear range exercised");
    check(n_late_win > 0, "argmax update exercised");
    check(n_b2b > 0, "back-to-back inference exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
