// tb_seq_argmax: checks the sequential single-comparator argmax.
//
// R = 6 values of width 10 (signed) are held constant while the state runs
// from 0 to 31. The comparisons happen in states 4..9. In state 10 the
// outputs must show the class and value of the maximum; equal maxima go to
// the later class. 300 rounds are run: random values, rounds with only a few
// distinct values (ties), and rounds with all-negative values. The outputs
// must also hold through the rest of the sweep.
module tb_seq_argmax;
  localparam int unsigned R = 6, W = 10, STATE_W = 5, BASE = 4, CLS_W = 3;

  logic clk = 1'b0;
  logic [STATE_W-1:0] state;
  logic signed [W-1:0] vals [R];
  logic [CLS_W-1:0] class_id;
  logic signed [W-1:0] max_val;
  int checks = 0, failures = 0;
  int ecls, eval_, n_tie = 0, n_late = 0;

  seq_argmax #(.R(R), .W(W), .STATE_W(STATE_W), .BASE(BASE), .CLS_W(CLS_W)) dut (
    .clk(clk), .state(state), .vals(vals), .class_id(class_id), .max_val(max_val));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    state = '0;
    foreach (vals[i]) vals[i] = '0;
    @(negedge clk);
    for (int t = 0; t < 300; t++) begin
      int cnt;
      foreach (vals[i]) begin
        case (t % 3)
          0: vals[i] = W'($urandom);
          1: vals[i] = W'($urandom_range(0, 2) * 100 - 50);   // ties
          default: vals[i] = W'(-int'($urandom_range(1, 500)));
        endcase
      end
      ecls = 0; eval_ = int'(vals[0]); cnt = 1;
      for (int k = 1; k < R; k++) begin
        if (int'(vals[k]) > eval_) begin ecls = k; eval_ = int'(vals[k]); cnt = 1; end
        else if (int'(vals[k]) == eval_) begin ecls = k; cnt++; end
      end
      if (cnt > 1) n_tie++;
      if (ecls > 0) n_late++;
      for (int s = 0; s < (1 << STATE_W); s++) begin
        state = STATE_W'(s);
        #1;
        if (s >= BASE + R) begin
          checks++;
          if (int'(class_id) != ecls || int'(max_val) != eval_) begin
            failures++;
            $display("FAIL round %0d state %0d: class=%0d val=%0d expected %0d/%0d",
                     t, s, class_id, max_val, ecls, eval_);
          end
        end
        @(negedge clk);
      end
    end
    checks++;
    if (n_tie == 0 || n_late == 0) begin
      failures++;
      $display("FAIL ties or late winners never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
