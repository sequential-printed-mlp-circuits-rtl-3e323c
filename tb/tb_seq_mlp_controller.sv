// tb_seq_mlp_controller: checks the state counter and its decoded windows.
//
// With N=5, P=3, R=4 the counter must run 0..12 and wrap, with
// en0 on states 0..4, en1 on 5..7, rst on state 0 and done on state 12.
// An independent counter in the testbench gives the expected values every
// cycle. The testbench also applies a reset in mid-run and checks the
// period: 13 cycles from one done to the next.
module tb_seq_mlp_controller;
  localparam int unsigned N = 5, P = 3, R = 4;
  localparam int unsigned MAXST = N + P + R;
  localparam int unsigned SW = $clog2(MAXST + 1);

  logic clk = 1'b0, rst_ni = 1'b1;
  logic [SW-1:0] state;
  logic en0, en1, rst, done;
  int checks = 0, failures = 0;
  int exp_state, last_done, ndone;

  seq_mlp_controller #(.N(N), .P(P), .R(R)) dut (
    .clk(clk), .rst_ni(rst_ni), .state(state), .en0(en0), .en1(en1), .rst(rst), .done(done)
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at t=%0t state=%0d exp=%0d", what, $time, state, exp_state);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    exp_state = 0; last_done = -1; ndone = 0;
    #1 rst_ni = 1'b0;
    repeat (2) @(negedge clk);
    rst_ni = 1'b1;
    for (int cyc = 0; cyc < 60; cyc++) begin
      check(int'(state) == exp_state, "state");
      check(en0 == (exp_state < N), "en0");
      check(en1 == (exp_state >= N && exp_state < N + P), "en1");
      check(rst == (exp_state == 0), "rst");
      check(done == (exp_state == MAXST), "done");
      if (done) begin
        if (last_done >= 0) check(cyc - last_done == MAXST + 1, "period");
        last_done = cyc;
        ndone++;
      end
      exp_state = (exp_state == MAXST) ? 0 : exp_state + 1;
      @(negedge clk);
    end
    check(ndone >= 4, "wraps");
    // Reset in mid-run returns the counter to 0.
    rst_ni = 1'b0;
    #1;
    check(state == '0, "async reset");
    @(negedge clk);
    rst_ni = 1'b1;
    exp_state = 0;
    for (int cyc = 0; cyc < 20; cyc++) begin
      check(int'(state) == exp_state, "state after reset");
      exp_state = (exp_state == MAXST) ? 0 : exp_state + 1;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
