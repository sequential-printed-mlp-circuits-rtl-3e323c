// tb_mlp_layer: checks one layer with mixed exact and approximate neurons.
//
// NIN = 10 inputs, 4 neurons, of which neurons 1 and 2 are single-cycle
// approximations. The window starts at BASE = 3. The testbench plays the
// controller: a state counter 0..19 with rst in state 0 and en in states
// 3..12. It gives a new random input in every cycle. Inputs outside the
// window must not change anything. From state 13 on, every out[n] must
// equal the reference of mlp_ref_pkg for the inputs of the window. Exact
// neurons must give bias + sum of signed shifted inputs, and approximate
// neurons their two-bit estimate at the leading-1 column. 60 inferences are
// run, a few of them with all inputs at 15 so that the approximations reach
// their largest value.
module tb_mlp_layer;
  import mlp_ref_pkg::*;
  localparam int unsigned NIN = 10, NNEU = 4, IN_W = 4, W_BITS = 8;
  localparam int unsigned STATE_W = 5, BASE = 3, PERIOD = 20;
  localparam logic [31:0] SEED = 32'h1234_5678;
  localparam logic [NNEU-1:0] APPROX = 4'b0110;
  localparam int unsigned SUM_W = mlp_pkg::sum_w(NIN, IN_W, W_BITS);

  logic clk = 1'b0, rst, en;
  logic [STATE_W-1:0] state;
  logic [IN_W-1:0] inp;
  logic signed [SUM_W-1:0] out [NNEU];
  int checks = 0, failures = 0;
  int x [];
  longint e;
  int n_apx_nonzero = 0, n_neg = 0;

  mlp_layer #(.NIN(NIN), .NNEU(NNEU), .IN_W(IN_W), .W_BITS(W_BITS), .LAYER(0), .SEED(SEED),
              .APPROX(APPROX), .STATE_W(STATE_W), .BASE(BASE)) dut (
    .clk(clk), .rst(rst), .en(en), .state(state), .inp(inp), .out(out));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x = new[NIN];
    rst = 1'b0; en = 1'b0; state = '0; inp = '0;
    @(negedge clk);
    for (int t = 0; t < 60; t++) begin
      for (int i = 0; i < NIN; i++) x[i] = (t % 10 == 9) ? 15 : int'($urandom_range(0, 15));
      for (int s = 0; s < PERIOD; s++) begin
        state = STATE_W'(s);
        rst   = (s == 0);
        en    = (s >= BASE && s < BASE + NIN);
        inp   = en ? IN_W'(x[s - BASE]) : IN_W'($urandom);
        #1;
        if (s >= BASE + NIN) begin
          for (int n = 0; n < NNEU; n++) begin
            e = APPROX[n] ? approx_val(SEED, 0, n, NIN, IN_W, W_BITS, x)
                          : exact_sum(SEED, 0, n, NIN, IN_W, W_BITS, x);
            if (s == BASE + NIN) begin
              if (APPROX[n] && e != 0) n_apx_nonzero++;
              if (!APPROX[n] && e < 0) n_neg++;
            end
            checks++;
            if (longint'(out[n]) != e) begin
              failures++;
              $display("FAIL inference %0d state %0d neuron %0d: out=%0d expected=%0d",
                       t, s, n, out[n], e);
            end
          end
        end
        @(negedge clk);
      end
    end
    checks++;
    if (n_apx_nonzero == 0 || n_neg == 0) begin
      failures++;
      $display("FAIL approximate or negative sums never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
