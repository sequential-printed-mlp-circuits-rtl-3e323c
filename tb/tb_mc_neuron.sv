// tb_mc_neuron: checks the exact multi-cycle neuron against integer arithmetic.
//
// The neuron gets a fixed 6-entry weight table with positive and negative
// weights, a common power PMIN = 2 and a negative bias. Each inference drives
// rst with the first input, then the remaining inputs with en = 1. Then
// come idle cycles with en = 0 and a random sel, in which the sum must hold.
// Every cycle, `out` is compared with the running sum
// 4 * (BIAS + sum (-1)^s * x * 2^POW) computed here. Inference windows of
// random inputs are repeated 40 times, and a few all-ones inputs (x = 15)
// exercise the widest products.
module tb_mc_neuron;
  localparam int unsigned NIN = 6, IN_W = 4, W_BITS = 8;
  localparam int unsigned PW = 3, SEL_W = 3;
  localparam int unsigned SUM_W = mlp_pkg::sum_w(NIN, IN_W, W_BITS);
  localparam logic [PW-1:0] POW [NIN] = '{3'd0, 3'd5, 3'd2, 3'd7, 3'd1, 3'd4};
  localparam logic          SGN [NIN] = '{1'b0, 1'b1, 1'b0, 1'b1, 1'b1, 1'b0};
  localparam int unsigned PMIN = 2;
  localparam longint BIAS = -37;

  logic clk = 1'b0, rst, en;
  logic [SEL_W-1:0] sel;
  logic [IN_W-1:0] inp;
  logic signed [SUM_W-1:0] out;
  int checks = 0, failures = 0;
  longint acc;

  mc_neuron #(.NIN(NIN), .IN_W(IN_W), .W_BITS(W_BITS), .PW(PW), .SEL_W(SEL_W), .SUM_W(SUM_W),
              .POW(POW), .SGN(SGN), .PMIN(PMIN), .BIAS(BIAS)) dut (
    .clk(clk), .rst(rst), .en(en), .sel(sel), .inp(inp), .out(out));

  always #5 clk = ~clk;

  task automatic check_out(input string what);
    checks++;
    if (longint'(out) != acc * (longint'(1) << PMIN)) begin
      failures++;
      $display("FAIL %s: out=%0d expected=%0d", what, out, acc * (longint'(1) << PMIN));
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
    rst = 1'b0; en = 1'b0; sel = '0; inp = '0;
    @(negedge clk);
    for (int t = 0; t < 44; t++) begin
      for (int i = 0; i < NIN; i++) begin
        rst = (i == 0);
        en  = 1'b1;
        sel = SEL_W'(i);
        inp = (t >= 40) ? 4'hF : IN_W'($urandom);
        if (i == 0) acc = BIAS;
        acc += (SGN[i] ? -1 : 1) * longint'(inp) * (longint'(1) << POW[i]);
        #1 check_out("accumulate");
        @(negedge clk);
      end
      repeat (3) begin
        rst = 1'b0; en = 1'b0;
        sel = SEL_W'($urandom);
        inp = IN_W'($urandom);
        #1 check_out("hold");
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
