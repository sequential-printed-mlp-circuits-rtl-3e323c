// tb_sc_neuron: checks the single-cycle approximate neuron.
//
// Parameters BIT0 = 3, BIT1 = 2, LEAD = 5. Each round puts a random value `a`
// on the input with en0 = 1. After a few cycles of unrelated input it puts `b`
// with en1 = 1. In that cycle and in the following idle cycles, out must
// equal (a[3] + b[2]) << 5, whatever the input does meanwhile. All four bit
// combinations occur, including the carry case 1 + 1.
module tb_sc_neuron;
  localparam int unsigned IN_W = 4, OUT_W = 12, BIT0 = 3, BIT1 = 2, LEAD = 5;

  logic clk = 1'b0, en0, en1;
  logic [IN_W-1:0] inp, a, b;
  logic signed [OUT_W-1:0] out;
  int checks = 0, failures = 0;
  int expv, seen[4];

  sc_neuron #(.IN_W(IN_W), .OUT_W(OUT_W), .BIT0(BIT0), .BIT1(BIT1), .LEAD(LEAD)) dut (
    .clk(clk), .en0(en0), .en1(en1), .inp(inp), .out(out));

  always #5 clk = ~clk;

  task automatic check_out(input string what);
    checks++;
    if (int'(out) != expv) begin
      failures++;
      $display("FAIL %s: out=%0d expected=%0d", what, out, expv);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en0 = 1'b0; en1 = 1'b0; inp = '0;
    seen = '{default: 0};
    @(negedge clk);
    for (int t = 0; t < 100; t++) begin
      a = IN_W'($urandom);
      b = IN_W'($urandom);
      en0 = 1'b1; inp = a;
      @(negedge clk);
      en0 = 1'b0;
      repeat ($urandom_range(0, 3)) begin
        inp = IN_W'($urandom);
        @(negedge clk);
      end
      en1 = 1'b1; inp = b;
      expv = (int'(a[BIT0]) + int'(b[BIT1])) << LEAD;
      seen[{a[BIT0], b[BIT1]}]++;
      #1 check_out("en1 cycle");
      @(negedge clk);
      en1 = 1'b0;
      repeat (2) begin
        inp = IN_W'($urandom);
        #1 check_out("hold");
        @(negedge clk);
      end
    end
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (seen[k] == 0) begin
        failures++;
        $display("FAIL bit combination %0d never driven", k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
