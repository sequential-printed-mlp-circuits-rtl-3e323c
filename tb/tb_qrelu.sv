// tb_qrelu: checks the quantized ReLU (16-bit signed in, 4-bit out, 3 LSBs
// dropped). It uses corner values around zero, around the saturation point
// 15 * 8 = 120, and the extremes, plus 2000 random values. Each must map to
// min(max(v, 0) / 8, 15).
module tb_qrelu;
  localparam int unsigned IN_W = 16, OUT_W = 4, SHIFT = 3;

  logic signed [IN_W-1:0] in;
  logic [OUT_W-1:0] out;
  int checks = 0, failures = 0;
  int n_zero = 0, n_sat = 0, n_mid = 0;

  qrelu #(.IN_W(IN_W), .OUT_W(OUT_W), .SHIFT(SHIFT)) dut (.in(in), .out(out));

  function automatic int ref_q(input int v);
    int t;
    if (v < 0) return 0;
    t = v / 8;
    return (t > 15) ? 15 : t;
  endfunction

  task automatic apply(input int v);
    int e;
    in = IN_W'(v);
    #1;
    e = ref_q(int'(in));
    checks++;
    if (int'(out) != e) begin
      failures++;
      $display("FAIL in=%0d out=%0d expected=%0d", in, out, e);
    end
    if (e == 0) n_zero++; else if (e == 15) n_sat++; else n_mid++;
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply(0); apply(-1); apply(7); apply(8); apply(119); apply(120); apply(127); apply(128);
    apply(32767); apply(-32768); apply(65);
    for (int k = 0; k < 2000; k++) apply(int'($urandom_range(0, 400)) - 100);
    checks++;
    if (n_zero == 0 || n_sat == 0 || n_mid == 0) begin
      failures++;
      $display("FAIL a region was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
