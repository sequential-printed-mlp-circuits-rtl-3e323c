// tb_layer_mux: checks the state-driven inter-layer multiplexer.
//
// NSRC = 5 sources and window BASE = 7. The state sweeps 0..63 with new
// random source values at every step. Inside the window, out must be source
// state-7. Outside it, out must be source 0.
module tb_layer_mux;
  localparam int unsigned NSRC = 5, W = 4, STATE_W = 6, BASE = 7;

  logic [STATE_W-1:0] state;
  logic [W-1:0] in [NSRC];
  logic [W-1:0] out;
  int checks = 0, failures = 0, e;

  layer_mux #(.NSRC(NSRC), .W(W), .STATE_W(STATE_W), .BASE(BASE)) dut (
    .state(state), .in(in), .out(out));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 4; rep++)
      for (int s = 0; s < (1 << STATE_W); s++) begin
        state = STATE_W'(s);
        foreach (in[i]) in[i] = W'($urandom);
        #1;
        e = (s >= BASE && s < BASE + NSRC) ? int'(in[s - BASE]) : int'(in[0]);
        checks++;
        if (int'(out) != e) begin
          failures++;
          $display("FAIL state=%0d out=%0d expected=%0d", s, out, e);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
