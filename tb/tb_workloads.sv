// tb_workloads: runs the classifier at the sizes of the evaluated datasets.
//
// Each wl_runner elaborates its own bespoke circuit: N inputs, P hidden
// neurons, R classes and the weight resolution W_BITS. It then checks
// several inferences against the reference model. The datasets:
//   SPECTF       N = 44,  R = 2   (smallest input count of the evaluation)
//   Arrhythmia   N = 274, R = 16, P = 4  (274*4 + 4*16 = 1160 coefficients)
//   Gas Sensor   N = 128, R = 6
//   Epileptic    N = 178, R = 5
//   Parkinsons   N = 753, R = 2   (largest input count of the evaluation)
//   HAR          N = 561, R = 6, P = 15, 14-bit weights
//                (561*15 + 15*6 = 8505 coefficients)
// Where the hidden-layer size is not known, P = 4 is used, from the 3-5
// hidden neurons typical of these models. The weights are the stand-in
// model of mlp_pkg, not trained ones, so only the sizes and the timing
// match the datasets.
module tb_workloads;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NW = 6;
  logic fin [NW];
  int c [NW], f [NW];

  wl_runner #(.NAME("SPECTF"),     .N(44),  .P(4),  .R(2),  .W_BITS(8))  u_spectf (.clk(clk), .finished(fin[0]), .checks(c[0]), .failures(f[0]));
  wl_runner #(.NAME("Arrhythmia"), .N(274), .P(4),  .R(16), .W_BITS(8))  u_arr    (.clk(clk), .finished(fin[1]), .checks(c[1]), .failures(f[1]));
  wl_runner #(.NAME("GasSensor"),  .N(128), .P(4),  .R(6),  .W_BITS(8))  u_gas    (.clk(clk), .finished(fin[2]), .checks(c[2]), .failures(f[2]));
  wl_runner #(.NAME("Epileptic"),  .N(178), .P(4),  .R(5),  .W_BITS(8))  u_epi    (.clk(clk), .finished(fin[3]), .checks(c[3]), .failures(f[3]));
  wl_runner #(.NAME("Parkinsons"), .N(753), .P(4),  .R(2),  .W_BITS(8))  u_par    (.clk(clk), .finished(fin[4]), .checks(c[4]), .failures(f[4]));
  wl_runner #(.NAME("HAR"),        .N(561), .P(15), .R(6),  .W_BITS(14)) u_har    (.clk(clk), .finished(fin[5]), .checks(c[5]), .failures(f[5]));

  int checks, failures;

  initial begin
    repeat (6 * 800) @(posedge clk);
    failures = 1;
    foreach (f[i]) failures += f[i];
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", 0, failures);
    $finish;
  end

  initial begin
    bit all;
    do begin
      @(posedge clk);
      all = 1'b1;
      foreach (fin[i]) all &= fin[i];
    end while (!all);
    checks = 0; failures = 0;
    foreach (c[i]) begin
      checks += c[i];
      failures += f[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
