// mlp_layer: one fully connected layer of the hybrid sequential MLP.
//
// All neurons of the layer see the same input word `inp`, one input per
// cycle, while the layer enable `en` is high. The index of the current input
// is sel = state - BASE. No input is ever stored. Each neuron is one of two
// kinds, chosen by bit n of APPROX:
//   APPROX[n] = 0: mc_neuron. An exact pow2 multiply-accumulate over all NIN
//                  inputs, with weights hardwired as mux tables.
//   APPROX[n] = 1: sc_neuron. The approximation from two input bits. Its
//                  enables are decoded here as en0 = en & (sel == IDX0) and
//                  en1 = en & (sel == IDX1).
// The constants come from the model functions of mlp_pkg, evaluated at
// elaboration for (SEED, LAYER, n). This makes the layer bespoke in the same
// way as a generated netlist. out[n] is the neuron's full-scale signed sum.
// It is final once the window BASE .. BASE+NIN-1 has passed and holds until
// the next rst.
//
// Follows the paper (Fig. 3b, Sec. 3.1.3): the same layer structure serves
// as hidden and as output layer, and exact and approximate neurons mix
// within one layer.
// This design's own choices: the decoding of en0/en1 from the state, and the
// model functions themselves (see mlp_pkg).
module mlp_layer #(
  parameter int unsigned NIN     = mlp_pkg::N_IN_DEF,
  parameter int unsigned NNEU    = mlp_pkg::N_HID_DEF,
  parameter int unsigned IN_W    = mlp_pkg::IN_W_DEF,
  parameter int unsigned W_BITS  = mlp_pkg::W_BITS_DEF,
  parameter int unsigned LAYER   = mlp_pkg::LAYER_HID,
  parameter logic [31:0] SEED    = mlp_pkg::SEED_DEF,
  parameter logic [NNEU-1:0] APPROX = '0,
  parameter int unsigned STATE_W = 9,
  parameter int unsigned BASE    = 0,
  parameter int unsigned SUM_W   = mlp_pkg::sum_w(NIN, IN_W, W_BITS)
) (
  input  logic                    clk,
  input  logic                    rst,             // per-inference reset (bias load)
  input  logic                    en,              // layer window
  input  logic [STATE_W-1:0]      state,
  input  logic [IN_W-1:0]         inp,
  output logic signed [SUM_W-1:0] out [NNEU]
);

  localparam int unsigned PW    = mlp_pkg::pow_w(W_BITS);
  localparam int unsigned SEL_W = mlp_pkg::idx_w(NIN);

  typedef logic [PW-1:0] pow_tab_t [NIN];
  typedef logic          sgn_tab_t [NIN];

  function automatic pow_tab_t pow_table(input int unsigned n);
    pow_tab_t t;
    int unsigned pm;
    pm = mlp_pkg::neuron_pmin(SEED, LAYER, n, W_BITS);
    for (int unsigned i = 0; i < NIN; i++)
      t[i] = PW'(mlp_pkg::weight_pow(SEED, LAYER, n, i, W_BITS) - pm);
    return t;
  endfunction

  function automatic sgn_tab_t sgn_table(input int unsigned n);
    sgn_tab_t t;
    for (int unsigned i = 0; i < NIN; i++)
      t[i] = mlp_pkg::weight_sgn(SEED, LAYER, n, i);
    return t;
  endfunction

  logic [STATE_W-1:0] idx;
  logic [SEL_W-1:0]   sel;

  always_comb begin
    idx = state - STATE_W'(BASE);
    sel = SEL_W'(idx);
  end

  for (genvar n = 0; n < NNEU; n++) begin : g_neuron
    if (APPROX[n]) begin : g_single
      localparam int unsigned IDX0 = mlp_pkg::approx_first(SEED, LAYER, n, NIN, W_BITS);
      localparam int unsigned IDX1 = mlp_pkg::approx_second(SEED, LAYER, n, NIN, W_BITS);
      logic en0_n, en1_n;
      initial assert (IDX0 < IDX1) else $error("single-cycle neuron %0d needs two inputs", n);
      always_comb begin
        en0_n = en && (32'(idx) == IDX0);
        en1_n = en && (32'(idx) == IDX1);
      end
      sc_neuron #(
        .IN_W (IN_W),
        .OUT_W(SUM_W),
        .BIT0 (mlp_pkg::approx_bit(IN_W)),
        .BIT1 (mlp_pkg::approx_bit(IN_W)),
        .LEAD (mlp_pkg::approx_lead(SEED, LAYER, n, NIN, IN_W, W_BITS))
      ) u_sc (
        .clk(clk), .en0(en0_n), .en1(en1_n), .inp(inp), .out(out[n])
      );
    end else begin : g_multi
      mc_neuron #(
        .NIN   (NIN),
        .IN_W  (IN_W),
        .W_BITS(W_BITS),
        .PW    (PW),
        .SEL_W (SEL_W),
        .SUM_W (SUM_W),
        .POW   (pow_table(n)),
        .SGN   (sgn_table(n)),
        .PMIN  (mlp_pkg::neuron_pmin(SEED, LAYER, n, W_BITS)),
        .BIAS  (mlp_pkg::bias_red(SEED, LAYER, n, IN_W, W_BITS))
      ) u_mc (
        .clk(clk), .rst(rst), .en(en), .sel(sel), .inp(inp), .out(out[n])
      );
    end
  end

endmodule
