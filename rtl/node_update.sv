// node_update -- the update circuit of one RBM neuron.
//
// Computes the Gibbs-sampling update of one node from the binary state of
// the other layer:
//
//   field = bias + sum_i (other[i] ? w[i] : 0)        (masked_adder_tree)
//   p     = sigmoid(field)                             (sigmoid_lut)
//   fire  = rnd < p                                    (rnd from lfsr32)
//
// so the node becomes 1 with probability sigma(field). Weights and bias are
// signed fixed-point numbers with the same binary point (FRAC fractional
// bits), so the bias adds directly to the row sum. The field is saturated to
// the range of the sigmoid table before the look-up. A clamped node ignores
// all of this and takes its clamp value; this is how the host fixes the
// known bits of a problem (for factorization, the bits of the product).
//
// The mask / adder tree / bias adder / sigmoid LUT / PRNG / comparator chain
// and its single-cycle evaluation follow the original design; the
// saturation, the use of the top P_W bits of the LFSR as the random number,
// and the clamp multiplexer at the output are this design's choices.
//
// Interface and timing: everything is combinational from `other`, `w`,
// `bias` and the clamp inputs to `next`, which the enclosing node_layer
// registers. The node's own LFSR advances on every clock with `en` high, so
// each update uses a fresh random number. `p` is exported for observation.
module node_update #(
  parameter int unsigned  N_IN     = rbm_pkg::NH_DEFAULT,
  parameter int unsigned  W_W      = rbm_pkg::W_W_DEFAULT,
  parameter int unsigned  B_W      = rbm_pkg::B_W_DEFAULT,
  parameter int unsigned  FRAC     = rbm_pkg::FRAC_DEFAULT,
  parameter int unsigned  LUT_IN_W = rbm_pkg::LUT_IN_W_DEF,
  parameter int unsigned  P_W      = rbm_pkg::P_W_DEFAULT,
  parameter logic [31:0]  SEED     = 32'h1
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   en,
  input  logic [N_IN-1:0]        other,
  input  logic signed [W_W-1:0]  w [N_IN],
  input  logic signed [B_W-1:0]  bias,
  input  logic                   clamp_en,
  input  logic                   clamp_val,
  output logic [P_W-1:0]         p,
  output logic                   next
);
  localparam int unsigned SUM_W   = W_W + $clog2(N_IN + 1);
  localparam int unsigned FIELD_W = ((SUM_W > B_W) ? SUM_W : B_W) + 1;

  logic signed [SUM_W-1:0]    row_sum;
  logic signed [FIELD_W-1:0]  field;
  logic signed [LUT_IN_W-1:0] field_sat;
  logic [31:0]                rnd_state;

  masked_adder_tree #(.N(N_IN), .W_W(W_W), .SUM_W(SUM_W)) u_adder (
    .mask(other), .w(w), .sum(row_sum)
  );

  localparam logic signed [FIELD_W-1:0] LUT_MAX = FIELD_W'((longint'(1) << (LUT_IN_W - 1)) - 1);
  localparam logic signed [FIELD_W-1:0] LUT_MIN = -FIELD_W'(longint'(1) << (LUT_IN_W - 1));

  always_comb begin
    field = FIELD_W'(row_sum) + FIELD_W'(bias);
    if (field > LUT_MAX)      field_sat = LUT_IN_W'(LUT_MAX);
    else if (field < LUT_MIN) field_sat = LUT_IN_W'(LUT_MIN);
    else                      field_sat = LUT_IN_W'(field);
  end

  sigmoid_lut #(.IN_W(LUT_IN_W), .FRAC(FRAC), .P_W(P_W)) u_sigmoid (
    .x(field_sat), .p(p)
  );

  lfsr32 #(.SEED(SEED)) u_prng (
    .clk(clk), .rst(rst), .en(en), .state(rnd_state)
  );

  always_comb begin
    if (clamp_en) next = clamp_val;
    else          next = (rnd_state[31 -: P_W] < p);
  end

  initial assert (P_W <= 32) else $fatal(1, "node_update: P_W must not exceed the LFSR width");
  initial assert (LUT_IN_W <= FIELD_W) else $fatal(1, "node_update: LUT wider than the field");
endmodule
