// node_layer -- the node registers of one RBM layer and their update circuits.
//
// One node_update circuit per node register: on every clock with `en` high,
// all N registers of the layer load their new sample at once, computed from
// the other layer's current register values `other`. Since the RBM has no
// connections inside a layer, all nodes of a layer are conditionally
// independent and this parallel update is an exact block-Gibbs step. The
// accelerator instantiates this module twice: once as the visible node
// registers (N = NV, inputs = hidden nodes, row n of W for node n) and once as
// the hidden node registers (N = NH, inputs = visible nodes, column m of W).
//
// Every node's LFSR gets its own seed, rbm_pkg::lfsr_seed(LAYER, index).
// Registers reset to 0 (this design's choice; the original does not say).
//
// Timing: `state` is registered; it changes one clock after an enabled edge.
module node_layer #(
  parameter int unsigned N        = rbm_pkg::NV_DEFAULT,
  parameter int unsigned N_IN     = rbm_pkg::NH_DEFAULT,
  parameter int unsigned W_W      = rbm_pkg::W_W_DEFAULT,
  parameter int unsigned B_W      = rbm_pkg::B_W_DEFAULT,
  parameter int unsigned FRAC     = rbm_pkg::FRAC_DEFAULT,
  parameter int unsigned LUT_IN_W = rbm_pkg::LUT_IN_W_DEF,
  parameter int unsigned P_W      = rbm_pkg::P_W_DEFAULT,
  parameter int unsigned LAYER    = 0
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  en,
  input  logic [N_IN-1:0]       other,
  input  logic signed [W_W-1:0] w [N][N_IN],
  input  logic signed [B_W-1:0] bias [N],
  input  logic [N-1:0]          clamp_en,
  input  logic [N-1:0]          clamp_val,
  output logic [N-1:0]          state
);
  logic [N-1:0] next;

  for (genvar n = 0; n < N; n++) begin : g_node
    logic [P_W-1:0] p_unused;
    node_update #(
      .N_IN(N_IN), .W_W(W_W), .B_W(B_W), .FRAC(FRAC),
      .LUT_IN_W(LUT_IN_W), .P_W(P_W),
      .SEED(rbm_pkg::lfsr_seed(LAYER, n))
    ) u_node (
      .clk(clk), .rst(rst), .en(en),
      .other(other), .w(w[n]), .bias(bias[n]),
      .clamp_en(clamp_en[n]), .clamp_val(clamp_val[n]),
      .p(p_unused), .next(next[n])
    );
  end

  always_ff @(posedge clk) begin
    if (rst)     state <= '0;
    else if (en) state <= next;
  end
endmodule
