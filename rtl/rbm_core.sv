// rbm_core -- the RBM computing core: block Gibbs sampling, one sample per clock.
//
// Holds the model (weight_array, bias_array, clamp_array) and the two
// layers of node registers with their update circuits (node_layer x 2).
// On every enabled clock both layers update at the same time, each from the
// other layer's current registers:
//
//   h(t+1) ~ p(h | v(t)),   v(t+1) ~ p(v | h(t))
//
// Because the two layers never read their own values, there are no data
// hazards and a new visible sample appears every clock, as in the original
// design, which states a new visible sample per clock cycle. The
// simultaneous update means the register pairs (v(t), h(t+1)) on even and odd
// clocks form two interleaved, independent Gibbs chains; each of them is an
// ordinary alternating block-Gibbs chain. That reading of "one sample per
// clock" is this design's.
//
// The visible registers are the sample stream (`smp_data`, valid/ready). The
// core advances when `run` is high and the previous sample has been taken
// (`!smp_valid || smp_ready`); otherwise it stalls, with all node registers
// and LFSRs frozen, so no sample is lost and the chain simply pauses.
// `sample_taken` pulses on each advance; the new sample is valid the next
// clock.
module rbm_core #(
  parameter int unsigned NV       = rbm_pkg::NV_DEFAULT,
  parameter int unsigned NH       = rbm_pkg::NH_DEFAULT,
  parameter int unsigned W_W      = rbm_pkg::W_W_DEFAULT,
  parameter int unsigned B_W      = rbm_pkg::B_W_DEFAULT,
  parameter int unsigned FRAC     = rbm_pkg::FRAC_DEFAULT,
  parameter int unsigned LUT_IN_W = rbm_pkg::LUT_IN_W_DEF,
  parameter int unsigned P_W      = rbm_pkg::P_W_DEFAULT
) (
  input  logic              clk,
  input  logic              rst,
  input  rbm_pkg::prog_wr_t wr,
  input  logic              run,
  output logic              sample_taken,
  output logic              smp_valid,
  input  logic              smp_ready,
  output logic [NV-1:0]     smp_data,
  output logic [NH-1:0]     hidden
);
  logic signed [W_W-1:0] w    [NV][NH];
  logic signed [W_W-1:0] w_t  [NH][NV];
  logic signed [B_W-1:0] vbias [NV];
  logic signed [B_W-1:0] hbias [NH];
  logic [NV-1:0]         clamp_en, clamp_val;
  logic [NV-1:0]         visible;
  logic                  en;

  weight_array #(.NV(NV), .NH(NH), .W_W(W_W)) u_weights (
    .clk(clk), .rst(rst), .wr(wr), .w(w)
  );

  bias_array #(.NV(NV), .NH(NH), .B_W(B_W)) u_biases (
    .clk(clk), .rst(rst), .wr(wr), .vbias(vbias), .hbias(hbias)
  );

  clamp_array #(.NV(NV)) u_clamps (
    .clk(clk), .rst(rst), .wr(wr), .clamp_en(clamp_en), .clamp_val(clamp_val)
  );

  // Hidden node m reads column m of W.
  for (genvar j = 0; j < NH; j++) begin : g_col
    for (genvar i = 0; i < NV; i++) begin : g_row
      assign w_t[j][i] = w[i][j];
    end
  end

  assign en           = run && (!smp_valid || smp_ready);
  assign sample_taken = en;

  node_layer #(
    .N(NV), .N_IN(NH), .W_W(W_W), .B_W(B_W), .FRAC(FRAC),
    .LUT_IN_W(LUT_IN_W), .P_W(P_W), .LAYER(0)
  ) u_visible (
    .clk(clk), .rst(rst), .en(en), .other(hidden), .w(w), .bias(vbias),
    .clamp_en(clamp_en), .clamp_val(clamp_val), .state(visible)
  );

  node_layer #(
    .N(NH), .N_IN(NV), .W_W(W_W), .B_W(B_W), .FRAC(FRAC),
    .LUT_IN_W(LUT_IN_W), .P_W(P_W), .LAYER(1)
  ) u_hidden (
    .clk(clk), .rst(rst), .en(en), .other(visible), .w(w_t), .bias(hbias),
    .clamp_en('0), .clamp_val('0), .state(hidden)
  );

  always_ff @(posedge clk) begin
    if (rst)            smp_valid <= 1'b0;
    else if (en)        smp_valid <= 1'b1;
    else if (smp_ready) smp_valid <= 1'b0;
  end

  assign smp_data = visible;

  assert property (@(posedge clk) disable iff (rst)
                   smp_valid && !smp_ready |=> smp_valid && $stable(smp_data))
    else $error("rbm_core: sample changed before it was taken");
endmodule
