// bias_array -- storage for the visible biases b and the hidden biases a.
//
// Like the weights, every bias is read on every clock (bias n by node n's
// update circuit), so the array is a bank of registers with all outputs
// exposed. Writes come from the memory controller: region REG_VBIAS stores
// data[B_W-1:0] as b[col], region REG_HBIAS as a[col]; indices outside the
// array are ignored. All biases reset to 0 (this design's choice).
//
// Timing: a write is visible on the outputs the clock after it is presented.
module bias_array #(
  parameter int unsigned NV  = rbm_pkg::NV_DEFAULT,
  parameter int unsigned NH  = rbm_pkg::NH_DEFAULT,
  parameter int unsigned B_W = rbm_pkg::B_W_DEFAULT
) (
  input  logic                  clk,
  input  logic                  rst,
  input  rbm_pkg::prog_wr_t     wr,
  output logic signed [B_W-1:0] vbias [NV],
  output logic signed [B_W-1:0] hbias [NH]
);
  import rbm_pkg::*;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NV; i++) vbias[i] <= '0;
      for (int j = 0; j < NH; j++) hbias[j] <= '0;
    end else if (wr.en) begin
      for (int i = 0; i < NV; i++)
        if (wr.region == REG_VBIAS && wr.col == COL_W'(i)) vbias[i] <= wr.data[B_W-1:0];
      for (int j = 0; j < NH; j++)
        if (wr.region == REG_HBIAS && wr.col == COL_W'(j)) hbias[j] <= wr.data[B_W-1:0];
    end
  end
endmodule
