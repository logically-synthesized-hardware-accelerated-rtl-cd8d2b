// clamp_array -- per-visible-node clamp registers.
//
// A clamped visible node is held at a fixed value instead of being sampled;
// the host clamps the known part of a problem and lets the sampler find the
// rest (for factorization: clamp the product bits, sample the factor bits;
// for multiplication: clamp the factors). Region REG_CLAMP writes node col:
// data[0] is the clamp enable and data[1] the clamped value. All nodes reset
// to unclamped (this design's choice). The original names clamp values as
// part of the programmable memory but gives no format; this one is this
// design's.
//
// Timing: a write is visible on the outputs the clock after it is presented.
module clamp_array #(
  parameter int unsigned NV = rbm_pkg::NV_DEFAULT
) (
  input  logic              clk,
  input  logic              rst,
  input  rbm_pkg::prog_wr_t wr,
  output logic [NV-1:0]     clamp_en,
  output logic [NV-1:0]     clamp_val
);
  import rbm_pkg::*;

  always_ff @(posedge clk) begin
    if (rst) begin
      clamp_en  <= '0;
      clamp_val <= '0;
    end else if (wr.en && wr.region == REG_CLAMP) begin
      for (int i = 0; i < NV; i++)
        if (wr.col == COL_W'(i)) begin
          clamp_en[i]  <= wr.data[0];
          clamp_val[i] <= wr.data[1];
        end
    end
  end
endmodule
