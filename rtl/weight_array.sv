// weight_array -- storage for the NV x NH weight matrix of the RBM.
//
// Every weight is read on every clock: row n goes to visible node n's update
// circuit and column m to hidden node m's, so the whole matrix is broadcast
// each cycle. The array is therefore a bank of registers with all outputs
// exposed, not a single-ported RAM. (The original keeps weights in on-chip
// memory and broadcasts them each cycle; its flip-flop count for the 80 x 600
// RBM, 431,544, is about the 384,000 weight bits, which agrees with a
// register implementation.)
//
// Writes come from the memory controller as prog_wr_t bundles: a write with
// region REG_WEIGHT stores data[W_W-1:0] at W[row][col], one weight per
// clock. Rows and columns outside the array are ignored. All weights reset to
// 0 (this design's choice), so an unprogrammed node contributes nothing.
//
// Timing: a write is visible on `w` the clock after it is presented.
module weight_array #(
  parameter int unsigned NV  = rbm_pkg::NV_DEFAULT,
  parameter int unsigned NH  = rbm_pkg::NH_DEFAULT,
  parameter int unsigned W_W = rbm_pkg::W_W_DEFAULT
) (
  input  logic                  clk,
  input  logic                  rst,
  input  rbm_pkg::prog_wr_t     wr,
  output logic signed [W_W-1:0] w [NV][NH]
);
  import rbm_pkg::*;

  logic          wr_weight;
  logic [NV-1:0] row_hit;
  logic [NH-1:0] col_hit;

  assign wr_weight = wr.en && (wr.region == REG_WEIGHT);

  // One-hot row and column decoders; W[i][j] is written when both hit.
  always_comb begin
    for (int i = 0; i < NV; i++) row_hit[i] = (wr.row == ROW_W'(i));
    for (int j = 0; j < NH; j++) col_hit[j] = (wr.col == COL_W'(j));
  end

  for (genvar i = 0; i < NV; i++) begin : g_row
    for (genvar j = 0; j < NH; j++) begin : g_col
      always_ff @(posedge clk) begin
        if (rst)                                        w[i][j] <= '0;
        else if (wr_weight && row_hit[i] && col_hit[j]) w[i][j] <= wr.data[W_W-1:0];
      end
    end
  end

  initial assert (NV <= MAX_NV && NH <= MAX_NH)
    else $fatal(1, "weight_array: size exceeds the programming address map");
endmodule
