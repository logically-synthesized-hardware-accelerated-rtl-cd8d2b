// masked_adder_tree -- binary-masked weight row and single-cycle adder tree.
//
// Because node values are binary, the product of a weight row with the
// other layer's node vector needs no multipliers: each weight passes through
// a 2-to-1 multiplexer that selects the weight when the corresponding node is
// 1 and zero when it is 0, and the surviving weights are summed. The sum is
// built as a balanced binary tree of adders, ceil(log2 N) levels deep, all
// combinational, so one full row-vector product is available in the same
// clock cycle. This mux-then-adder-tree structure and the single-cycle
// accumulation follow the original design; the full-width (SUM_W) adders at
// every level are this design's simplification (synthesis trims unused upper
// bits).
//
// Interface: `mask[i]` is the binary value of node i of the other layer,
// `w[i]` its signed weight; `sum` = sum over i of mask[i] ? w[i] : 0, exact
// (SUM_W is wide enough that it cannot overflow).
module masked_adder_tree #(
  parameter int unsigned N     = rbm_pkg::NH_DEFAULT,
  parameter int unsigned W_W   = rbm_pkg::W_W_DEFAULT,
  parameter int unsigned SUM_W = W_W + $clog2(N + 1)
) (
  input  logic [N-1:0]           mask,
  input  logic signed [W_W-1:0]  w [N],
  output logic signed [SUM_W-1:0] sum
);
  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 0;

  // ceil(N / 2^l) partial sums at tree level l.
  function automatic int unsigned width_at(input int unsigned l);
    return (N + (1 << l) - 1) >> l;
  endfunction

  // Level 0: the masked weights (the row of 2-to-1 multiplexers).
  logic signed [SUM_W-1:0] leaf [N];
  for (genvar k = 0; k < N; k++) begin : g_mask
    assign leaf[k] = mask[k] ? SUM_W'(w[k]) : '0;
  end

  // Level l: partial sum k = sums 2k and 2k+1 of level l-1 (an odd one out
  // passes through). Each level has its own array, so the levels form a
  // tree and no signal feeds back into itself.
  for (genvar l = 1; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned CNT  = width_at(l);
    localparam int unsigned PREV = width_at(l - 1);
    logic signed [SUM_W-1:0] s [CNT];
    for (genvar k = 0; k < CNT; k++) begin : g_n
      if (l == 1 && 2 * k + 1 < PREV) begin : g_leaf_pair
        assign s[k] = leaf[2*k] + leaf[2*k+1];
      end else if (l == 1) begin : g_leaf_single
        assign s[k] = leaf[2*k];
      end else if (2 * k + 1 < PREV) begin : g_pair
        assign s[k] = g_lvl[l-1].s[2*k] + g_lvl[l-1].s[2*k+1];
      end else begin : g_single
        assign s[k] = g_lvl[l-1].s[2*k];
      end
    end
  end

  if (LEVELS == 0) begin : g_single
    assign sum = leaf[0];
  end else begin : g_root
    assign sum = g_lvl[LEVELS].s[0];
  end
endmodule
