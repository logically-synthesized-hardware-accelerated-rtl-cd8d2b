// sigmoid_lut -- fixed-point logistic function as a look-up table.
//
// A neuron fires with probability sigma(x) = 1 / (1 + exp(-x)), where x is
// its input field. Evaluating exp and a division in hardware is expensive, so
// the value is read from a table indexed by the field itself. The table is
// computed at elaboration time from the parameters:
//
//   x(i)    = signed(i) / 2^FRAC              for the IN_W-bit index i
//   TAB[i]  = min(round(sigma(x(i)) * 2^P_W), 2^P_W - 1)
//
// so the table can be rebuilt for any input width and binary-point position.
// Using a LUT for the sigmoid follows the original design; the input width
// (8 bits, covering x in [-8, 8) with 4 fractional bits), the rounding and the
// 16-bit output are this design's choices. Fields outside the table's range
// are saturated by the caller (node_update).
//
// Interface: purely combinational, `x` (signed, two's complement) to `p`
// (unsigned probability, p / 2^P_W).
module sigmoid_lut #(
  parameter int unsigned IN_W = rbm_pkg::LUT_IN_W_DEF,
  parameter int unsigned FRAC = rbm_pkg::FRAC_DEFAULT,
  parameter int unsigned P_W  = rbm_pkg::P_W_DEFAULT
) (
  input  logic signed [IN_W-1:0] x,
  output logic        [P_W-1:0]  p
);
  localparam int unsigned ENTRIES = 1 << IN_W;
  typedef logic [P_W-1:0] table_t [ENTRIES];

  function automatic table_t build_table();
    table_t tab;
    for (int i = 0; i < ENTRIES; i++) begin
      real xr, s;
      longint q;
      xr = real'(i >= (ENTRIES / 2) ? i - int'(ENTRIES) : i) / real'(longint'(1) << FRAC);
      s  = 1.0 / (1.0 + $exp(-xr));
      q  = longint'($rtoi(s * real'(longint'(1) << P_W) + 0.5));
      if (q > (longint'(1) << P_W) - 1) q = (longint'(1) << P_W) - 1;
      tab[i] = P_W'(q);
    end
    return tab;
  endfunction

  localparam table_t TAB = build_table();

  always_comb p = TAB[$unsigned(x)];
endmodule
