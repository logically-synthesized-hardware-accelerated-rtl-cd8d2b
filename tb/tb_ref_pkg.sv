// tb_ref_pkg -- reference models shared by the testbenches.
//
// Written independently of the RTL: the LFSR step is derived from the
// feedback polynomial x^32 + x^22 + x^2 + x + 1 written as a tap mask, and the
// sigmoid reference evaluates the logistic function in floating point at
// simulation time.
package tb_ref_pkg;

  // Bit positions (exponent - 1) of the polynomial's non-leading terms,
  // plus the top bit, as a mask over the 32-bit register.
  localparam logic [31:0] TAPS = (32'd1 << 31) | (32'd1 << 21) | (32'd1 << 1) | 32'd1;

  function automatic logic [31:0] lfsr_next(input logic [31:0] s);
    return {s[30:0], ^(s & TAPS)};
  endfunction

  // round(sigma(x / 2^frac) * 2^pw), capped at 2^pw - 1, for a signed field
  // x already saturated to `in_w` bits.
  function automatic longint sigmoid_q(input longint x, input int frac, input int pw);
    real s;
    longint q;
    s = 1.0 / (1.0 + $exp(-(real'(x) / (2.0 ** frac))));
    q = longint'($floor(s * (2.0 ** pw) + 0.5));
    if (q > (longint'(1) << pw) - 1) q = (longint'(1) << pw) - 1;
    return q;
  endfunction

  function automatic longint saturate(input longint x, input int in_w);
    longint hi, lo;
    hi = (longint'(1) << (in_w - 1)) - 1;
    lo = -(longint'(1) << (in_w - 1));
    return (x > hi) ? hi : (x < lo) ? lo : x;
  endfunction

  // Same seed rule as the RTL documents: distinct, non-zero per node.
  function automatic logic [31:0] seed_of(input int unsigned layer, input int unsigned idx);
    logic [31:0] s;
    s = (32'(idx) + 32'd1) * 32'h9E37_79B9;
    s = s ^ (32'(layer) * 32'h85EB_CA6B) ^ 32'h2545_F491;
    s = s ^ (s >> 15);
    if (s == 32'd0) s = 32'h1;
    return s;
  endfunction

endpackage
