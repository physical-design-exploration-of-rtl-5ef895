// csd_encoder: binary to canonical signed digit (CSD) conversion of a scalar.
//
// The VFU multiplies a vector by a scalar with shifts and adds, one addition or
// subtraction per non-zero digit of the scalar. Re-coding the scalar into CSD
// (digits -1, 0, +1 with no two adjacent non-zero digits) minimises that count.
// The input is a W-bit two's-complement value; the output is two W-bit masks,
// pos[i] meaning digit i is +1 and neg[i] meaning digit i is -1, so that
//   value = sum_i (pos[i] - neg[i]) * 2^i.
// How it works: for x = |value| (at most 2^(W-1), so it needs W digits) the
// non-adjacent form is obtained from xh = x >> 1, x3 = x + xh, c = xh ^ x3:
// positive digits are x3 & c and negative digits are xh & c. For a negative
// value the two masks are swapped. Purely combinational.
//
// CSD recoding for shift-add multiplication is the architecture's; the scalar
// width and doing the recoding in hardware at issue time are this design's.
module csd_encoder #(
  parameter int unsigned W = dsip_pkg::DEF_SCALAR_W
) (
  input  logic [W-1:0] value,
  output logic [W-1:0] pos,
  output logic [W-1:0] neg
);

  logic          is_neg;
  logic [W:0]    x, xh, x3, c;
  logic [W-1:0]  np, nm;

  always_comb begin
    is_neg = value[W-1];
    x      = is_neg ? ({1'b0, ~value} + 1'b1) : {1'b0, value};
    xh     = x >> 1;
    x3     = x + xh;
    c      = xh ^ x3;
    np     = x3[W-1:0] & c[W-1:0];  // digit W is always zero as x <= 2^(W-1)
    nm     = xh[W-1:0] & c[W-1:0];
    pos    = is_neg ? nm : np;
    neg    = is_neg ? np : nm;
  end

endmodule
