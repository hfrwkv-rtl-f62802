// dpot_mult: Delta-PoT multiplier (combinational).
//
// Multiplies a 9-bit signed activation x by a 9-bit Delta-PoT weight without a
// hardware multiplier. The weight code, as laid out in the paper's figure, is
//   w[8]    sign
//   w[7:6]  dq0  first shift; dq0 = 0 encodes a zero weight
//   w[5]    v1   valid bit of the second term
//   w[4:3]  dq1  shift of the second term relative to the first
//   w[2]    v2   valid bit of the third term
//   w[1:0]  dq2  shift of the third term relative to the second
// and stands for  (-1)^s * 2 * (p0 + v1*p1 + v2*p2)  with p0 = 2^-dq0,
// p1 = p0 * 2^-dq1, p2 = p1 * 2^-dq2 (the common factor gamma of a tensor is a
// scale kept outside the accelerator). The magnitude of x runs through a
// chain of three barrel shifters; two multiplexers pass the second and third
// shifted terms or zero, and two adders sum the terms. The shifts divide, as
// the paper's equation for p_i states, so the magnitude is first widened by
// FRAC_X bits to keep the shifted-out bits until the sum; the sum is then
// truncated toward zero and saturated to +-255 (the paper only says overflow
// protection exists). Sign-magnitude handling follows the paper's remark that
// sign bits are excluded from the shift-add datapath.
module dpot_mult
  import hfrwkv_pkg::*;
(
  input  act_t x,
  input  wgt_t w,
  output act_t y
);
  localparam int unsigned FRAC_X = 9;            // max total shift 3+3+3
  localparam int unsigned MW     = 9 + FRAC_X + 2;

  logic        neg;
  logic [8:0]  mag;
  logic [1:0]  dq0, dq1, dq2;
  logic        v1, v2;
  logic [MW-1:0] base, t0, t1, t2, sum;
  logic [MW-1:0] prod;   // magnitude, FRAC_X fractional bits

  always_comb begin
    neg  = x[8] ^ w[8];
    mag  = x[8] ? 9'(-x) : 9'(x);
    dq0  = w[7:6];
    v1   = w[5];
    dq1  = w[4:3];
    v2   = w[2];
    dq2  = w[1:0];
    // x * 2, widened by FRAC_X fractional bits
    base = MW'(mag) << (FRAC_X + 1);
    t0   = base >> dq0;
    t1   = t0 >> dq1;
    t2   = t1 >> dq2;
    sum  = (dq0 != 2'd0) ? (t0 + (v1 ? t1 : '0) + (v2 ? t2 : '0)) : '0;
    prod = sum >> FRAC_X;
    if (prod > MW'(255)) y = neg ? ACT_MIN : ACT_MAX;
    else                 y = neg ? act_t'(-$signed({1'b0, prod[8:0]})) : act_t'(prod[8:0]);
  end
endmodule
