// exp_sigmoid: shared natural-exponent / sigmoid unit, two pipeline stages.
//
// One datapath serves both functions, selected per input by 'mode' (0 exp,
// 1 sigmoid). Input x is signed Q8.8, output z unsigned Q8.8.
// A shift-add unit realises every constant multiplication:
//   exp    : Y = x * log2(e) with log2(e) ~ 1.0111b = 1 + 1/2 - 1/16, i.e. one
//            addition, one subtraction and two shifts. Then e^x = 2^Y =
//            2^int(Y) * 2^frac(Y): the 8 fraction bits of Y index a 256-entry
//            EXP table of 2^(v/256) (8 fraction bits, stored without the
//            leading one) and the integer part shifts the result.
//   sigmoid: the piecewise-linear approximation
//            f(x) = 1 (x>=5), x/32+0.84375 (2.375<=x<5), x/8+0.625 (1<=x<2.375),
//            x/4+0.5 (0<=x<1), 1-f(-x) (x<0);
//            the segment of |x| selects a shift and an intercept from a small
//            sigma table; the shift-add unit forms |x|>>s and the intercept is
//            added.
// Stage 1 registers the shift-add result and the segment; stage 2 does the
// table lookups, shift or addition and the output multiplexer. out_valid
// follows in_valid by 2 cycles. The algorithm, the log2(e) constant, the
// sigmoid segments and the table size are the paper's; the Q8.8 format, the
// two-stage split and saturation of exp above 255.996 are this design's.
// EXP table entry v = round(256 * 2^(v/256)) - 256, built at elaboration by
// repeated multiplication with round(2^30 * 2^(1/256)).
module exp_sigmoid (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        mode,
  input  logic [15:0] x,
  output logic        out_valid,
  output logic [15:0] z
);
  typedef logic [7:0] lut_t [256];

  function automatic lut_t build_exp_lut();
    lut_t t;
    longint unsigned acc;
    acc = 64'd1 << 30;
    for (int v = 0; v < 256; v++) begin
      t[v] = 8'(((acc + (64'd1 << 21)) >> 22) - 64'd256);
      acc  = (acc * 64'd1076653033) >> 30;
    end
    return t;
  endfunction

  localparam lut_t EXP_LUT = build_exp_lut();

  // sigma table: per segment {shift, intercept in Q8.8}
  typedef struct packed {
    logic [2:0]  shamt;
    logic [8:0]  icpt;
    logic        one;   // saturated segment, f = 1
  } sig_ent_t;

  function automatic sig_ent_t sig_lut(input logic [1:0] seg);
    case (seg)
      2'd0:    return '{shamt: 3'd2, icpt: 9'd128, one: 1'b0};  // x/4 + 0.5
      2'd1:    return '{shamt: 3'd3, icpt: 9'd160, one: 1'b0};  // x/8 + 0.625
      2'd2:    return '{shamt: 3'd5, icpt: 9'd216, one: 1'b0};  // x/32 + 0.84375
      default: return '{shamt: 3'd0, icpt: 9'd256, one: 1'b1};  // 1
    endcase
  endfunction

  logic signed [17:0] xs, abs_x;
  logic [1:0]         seg;
  sig_ent_t           seg_e;
  logic signed [17:0] sa_in, sa_out;
  logic               e0, e2;
  logic [2:0]         s1;

  // shared shift-add unit: sa_out = e0*A + (A >>> s1) - e2*(A >>> 4)
  always_comb begin
    xs    = 18'(signed'(x));
    abs_x = x[15] ? -xs : xs;
    if (abs_x >= 18'sd1280)     seg = 2'd3;   // |x| >= 5
    else if (abs_x >= 18'sd608) seg = 2'd2;   // |x| >= 2.375
    else if (abs_x >= 18'sd256) seg = 2'd1;   // |x| >= 1
    else                        seg = 2'd0;
    seg_e = sig_lut(seg);
    if (!mode) begin
      sa_in = xs; e0 = 1'b1; s1 = 3'd1; e2 = 1'b1;
    end else begin
      sa_in = abs_x; e0 = 1'b0; s1 = seg_e.shamt; e2 = 1'b0;
    end
    sa_out = (e0 ? sa_in : 18'sd0) + (sa_in >>> s1) - (e2 ? (sa_in >>> 4) : 18'sd0);
  end

  logic               r_v, r_mode, r_neg;
  logic signed [17:0] r_y;
  sig_ent_t           r_seg_e;

  // stage 2 combinational
  logic signed [9:0]  u;
  logic [7:0]         v;
  logic [8:0]         mant;
  logic [25:0]        ez;
  logic [15:0]        exp_z, sig_z;
  logic [9:0]         f;

  always_comb begin
    u    = r_y[17:8];
    v    = r_y[7:0];
    mant = {1'b1, EXP_LUT[v]};
    if (u >= 10'sd8)       ez = 26'h3FFFFFF;
    else if (u >= 10'sd0)  ez = 26'(mant) << u;
    else if (u > -10'sd10) ez = 26'(mant) >> (-u);
    else                   ez = '0;
    exp_z = (ez > 26'hFFFF) ? 16'hFFFF : ez[15:0];
    f     = r_seg_e.one ? 10'd256 : 10'(r_seg_e.icpt) + 10'(r_y);
    if (f > 10'd256) f = 10'd256;
    sig_z = r_neg ? 16'(10'd256 - f) : 16'(f);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_v <= 1'b0; r_mode <= 1'b0; r_neg <= 1'b0; r_y <= '0; r_seg_e <= '0;
      out_valid <= 1'b0; z <= '0;
    end else begin
      r_v    <= in_valid;
      r_mode <= mode;
      r_neg  <= x[15];
      r_y    <= sa_out;
      r_seg_e <= seg_e;
      out_valid <= r_v;
      z <= r_mode ? sig_z : exp_z;
    end
  end
endmodule
