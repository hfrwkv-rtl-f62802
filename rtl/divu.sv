// divu: unsigned division unit, three pipeline stages.
//
// Both W-bit operands go through a leading-one detector, giving X = 2^k1 * x
// and Y = 2^k2 * y with 1 <= x, y < 2. The four bits after each leading one
// index a 256-entry two-dimensional table holding x/y as an 8-bit value with 7
// fractional bits, round(128 * (16+i)/(16+j)). The quotient is that table value
// shifted by k1 - k2:
//   stage 1: LOD, normalisation, exponent difference
//   stage 2: table lookup
//   stage 3: shift (recombination) and saturation
// q carries Q_FRAC fractional bits. out_valid follows in_valid by 3 cycles; a
// zero divisor gives all ones, a zero dividend gives zero. The algorithm and
// the stage split are the paper's; the table format, the quotient format and
// the zero cases are this design's choices.
module divu #(
  parameter int unsigned W      = 16,
  parameter int unsigned Q_FRAC = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  output logic         out_valid,
  output logic [W-1:0] q
);
  localparam int unsigned KW = $clog2(W);

  typedef logic [7:0] lut_t [256];

  function automatic lut_t build_lut();
    lut_t t;
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++)
        t[i*16+j] = 8'((256 * (16 + i) / (16 + j) + 1) / 2);
    return t;
  endfunction

  localparam lut_t LUT = build_lut();

  logic [KW-1:0] k1, k2;
  logic          fx, fy;
  logic [W-1:0]  xn, yn;

  lod #(.K(W)) u_lod_x (.d(x), .pos(k1), .found(fx));
  lod #(.K(W)) u_lod_y (.d(y), .pos(k2), .found(fy));

  assign xn = x << (W - 1 - k1);
  assign yn = y << (W - 1 - k2);

  // stage 1
  logic                s1_v, s1_zx, s1_zy;
  logic [7:0]          s1_idx;
  logic signed [KW+1:0] s1_e;
  // stage 2
  logic                s2_v, s2_zx, s2_zy;
  logic [7:0]          s2_f;
  logic signed [KW+1:0] s2_e;
  // stage 3 shift amount: quotient = f * 2^(e + Q_FRAC - 7)
  logic signed [KW+2:0] sh;
  logic [2*W+8:0]       wide;

  always_comb begin
    sh = (KW+3)'(s2_e) + (KW+3)'(Q_FRAC) - (KW+3)'(7);
    if (sh >= 0) wide = (2*W+9)'(s2_f) << sh;
    else         wide = (2*W+9)'(s2_f) >> (-sh);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_zx <= 1'b0; s1_zy <= 1'b0; s1_idx <= '0; s1_e <= '0;
      s2_v <= 1'b0; s2_zx <= 1'b0; s2_zy <= 1'b0; s2_f <= '0; s2_e <= '0;
      out_valid <= 1'b0; q <= '0;
    end else begin
      s1_v   <= in_valid;
      s1_zx  <= !fx;
      s1_zy  <= !fy;
      s1_idx <= {xn[W-2 -: 4], yn[W-2 -: 4]};
      s1_e   <= (KW+2)'(k1) - (KW+2)'(k2);

      s2_v  <= s1_v;
      s2_zx <= s1_zx;
      s2_zy <= s1_zy;
      s2_f  <= LUT[s1_idx];
      s2_e  <= s1_e;

      out_valid <= s2_v;
      if (s2_zy)                    q <= '1;
      else if (s2_zx)               q <= '0;
      else if (|(wide >> W))        q <= '1;
      else                          q <= W'(wide);
    end
  end
endmodule
