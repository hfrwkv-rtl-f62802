// sub_sqrt: standard deviation from the two LayerNorm moments.
//
// sigma = sqrt(E[x^2] - mu^2 + EPS). Both inputs are unsigned with the same
// scale (8 fractional bits when x has 4), the difference is clamped at zero,
// EPS is added and an integer square root (restoring, one result bit per
// step, unrolled) gives sigma with half the fractional bits. The result is
// registered: out_valid follows in_valid by one cycle. The subtract, add-eps,
// square-root order is the paper's; the square-root method, the clamp and the
// value of EPS are this design's choices.
module sub_sqrt #(
  parameter int unsigned EPS = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] mean_sq_x,
  input  logic [31:0] sq_mean,
  output logic        out_valid,
  output logic [15:0] sigma
);
  logic [32:0] var_e;
  logic [15:0] root;

  function automatic logic [15:0] isqrt(input logic [32:0] a);
    logic [33:0] rem;
    logic [16:0] r;
    logic [33:0] trial;
    rem = '0;
    r   = '0;
    for (int i = 16; i >= 0; i--) begin
      rem   = (rem << 2) | 34'((a >> (2*i)) & 33'd3);
      trial = 34'({r, 2'b01});
      if (rem >= trial) begin
        rem = rem - trial;
        r   = (r << 1) | 17'd1;
      end else begin
        r = r << 1;
      end
    end
    return (r > 17'hFFFF) ? 16'hFFFF : r[15:0];
  endfunction

  always_comb begin
    var_e = ((mean_sq_x > sq_mean) ? 33'(mean_sq_x - sq_mean) : 33'd0) + 33'(EPS);
    root  = isqrt(var_e);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; sigma <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) sigma <= root;
    end
  end
endmodule
