// pmac: Delta-PoT multiply-accumulate unit, one lane of the matrix-vector
// processing array.
//
// Three pipeline stages: (1) operand register, (2) product register holding the
// dpot_mult result, (3) a 16-bit accumulator register. With ac_on = 1 (matrix-
// vector mode) the accumulator restarts from the product on a beat flagged
// 'first' and adds every further product, saturating at the 16-bit limits;
// out_valid rises with the beat flagged 'last'. With ac_on = 0 (element-wise
// mode) the accumulator register just holds each product and every beat is
// valid. The three stages, the 9-bit product and the 16-bit accumulator are
// the paper's; the first/last flags and saturation are this design's choice.
// Timing: a beat presented in cycle t is reflected in acc/out_valid in cycle
// t+3.
module pmac
  import hfrwkv_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  ac_on,
  input  logic  first,
  input  logic  last,
  input  act_t  x,
  input  wgt_t  w,
  output logic  out_valid,
  output logic signed [ACC_W-1:0] acc
);
  typedef struct packed {
    logic valid;
    logic ac_on;
    logic first;
    logic last;
  } ctl_t;

  ctl_t s1_ctl, s2_ctl;
  act_t s1_x, s2_p, p;
  wgt_t s1_w;
  logic signed [ACC_W:0] nxt;

  dpot_mult u_mult (.x(s1_x), .w(s1_w), .y(p));

  always_comb begin
    nxt = (s2_ctl.first ? '0 : (ACC_W+1)'(acc)) + (ACC_W+1)'(s2_p);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_ctl    <= '0;
      s2_ctl    <= '0;
      s1_x      <= '0;
      s1_w      <= '0;
      s2_p      <= '0;
      acc       <= '0;
      out_valid <= 1'b0;
    end else begin
      // stage 1: operands
      s1_ctl <= '{valid: in_valid, ac_on: ac_on, first: first, last: last};
      s1_x   <= x;
      s1_w   <= w;
      // stage 2: product
      s2_ctl <= s1_ctl;
      s2_p   <= p;
      // stage 3: accumulate or bypass
      out_valid <= 1'b0;
      if (s2_ctl.valid) begin
        if (s2_ctl.ac_on) begin
          if (nxt > (ACC_W+1)'(2**(ACC_W-1) - 1))
            acc <= ACC_W'(2**(ACC_W-1) - 1);
          else if (nxt < -(ACC_W+1)'(2**(ACC_W-1)))
            acc <= ACC_W'(-(2**(ACC_W-1)));
          else
            acc <= ACC_W'(nxt);
          out_valid <= s2_ctl.last;
        end else begin
          acc       <= ACC_W'(s2_p);
          out_valid <= 1'b1;
        end
      end
    end
  end
endmodule
