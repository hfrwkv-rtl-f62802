// mvpa: Matrix-Vector Processing Array.
//
// LANES PMAC lanes and an addition array share one input beat per cycle.
//   MODE_MV : the vector element x_bcast is broadcast to every lane together
//             with one matrix column w_vec (LANES rows of that column). After
//             the beat flagged 'last' each lane holds one dot product: the
//             column-ordered matrix-vector product of the paper, which reads
//             each vector element once.
//   MODE_EW : lane i multiplies x_vec[i] by the Delta-PoT weight w_vec[i]; the
//             accumulators are bypassed and every beat yields a result row.
//   MODE_ADD: lane i adds x_vec[i] and the 9-bit signed operand in w_vec[i]
//             (uniform-quantised weight or another activation) with
//             saturation; the adder path is delayed to the same latency.
// A final register saturates the 16-bit accumulators to 9-bit results.
// Timing: a result row leaves 4 cycles after its last input beat, so one
// l-column chunk takes l+4 cycles and an element-wise pass of l/d rows takes
// l/d+4 cycles, the latencies the paper states. The saturation rules and the
// addition-array pipeline are this design's choices.
module mvpa
  import hfrwkv_pkg::*;
#(
  parameter int unsigned LANES = 512
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  mv_mode_e mode,
  input  logic     first,
  input  logic     last,
  input  act_t     x_bcast,
  input  act_t     x_vec [LANES],
  input  wgt_t     w_vec [LANES],
  output logic     out_valid,
  output act_t     y     [LANES]
);
  logic                    lane_valid [LANES];
  logic signed [ACC_W-1:0] lane_acc   [LANES];
  act_t                    add_d      [3][LANES];
  logic [2:0]              add_v;
  logic                    ac_on;

  assign ac_on = (mode == MODE_MV);

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    pmac u_pmac (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid && mode != MODE_ADD),
      .ac_on    (ac_on),
      .first    (first),
      .last     (last),
      .x        (ac_on ? x_bcast : x_vec[i]),
      .w        (w_vec[i]),
      .out_valid(lane_valid[i]),
      .acc      (lane_acc[i])
    );
  end

  // Addition array: saturating lane sums, three stages deep like the PMACs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      add_v <= '0;
      for (int s = 0; s < 3; s++)
        for (int i = 0; i < LANES; i++) add_d[s][i] <= '0;
    end else begin
      add_v <= {add_v[1:0], in_valid && mode == MODE_ADD};
      for (int i = 0; i < LANES; i++) begin
        add_d[0][i] <= sat_act(32'(x_vec[i]) + 32'($signed(w_vec[i])));
        add_d[1][i] <= add_d[0][i];
        add_d[2][i] <= add_d[1][i];
      end
    end
  end

  // Output register: saturate accumulators to 9 bits or pass the sums
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < LANES; i++) y[i] <= '0;
    end else begin
      out_valid <= lane_valid[0] || add_v[2];
      for (int i = 0; i < LANES; i++)
        y[i] <= add_v[2] ? add_d[2][i] : sat_act(32'(lane_acc[i]));
    end
  end
endmodule
