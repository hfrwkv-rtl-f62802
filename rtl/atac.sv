// atac: adder tree plus accumulator ("ATAC") for long vector sums.
//
// A vector arrives as blocks of P elements, one block per cycle, the first
// flagged 'first' and the last flagged 'last'. A pipelined binary adder tree
// with one register per level (log2(P) levels) reduces each block to a
// partial sum, and an accumulator adds the partial sums of the blocks. After
// the last block the accumulated sum is presented on 'sum' with a one-cycle
// out_valid pulse and then held until the next vector's last block.
// Timing: with the first block in cycle 0 and B blocks, out_valid is high in
// cycle B + log2(P), i.e. B + 9 cycles for P = 512, the count the paper gives.
// Structure and latency follow the paper; the flag handshake is this design's.
module atac #(
  parameter int unsigned P     = 512,
  parameter int unsigned IN_W  = 16,
  parameter int unsigned OUT_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    first,
  input  logic                    last,
  input  logic signed [IN_W-1:0]  in_vec [P],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] sum
);
  localparam int unsigned L = $clog2(P);

  logic signed [OUT_W-1:0] lvl [L+1][P];
  logic [L:0]              v_p, f_p, l_p;
  logic signed [OUT_W-1:0] acc;

  always_comb begin
    for (int i = 0; i < P; i++) lvl[0][i] = OUT_W'(in_vec[i]);
  end
  assign v_p[0] = in_valid;
  assign f_p[0] = first;
  assign l_p[0] = last;

  for (genvar k = 1; k <= L; k++) begin : g_lvl
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v_p[k] <= 1'b0; f_p[k] <= 1'b0; l_p[k] <= 1'b0;
        for (int i = 0; i < P; i++) lvl[k][i] <= '0;
      end else begin
        v_p[k] <= v_p[k-1]; f_p[k] <= f_p[k-1]; l_p[k] <= l_p[k-1];
        for (int i = 0; i < (P >> k); i++)
          lvl[k][i] <= lvl[k-1][2*i] + lvl[k-1][2*i+1];
        for (int i = (P >> k); i < P; i++)
          lvl[k][i] <= '0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; sum <= '0; out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (v_p[L]) begin
        acc <= (f_p[L] ? OUT_W'(0) : acc) + lvl[L][0];
        if (l_p[L]) begin
          sum       <= (f_p[L] ? OUT_W'(0) : acc) + lvl[L][0];
          out_valid <= 1'b1;
        end
      end
    end
  end
endmodule
