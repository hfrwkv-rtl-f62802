// vector_bram: on-chip store for vector weights and recurrent history.
//
// DEPTH rows of LANES 9-bit values hold the per-channel weights (token-shift
// mix factors, decay and bonus vectors, LayerNorm scale and bias) and the
// values carried from one token to the next (previous inputs, WKV state), so
// none of them has to be fetched from external memory per token. One write
// port (memory bridge or write-back from the activation buffer) and one read
// port with one cycle of latency. Keeping these in BRAM is the paper's; the
// ports are this design's choice. The depth of 4096 rows (18.9 Mbit, 512
// BRAM36 of 72 x 512) is sized so that the per-layer vectors and state of the
// largest model (32 layers, about 16 vectors of 4096 values each) fit at once.
module vector_bram
  import hfrwkv_pkg::*;
#(
  parameter int unsigned LANES = 512,
  parameter int unsigned DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  act_t                     wr_data [LANES],
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output act_t                     rd_data [LANES]
);
  act_t mem [DEPTH][LANES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
