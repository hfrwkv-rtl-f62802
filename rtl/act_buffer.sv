// act_buffer: activation value buffer.
//
// DEPTH rows of LANES 9-bit activations hold the normalised inputs,
// intermediate vectors and results of the current token. Two operand read
// ports (a, b) feed the compute units, a third read port lets the host read
// results, and one write port takes results back. Every read has one cycle of
// latency; a read of the row being written returns the old contents. The
// buffer itself is the paper's; port count and depth are this design's.
module act_buffer
  import hfrwkv_pkg::*;
#(
  parameter int unsigned LANES = 512,
  parameter int unsigned DEPTH = 256
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] rd_addr_a,
  output act_t                     rd_data_a [LANES],
  input  logic [$clog2(DEPTH)-1:0] rd_addr_b,
  output act_t                     rd_data_b [LANES],
  input  logic [$clog2(DEPTH)-1:0] rd_addr_h,
  output act_t                     rd_data_h [LANES],
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  act_t                     wr_data [LANES]
);
  act_t mem [DEPTH][LANES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data_a <= mem[rd_addr_a];
    rd_data_b <= mem[rd_addr_b];
    rd_data_h <= mem[rd_addr_h];
  end
endmodule
