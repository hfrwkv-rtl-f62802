// weight_buffer: ping-pong matrix-weight buffer (URAM in the FPGA build).
//
// Two banks of DEPTH words, each word one matrix column slice of LANES 9-bit
// Delta-PoT weights. The memory bridge writes one bank while the array reads
// the other, so loading the next chunk of a large matrix overlaps computing
// on the current one. Each bank carries a 'full' flag: set by fill_done for
// the bank just written, cleared by release for the bank just consumed.
// Reads have one cycle of latency. The double-buffer scheme is the paper's;
// the depth (one 512 x 4096 chunk per bank, which at 9 bits is exactly the
// 128 URAMs listed for the 512-lane build), the flags and the port timing are
// this design's choices.
module weight_buffer
  import hfrwkv_pkg::*;
#(
  parameter int unsigned LANES = 512,
  parameter int unsigned DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic                     wr_bank,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  wgt_t                     wr_data [LANES],
  input  logic                     fill_done,
  input  logic                     rd_bank,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output wgt_t                     rd_data [LANES],
  input  logic                     release_bank,
  output logic [1:0]               bank_full
);
  wgt_t mem [2][DEPTH][LANES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_bank][wr_addr] <= wr_data;
    rd_data <= mem[rd_bank][rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bank_full <= '0;
    else begin
      if (fill_done)    bank_full[wr_bank] <= 1'b1;
      if (release_bank) bank_full[rd_bank] <= 1'b0;
    end
  end

  // The bridge may only write a bank that is not marked full
  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !bank_full[wr_bank]);
endmodule
