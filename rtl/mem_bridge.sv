// mem_bridge: memory bridge from external memory into on-chip memory.
//
// A transfer request names a run of 'count' consecutive external words from
// 'ext_addr' and a destination: a weight-buffer bank or rows of the vector
// BRAM starting at 'dst'. The bridge issues read requests with a valid/ready
// handshake, as fast as the external memory accepts them, and writes each
// returning word (responses arrive in order, one per rsp_valid) to the next
// destination row, unpacking the word into LANES 9-bit fields. After the last
// word of a weight-buffer transfer it pulses fill_done so the bank is marked
// full. A new request is taken only when idle (cmd_ready). The bridge's role
// is the paper's; the request format, handshakes and word layout (lane i in
// bits 9i+8..9i) are this design's.
module mem_bridge
  import hfrwkv_pkg::*;
#(
  parameter int unsigned LANES  = 512,
  parameter int unsigned WDEPTH = 4096,
  parameter int unsigned VDEPTH = 4096
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // transfer request
  input  logic                      cmd_valid,
  output logic                      cmd_ready,
  input  logic                      cmd_to_wbuf,   // 1 weight buffer, 0 vector BRAM
  input  logic                      cmd_bank,
  input  logic [ADDR_W-1:0]         cmd_ext_addr,
  input  logic [15:0]               cmd_count,
  input  logic [15:0]               cmd_dst,
  output logic                      busy,
  // external memory read port
  output logic                      ext_req_valid,
  input  logic                      ext_req_ready,
  output logic [ADDR_W-1:0]         ext_req_addr,
  input  logic                      ext_rsp_valid,
  input  logic [LANES*WGT_W-1:0]    ext_rsp_data,
  // weight buffer write port
  output logic                      wb_wr_en,
  output logic                      wb_wr_bank,
  output logic [$clog2(WDEPTH)-1:0] wb_wr_addr,
  output wgt_t                      wb_wr_data [LANES],
  output logic                      wb_fill_done,
  // vector BRAM write port
  output logic                      vb_wr_en,
  output logic [$clog2(VDEPTH)-1:0] vb_wr_addr,
  output act_t                      vb_wr_data [LANES]
);
  logic        to_wbuf, bank;
  logic [15:0] count, dst, n_req, n_rsp;
  logic [ADDR_W-1:0] base;

  assign cmd_ready     = !busy;
  assign ext_req_valid = busy && (n_req < count);
  assign ext_req_addr  = base + ADDR_W'(n_req);

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      wb_wr_data[i] = ext_rsp_data[i*WGT_W +: WGT_W];
      vb_wr_data[i] = act_t'(ext_rsp_data[i*WGT_W +: WGT_W]);
    end
    wb_wr_en   = busy && ext_rsp_valid && to_wbuf;
    vb_wr_en   = busy && ext_rsp_valid && !to_wbuf;
    wb_wr_bank = bank;
    wb_wr_addr = ($clog2(WDEPTH))'(n_rsp);
    vb_wr_addr = ($clog2(VDEPTH))'(dst + n_rsp);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; to_wbuf <= 1'b0; bank <= 1'b0; count <= '0; dst <= '0;
      n_req <= '0; n_rsp <= '0; base <= '0; wb_fill_done <= 1'b0;
    end else begin
      wb_fill_done <= 1'b0;
      if (!busy) begin
        if (cmd_valid && cmd_count != '0) begin
          busy    <= 1'b1;
          to_wbuf <= cmd_to_wbuf;
          bank    <= cmd_bank;
          base    <= cmd_ext_addr;
          count   <= cmd_count;
          dst     <= cmd_dst;
          n_req   <= '0;
          n_rsp   <= '0;
        end
      end else begin
        if (ext_req_valid && ext_req_ready) n_req <= n_req + 16'd1;
        if (ext_rsp_valid) begin
          n_rsp <= n_rsp + 16'd1;
          if (n_rsp + 16'd1 == count) begin
            busy         <= 1'b0;
            wb_fill_done <= to_wbuf;
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) ext_rsp_valid |-> busy);
endmodule
