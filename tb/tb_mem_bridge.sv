// tb_mem_bridge: transfers of various lengths from a stalling external memory
// model into both destinations. Every write is checked for address and data
// against the generated memory content, every word must be written exactly
// once, fill_done must follow only weight-buffer transfers, and the bridge
// must accept a new request only when idle.
module tb_mem_bridge;
  import hfrwkv_pkg::*;
  localparam int L = 8, WD = 64, VD = 32;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, cmd_to_wbuf = 0, cmd_bank = 0, busy;
  logic [31:0] cmd_ext_addr = 0;
  logic [15:0] cmd_count = 0, cmd_dst = 0;
  logic ext_req_valid, ext_req_ready, ext_rsp_valid;
  logic [31:0] ext_req_addr;
  logic [L*9-1:0] ext_rsp_data;
  logic wb_wr_en, wb_wr_bank, wb_fill_done, vb_wr_en;
  logic [5:0] wb_wr_addr;
  logic [4:0] vb_wr_addr;
  wgt_t wb_wr_data [L];
  act_t vb_wr_data [L];
  int checks = 0, failures = 0;

  mem_bridge #(.LANES(L), .WDEPTH(WD), .VDEPTH(VD)) dut (.*);
  ext_mem_model #(.LANES(L), .LAT(4)) u_mem (
    .clk, .rst_n, .req_valid(ext_req_valid), .req_ready(ext_req_ready), .req_addr(ext_req_addr),
    .rsp_valid(ext_rsp_valid), .rsp_data(ext_rsp_data));
  always #5 clk = ~clk;

  int n_w, n_fill;
  logic [31:0] cur_base;
  logic        cur_wbuf, cur_bank;
  logic [15:0] cur_dst;

  function automatic logic [8:0] lane(input logic [31:0] a, input int i);
    return 9'((a * 73) + (i * 29) + ((a >> 3) * 7) + (i * i));
  endfunction

  always @(negedge clk) begin
    if (wb_wr_en || vb_wr_en) begin
      logic [31:0] a;
      a = cur_base + 32'(n_w);
      checks++;
      if (wb_wr_en != cur_wbuf || vb_wr_en == cur_wbuf) begin failures++; $display("wrong target"); end
      if (cur_wbuf) begin
        if (int'(wb_wr_addr) != n_w || wb_wr_bank != cur_bank) begin failures++; $display("wb addr"); end
        for (int i = 0; i < L; i++) if (wb_wr_data[i] !== lane(a, i)) begin failures++; $display("wb data"); break; end
      end else begin
        if (int'(vb_wr_addr) != int'(cur_dst) + n_w) begin failures++; $display("vb addr"); end
        for (int i = 0; i < L; i++) if (9'(vb_wr_data[i]) !== lane(a, i)) begin failures++; $display("vb data"); break; end
      end
      n_w++;
    end
    if (wb_fill_done) n_fill++;
  end

  task automatic xfer(input bit to_wbuf, input bit bank, input int base, input int cnt, input int dst);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cur_base = 32'(base); cur_wbuf = to_wbuf; cur_bank = bank; cur_dst = 16'(dst);
    n_w = 0; n_fill = 0;
    cmd_valid = 1; cmd_to_wbuf = to_wbuf; cmd_bank = bank; cmd_ext_addr = 32'(base);
    cmd_count = 16'(cnt); cmd_dst = 16'(dst);
    @(negedge clk);
    cmd_valid = 0;
    checks++;
    if (!busy) begin failures++; $display("not busy"); end
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++;
    if (n_w != cnt || n_fill != (to_wbuf ? 1 : 0)) begin
      failures++; $display("count %0d/%0d fill %0d", n_w, cnt, n_fill);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      if (t % 2 == 0) xfer(1, t[1], $urandom_range(0, 100000), 1 + $urandom_range(0, WD - 1), 0);
      else            xfer(0, 0, $urandom_range(0, 100000), 1 + $urandom_range(0, 15), $urandom_range(0, 15));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
