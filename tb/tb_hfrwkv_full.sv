// tb_hfrwkv_full: one complete matrix-vector operation at the default size
// (512 lanes, 128+128 complex units, 4096-word weight banks). A 4096-element
// input vector (8 rows) is loaded from external memory, layer-normalised while the weight chunk is
// still streaming in (the MV command then waits for its bank), and multiplied by one 512 x 4096 chunk of a matrix - the chunk size of the
// 7B-class 4096 x 4096 projections - which fills one weight bank; a sigmoid
// pass over the first result row follows. The LayerNorm output is checked
// against real arithmetic, every one of the 512 MV results exactly against
// reference Delta-PoT arithmetic on the LayerNorm rows the design produced,
// and the MV command time, less any wait for its bank, against N+5 = 4101
// cycles (N+4 array cycles for one chunk plus one buffer read).
module tb_hfrwkv_full;
  import hfrwkv_pkg::*;
  import tb_ref_pkg::*;

  localparam int L = 512, NR = 8, N = NR * L;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy;
  cmd_t cmd;
  logic ext_req_valid, ext_req_ready, ext_rsp_valid;
  logic [31:0] ext_req_addr;
  logic [L*9-1:0] ext_rsp_data;
  logic [7:0] host_rd_addr = 0;
  act_t host_rd_data [L];
  logic [31:0] stall_cycles, overlap_cycles;
  int checks = 0, failures = 0, cyc = 0;

  hfrwkv_top dut (.*);
  ext_mem_model #(.LANES(L), .LAT(8), .STALL(1'b0)) u_mem (
    .clk, .rst_n, .req_valid(ext_req_valid), .req_ready(ext_req_ready), .req_addr(ext_req_addr),
    .rsp_valid(ext_rsp_valid), .rsp_data(ext_rsp_data));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  function automatic logic [8:0] lane(input logic [31:0] a, input int i);
    return 9'((a * 73) + (i * 29) + ((a >> 3) * 7) + (i * i));
  endfunction

  int last_cycles;
  task automatic run(input op_e op, input int len, input int len_out, input int a,
                     input int d, input int ext, input bit bank);
    int t0;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = '0;
    cmd.op = op; cmd.len = 16'(len); cmd.len_out = 16'(len_out); cmd.src_a = 16'(a);
    cmd.dst = 16'(d); cmd.ext_addr = 32'(ext); cmd.bank = bank;
    cmd_valid = 1;
    @(negedge clk);
    t0 = cyc;
    cmd_valid = 0;
    while (!cmd_ready) @(negedge clk);
    last_cycles = cyc - t0;
  endtask

  int r [20][L];
  task automatic rd_row(input int addr);
    @(negedge clk);
    host_rd_addr = 8'(addr);
    @(negedge clk);
    for (int i = 0; i < L; i++) r[addr][i] = int'(host_rd_data[i]);
  endtask

  localparam int EXT_V = 100, EXT_W = 50000;

  initial begin
    logic [31:0] st0;
    int mv_cycles;
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run(OP_LOADV,   NR, 0, 0, 0, EXT_V, 0);
    run(OP_RESTORE, NR, 0, 0, 0, 0, 0);        // act 0..7
    run(OP_LOADW,   N, 0, 0, 0, EXT_W, 0);     // one full bank, runs under LayerNorm
    run(OP_LN,      NR, 0, 0, 8, 0, 0);        // act 8..15
    st0 = stall_cycles;
    run(OP_MV,      NR, 1, 8, 16, 0, 0);       // act 16
    mv_cycles = last_cycles - int'(stall_cycles - st0);
    run(OP_SIG,     1, 0, 16, 17, 0, 0);       // act 17
    repeat (4) @(posedge clk);
    for (int k = 0; k < 18; k++) rd_row(k);

    // input rows came from external memory
    for (int k = 0; k < NR; k++)
      for (int i = 0; i < L; i++) begin
        checks++;
        if (r[k][i] != int'(act_t'(lane(32'(EXT_V + k), i)))) failures++;
      end
    // LayerNorm
    begin
      real mu, vr, sd;
      mu = 0; vr = 0;
      for (int k = 0; k < NR; k++) for (int i = 0; i < L; i++) mu += r[k][i];
      mu /= N;
      for (int k = 0; k < NR; k++) for (int i = 0; i < L; i++) vr += (r[k][i] - mu) ** 2;
      sd = $sqrt(vr / N * 16.0 + 1.0) / 4.0;
      for (int k = 0; k < NR; k++)
        for (int i = 0; i < L; i++) begin
          real e;
          e = (r[k][i] - mu) / sd * 16.0;
          checks++;
          if (rabs(real'(r[8+k][i]) - e) > 2.0 + 0.08 * rabs(e)) begin
            failures++;
            if (failures < 10) $display("ln row %0d lane %0d: %0d vs %f", k, i, r[8+k][i], e);
          end
        end
    end
    // matrix-vector product, all 512 outputs
    for (int i = 0; i < L; i++) begin
      longint s;
      s = 0;
      for (int n = 0; n < N; n++) begin
        s += ref_dpot(r[8 + n / L][n % L], int'(lane(32'(EXT_W + n), i)));
        if (s > 32767) s = 32767;
        if (s < -32768) s = -32768;
      end
      checks++;
      if (r[16][i] != sat9(s)) begin
        failures++;
        if (failures < 10) $display("mv lane %0d: %0d vs %0d", i, r[16][i], sat9(s));
      end
    end
    // sigmoid of the result row
    for (int i = 0; i < L; i++) begin
      checks++;
      if (rabs(real'(r[17][i]) - real_sig_q88(r[16][i] * 16) / 16.0) > 1.0) failures++;
    end
    checks++;
    if (mv_cycles != N + 5) begin failures++; $display("mv cycles %0d", mv_cycles); end
    $display("mv cycles=%0d stall=%0d overlap=%0d", mv_cycles, stall_cycles, overlap_cycles);
    checks++;
    if (stall_cycles == 0 || overlap_cycles == 0) begin failures++; $display("no overlap/stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
