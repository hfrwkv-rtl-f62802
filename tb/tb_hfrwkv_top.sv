// tb_hfrwkv_top: end-to-end test of the accelerator at reduced size (8 lanes,
// 2+2 complex units, 64-word weight banks). A command program shaped like one
// token of an RWKV layer runs: vector weights and the input come from
// external memory, then LayerNorm, element-wise Delta-PoT product (mix
// factor), addition of a uniform addend, two matrix-vector products on the two
// weight banks with the second bank loaded under computation (which makes the
// MV command stall), exp, sigmoid, division, an activation + activation
// addition, and a SAVE/RESTORE round trip of history through the BRAM.
// Afterwards every result row is read through the host port and checked
// against reference arithmetic applied to the rows the design itself produced
// as that operation's inputs: exact for MV, EW, ADD, SAVE/RESTORE, bounded
// for LayerNorm, exp, sigmoid and division. The MV command time, less any wait
// for its bank, is checked against len_out*(N+5) cycles: N+4 cycles of array latency per chunk of N
// columns plus one cycle of buffer read. Each mechanism (stall, overlap of
// loading with compute, each array mode, each complex-unit operation,
// LayerNorm, both banks) is counted and must have happened.
module tb_hfrwkv_top;
  import hfrwkv_pkg::*;
  import tb_ref_pkg::*;

  localparam int L = 8, NCU = 2, WD = 64, VD = 32, AD = 32, MB = 4;
  localparam int N = 2 * L;   // MV input length (2 rows)

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy;
  cmd_t cmd;
  logic ext_req_valid, ext_req_ready, ext_rsp_valid;
  logic [31:0] ext_req_addr;
  logic [L*9-1:0] ext_rsp_data;
  logic [4:0] host_rd_addr = 0;
  act_t host_rd_data [L];
  logic [31:0] stall_cycles, overlap_cycles;
  int checks = 0, failures = 0, cyc = 0;

  hfrwkv_top #(.LANES(L), .NCU(NCU), .WDEPTH(WD), .VDEPTH(VD), .ADEPTH(AD), .MAX_BLK(MB)) dut (.*);
  ext_mem_model #(.LANES(L), .LAT(6)) u_mem (
    .clk, .rst_n, .req_valid(ext_req_valid), .req_ready(ext_req_ready), .req_addr(ext_req_addr),
    .rsp_valid(ext_rsp_valid), .rsp_data(ext_rsp_data));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  function automatic logic [8:0] lane(input logic [31:0] a, input int i);
    return 9'((a * 73) + (i * 29) + ((a >> 3) * 7) + (i * i));
  endfunction

  // mechanism counters
  int n_op [16];
  int n_mode [3];
  int n_bank [2];
  always @(posedge clk) if (dut.u_mvpa.in_valid) n_mode[dut.u_mvpa.mode]++;
  always @(posedge clk) if (dut.wb_release) n_bank[dut.wb_rd_bank]++;

  int last_cycles;
  task automatic run(input op_e op, input int len, input int len_out, input int a,
                     input int b, input int d, input int ext, input bit bank, input bit b_act);
    int t0;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = '0;
    cmd.op = op; cmd.len = 16'(len); cmd.len_out = 16'(len_out); cmd.src_a = 16'(a);
    cmd.src_b = 16'(b); cmd.dst = 16'(d); cmd.ext_addr = 32'(ext); cmd.bank = bank; cmd.b_act = b_act;
    cmd_valid = 1;
    @(negedge clk);
    t0 = cyc;
    cmd_valid = 0;
    while (!cmd_ready) @(negedge clk);
    last_cycles = cyc - t0;
    n_op[op]++;
  endtask

  task automatic rd_row(input int addr, output int v [L]);
    @(negedge clk);
    host_rd_addr = 5'(addr);
    @(negedge clk);
    for (int i = 0; i < L; i++) v[i] = int'(host_rd_data[i]);
  endtask

  task automatic expect_exact(input string what, input int got, input int e);
    checks++;
    if (got != e) begin
      failures++;
      if (failures < 20) $display("%s: got %0d expected %0d", what, got, e);
    end
  endtask

  task automatic expect_near(input string what, input int got, input real e, input real tol);
    checks++;
    if (rabs(real'(got) - e) > tol) begin
      failures++;
      if (failures < 20) $display("%s: got %0d expected %f", what, got, e);
    end
  endtask

  localparam int EXT_V = 1000, EXT_W0 = 2000, EXT_W1 = 3000, EXT_W2 = 4000;
  int mv_cycles;
  logic [31:0] st0;

  initial begin
    int r [AD][L];
    int bram [VD][L];
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    run(OP_LOADV,   8, 0, 0, 0, 0, EXT_V, 0, 0);          // bram 0..7
    run(OP_RESTORE, 2, 0, 0, 0, 0, 0, 0, 0);              // act 0..1 = input x
    run(OP_LOADW,  2 * N, 0, 0, 0, 0, EXT_W0, 0, 0);      // bank 0, runs under LN
    run(OP_LN,      2, 0, 0, 0, 2, 0, 0, 0);              // act 2..3 = LN(x)
    run(OP_EW,      2, 0, 2, 2, 4, 0, 0, 0);              // act 4..5 = act2..3 (*) bram2..3
    run(OP_ADD,     2, 0, 4, 4, 6, 0, 0, 0);              // act 6..7 = act4..5 + bram4..5
    st0 = stall_cycles;
    run(OP_MV,      2, 2, 6, 0, 8, 0, 0, 0);              // act 8..9 = W0 x act6..7
    mv_cycles = last_cycles - int'(stall_cycles - st0);
    run(OP_LOADW,  2 * N, 0, 0, 0, 0, EXT_W1, 1, 0);      // bank 1
    run(OP_MV,      2, 2, 8, 0, 10, 0, 1, 0);             // stalls until bank 1 is full
    run(OP_LOADW,  2 * N, 0, 0, 0, 0, EXT_W2, 0, 0);      // refill bank 0 under the next ops
    run(OP_EXP,     1, 0, 10, 0, 12, 0, 0, 0);
    run(OP_SIG,     1, 0, 11, 0, 13, 0, 0, 0);
    run(OP_DIV,     1, 0, 12, 13, 14, 0, 0, 0);
    run(OP_ADD,     1, 0, 14, 6, 15, 0, 0, 1);            // act + act
    run(OP_SAVE,    1, 0, 15, 0, 10, 0, 0, 0);            // bram 10 = act 15
    run(OP_RESTORE, 1, 0, 10, 0, 16, 0, 0, 0);            // act 16 = bram 10
    run(OP_MV,      2, 1, 6, 0, 17, 0, 0, 0);             // one chunk of the refilled bank 0
    repeat (4) @(posedge clk);

    for (int k = 0; k < 18; k++) rd_row(k, r[k]);
    for (int k = 0; k < 8; k++)
      for (int i = 0; i < L; i++) bram[k][i] = int'(act_t'(lane(32'(EXT_V + k), i)));

    // RESTORE of external data
    for (int k = 0; k < 2; k++)
      for (int i = 0; i < L; i++) expect_exact("restore", r[k][i], bram[k][i]);
    // LayerNorm over the 16 elements of rows 0..1 (activations have 4 fraction bits)
    begin
      real mu, vr, sd;
      mu = 0; vr = 0;
      for (int k = 0; k < 2; k++) for (int i = 0; i < L; i++) mu += r[k][i];
      mu /= 16.0;
      for (int k = 0; k < 2; k++) for (int i = 0; i < L; i++) vr += (r[k][i] - mu) ** 2;
      sd = $sqrt(vr / 16.0 * 16.0 + 1.0) / 4.0;
      for (int k = 0; k < 2; k++)
        for (int i = 0; i < L; i++) begin
          real e;
          e = (r[k][i] - mu) / sd * 16.0;
          if (e > 255.0) e = 255.0;
          if (e < -255.0) e = -255.0;
          expect_near("layernorm", r[2+k][i], e, 2.0 + 0.08 * rabs(e));
        end
    end
    // EW and ADD
    for (int k = 0; k < 2; k++)
      for (int i = 0; i < L; i++) begin
        expect_exact("ew", r[4+k][i], ref_dpot(r[2+k][i], bram[2+k][i] & 511));
        expect_exact("add", r[6+k][i], sat9(r[4+k][i] + bram[4+k][i]));
      end
    // MV: output chunk c, lane i = sum_n W[word c*N+n][i] * x_n
    for (int m = 0; m < 3; m++) begin
      int src, dst, base, chunks;
      src    = (m == 1) ? 8 : 6;
      dst    = (m == 0) ? 8 : (m == 1) ? 10 : 17;
      base   = (m == 0) ? EXT_W0 : (m == 1) ? EXT_W1 : EXT_W2;
      chunks = (m == 2) ? 1 : 2;
      for (int c = 0; c < chunks; c++)
        for (int i = 0; i < L; i++) begin
          longint s;
          s = 0;
          for (int n = 0; n < N; n++) begin
            s += ref_dpot(r[src + n / L][n % L], int'(lane(32'(base + c * N + n), i)));
            if (s > 32767) s = 32767;
            if (s < -32768) s = -32768;
          end
          expect_exact("mv", r[dst + c][i], sat9(s));
        end
    end
    // exp, sigmoid, division (activations carry 4 fraction bits)
    for (int i = 0; i < L; i++) begin
      real e;
      e = 16.0 * $exp(r[10][i] / 16.0);
      if (e > 255.0) e = 255.0;
      expect_near("exp", r[12][i], e, 0.04 * e + 1.0);
      expect_near("sig", r[13][i], real_sig_q88(r[11][i] * 16) / 16.0, 1.0);
      if (r[13][i] != 0) begin
        e = 16.0 * r[12][i] / r[13][i];
        if (e > 255.0) e = 255.0;
        if (e < -255.0) e = -255.0;
        expect_near("div", r[14][i], e, 0.07 * rabs(e) + 1.0);
      end
      expect_exact("add act", r[15][i], sat9(r[14][i] + r[6][i]));
      expect_exact("save/restore", r[16][i], r[15][i]);
    end

    // timing of an MV command, cycles spent waiting for the bank removed
    expect_exact("mv cycles", mv_cycles, 2 * (N + 5));

    // mechanisms
    $display("stall=%0d overlap=%0d MV=%0d EW=%0d ADD=%0d bank0=%0d bank1=%0d",
             stall_cycles, overlap_cycles, n_mode[0], n_mode[1], n_mode[2], n_bank[0], n_bank[1]);
    checks += 6;
    if (stall_cycles == 0)   begin failures++; $display("no MV stall happened"); end
    if (overlap_cycles == 0) begin failures++; $display("no load/compute overlap happened"); end
    if (n_mode[0] == 0 || n_mode[1] == 0 || n_mode[2] == 0) begin failures++; $display("array mode unused"); end
    if (n_bank[0] == 0 || n_bank[1] == 0) begin failures++; $display("ping-pong bank unused"); end
    if (n_op[OP_EXP] == 0 || n_op[OP_SIG] == 0 || n_op[OP_DIV] == 0) begin failures++; $display("complex op unused"); end
    if (n_op[OP_LN] == 0 || n_op[OP_SAVE] == 0) begin failures++; $display("LN/SAVE unused"); end

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
