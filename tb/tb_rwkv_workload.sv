// tb_rwkv_workload: the token-mixing front end of one RWKV layer at a real
// model width, on the accelerator with every parameter at its default
// (512 lanes, 128 + 128 complex units, 4096-word weight banks).
// D is the model width: 1024 is the 430M model. 2048, 2560 and 4096 (1.5B,
// 3B, 7B) run the same program with a longer simulation.
//
// Program, all on rows of 512 values (R = D/512 rows per vector):
//   LOADV     input x, previous token x_prev, mix factors mu and 1-mu, LayerNorm
//             scale (Delta-PoT codes) and bias (uniform codes) into the BRAM
//   RESTORE   x and x_prev into the activation buffer
//   LN, EW, ADD        LayerNorm with learned scale and bias
//   EW, EW, ADD(act)   token shift: mu*LN(x) + (1-mu)*x_prev
//   LOADW/MV  three D x D projections (key, value, receptance). Each one is cut
//             into bank-sized jobs of output chunks. Jobs alternate between
//             the two weight banks, and the next job loads while the array
//             works on the current one.
//   SIG, EXP, DIV      sigmoid of the receptance, exp of the key, value / exp
//   SAVE/RESTORE       x kept in the BRAM as the next token's x_prev
// Every result row is read back and checked against reference arithmetic
// applied to the rows the design produced as that step's inputs. The checks
// are exact for the array and the buffers, and bounded for LayerNorm and the
// complex units. Each MV command's time less its bank wait must be
// jobs_chunks * (N + 5) cycles. A stall, a load/compute overlap, all three
// array modes, both banks and every complex operation must each occur.
// The command program is this design's mapping of the layer, not the paper's.
module tb_rwkv_workload;
  import hfrwkv_pkg::*;
  import tb_ref_pkg::*;

  localparam int L = 512, D = 1024, R = D / L, N = D;
  localparam int WDEPTH = 4096;
  localparam int CPJ = (WDEPTH / N) < R ? (WDEPTH / N) : R;   // chunks per bank job
  localparam int JPP = (R + CPJ - 1) / CPJ;                    // jobs per projection

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
  ext_mem_model #(.LANES(L), .LAT(8), .STALL(1'b1)) u_mem (
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

  // BRAM rows
  localparam int B_X = 0, B_MU = R, B_NMU = 2 * R, B_G = 3 * R, B_B = 4 * R, B_XP = 5 * R;
  localparam int B_SAVE = 6 * R;
  // activation rows
  localparam int A_X = 0, A_XP = R, A_LN = 2 * R, A_G = 3 * R, A_B = 4 * R, A_M1 = 5 * R,
                 A_M2 = 6 * R, A_XK = 7 * R, A_K = 8 * R, A_V = 9 * R, A_R = 10 * R,
                 A_SIG = 11 * R, A_EXP = 12 * R, A_DIV = 13 * R, A_RS = 14 * R, A_ROWS = 15 * R;
  localparam int EXT_V = 100;
  localparam int EXT_P [3] = '{20000, 20000 + D * D / L, 20000 + 2 * D * D / L};

  // jobs of the three projections: projection p, first chunk c0, chunk count
  int job_p [3 * JPP], job_c0 [3 * JPP], job_n [3 * JPP];
  int mv_bad = 0;

  task automatic loadw(input int j);
    run(OP_LOADW, job_n[j] * N, 0, 0, 0, 0, EXT_P[job_p[j]] + job_c0[j] * N, 1'(j % 2), 0);
  endtask

  task automatic mv(input int j);
    logic [31:0] s0;
    int dst;
    dst = (job_p[j] == 0) ? A_K : (job_p[j] == 1) ? A_V : A_R;
    s0 = stall_cycles;
    run(OP_MV, R, job_n[j], A_XK, 0, dst + job_c0[j], 0, 1'(j % 2), 0);
    checks++;
    if (last_cycles - int'(stall_cycles - s0) != job_n[j] * (N + 5)) begin
      failures++;
      mv_bad++;
      $display("mv job %0d: %0d cycles", j, last_cycles - int'(stall_cycles - s0));
    end
  endtask

  int r [A_ROWS][L];
  int bram [6 * R][L];

  initial begin
    int nj;
    nj = 0;
    for (int p = 0; p < 3; p++)
      for (int c = 0; c < R; c += CPJ) begin
        job_p[nj] = p; job_c0[nj] = c; job_n[nj] = (R - c < CPJ) ? R - c : CPJ;
        nj++;
      end
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    run(OP_LOADV,   6 * R, 0, 0, 0, B_X, EXT_V, 0, 0);
    run(OP_RESTORE, R, 0, B_X, 0, A_X, 0, 0, 0);
    run(OP_RESTORE, R, 0, B_XP, 0, A_XP, 0, 0, 0);
    loadw(0);                                            // first job loads under LayerNorm
    run(OP_LN,      R, 0, A_X, 0, A_LN, 0, 0, 0);
    run(OP_EW,      R, 0, A_LN, B_G, A_G, 0, 0, 0);
    run(OP_ADD,     R, 0, A_G, B_B, A_B, 0, 0, 0);
    run(OP_EW,      R, 0, A_B, B_MU, A_M1, 0, 0, 0);
    run(OP_EW,      R, 0, A_XP, B_NMU, A_M2, 0, 0, 0);
    run(OP_ADD,     R, 0, A_M1, A_M2, A_XK, 0, 0, 1);
    if (nj > 1) loadw(1);
    for (int j = 0; j < nj; j++) begin
      mv(j);
      if (j + 2 < nj) loadw(j + 2);                      // refill the bank just released
    end
    run(OP_SIG,     R, 0, A_R, 0, A_SIG, 0, 0, 0);
    run(OP_EXP,     R, 0, A_K, 0, A_EXP, 0, 0, 0);
    run(OP_DIV,     R, 0, A_V, A_EXP, A_DIV, 0, 0, 0);
    run(OP_SAVE,    R, 0, A_X, 0, B_SAVE, 0, 0, 0);
    run(OP_RESTORE, R, 0, B_SAVE, 0, A_RS, 0, 0, 0);
    repeat (4) @(posedge clk);

    for (int k = 0; k < A_ROWS; k++) begin
      @(negedge clk);
      host_rd_addr = 8'(k);
      @(negedge clk);
      for (int i = 0; i < L; i++) r[k][i] = int'(host_rd_data[i]);
    end
    for (int k = 0; k < 6 * R; k++)
      for (int i = 0; i < L; i++) bram[k][i] = int'(lane(32'(EXT_V + k), i));

    for (int k = 0; k < R; k++)
      for (int i = 0; i < L; i++) begin
        expect_exact("x", r[A_X + k][i], int'(act_t'(bram[B_X + k][i])));
        expect_exact("x_prev", r[A_XP + k][i], int'(act_t'(bram[B_XP + k][i])));
      end
    // LayerNorm over D elements (4 fraction bits)
    begin
      real mu, vr, sd;
      mu = 0; vr = 0;
      for (int k = 0; k < R; k++) for (int i = 0; i < L; i++) mu += r[A_X + k][i];
      mu /= D;
      for (int k = 0; k < R; k++) for (int i = 0; i < L; i++) vr += (r[A_X + k][i] - mu) ** 2;
      sd = $sqrt(vr / D * 16.0 + 1.0) / 4.0;
      for (int k = 0; k < R; k++)
        for (int i = 0; i < L; i++) begin
          real e;
          e = (r[A_X + k][i] - mu) / sd * 16.0;
          if (e > 255.0) e = 255.0;
          if (e < -255.0) e = -255.0;
          expect_near("layernorm", r[A_LN + k][i], e, 2.0 + 0.08 * rabs(e));
        end
    end
    // affine LayerNorm and token shift
    for (int k = 0; k < R; k++)
      for (int i = 0; i < L; i++) begin
        expect_exact("ln scale", r[A_G + k][i], ref_dpot(r[A_LN + k][i], bram[B_G + k][i]));
        expect_exact("ln bias", r[A_B + k][i], sat9(r[A_G + k][i] + int'(act_t'(bram[B_B + k][i]))));
        expect_exact("mix mu", r[A_M1 + k][i], ref_dpot(r[A_B + k][i], bram[B_MU + k][i]));
        expect_exact("mix 1-mu", r[A_M2 + k][i], ref_dpot(r[A_XP + k][i], bram[B_NMU + k][i]));
        expect_exact("mix sum", r[A_XK + k][i], sat9(r[A_M1 + k][i] + r[A_M2 + k][i]));
      end
    // projections: chunk c, lane i = sum_n W[word c*N+n][i] * xk_n
    for (int p = 0; p < 3; p++) begin
      int dst;
      dst = (p == 0) ? A_K : (p == 1) ? A_V : A_R;
      for (int c = 0; c < R; c++)
        for (int i = 0; i < L; i++) begin
          longint s;
          s = 0;
          for (int n = 0; n < N; n++) begin
            s += ref_dpot(r[A_XK + n / L][n % L], int'(lane(32'(EXT_P[p] + c * N + n), i)));
            if (s > 32767) s = 32767;
            if (s < -32768) s = -32768;
          end
          expect_exact("mv", r[dst + c][i], sat9(s));
        end
    end
    // complex units
    for (int k = 0; k < R; k++)
      for (int i = 0; i < L; i++) begin
        real e;
        expect_near("sig", r[A_SIG + k][i], real_sig_q88(r[A_R + k][i] * 16) / 16.0, 1.0);
        e = 16.0 * $exp(r[A_K + k][i] / 16.0);
        if (e > 255.0) e = 255.0;
        expect_near("exp", r[A_EXP + k][i], e, 0.04 * e + 1.0);
        if (r[A_EXP + k][i] != 0) begin
          e = 16.0 * r[A_V + k][i] / r[A_EXP + k][i];
          if (e > 255.0) e = 255.0;
          if (e < -255.0) e = -255.0;
          expect_near("div", r[A_DIV + k][i], e, 0.07 * rabs(e) + 1.0);
        end
        expect_exact("save/restore", r[A_RS + k][i], r[A_X + k][i]);
      end

    $display("D=%0d jobs=%0d stall=%0d overlap=%0d MV=%0d EW=%0d ADD=%0d bank0=%0d bank1=%0d",
             D, nj, stall_cycles, overlap_cycles, n_mode[0], n_mode[1], n_mode[2], n_bank[0], n_bank[1]);
    checks += 5;
    if (stall_cycles == 0)   begin failures++; $display("no MV stall happened"); end
    if (overlap_cycles == 0) begin failures++; $display("no load/compute overlap happened"); end
    if (n_mode[0] == 0 || n_mode[1] == 0 || n_mode[2] == 0) begin failures++; $display("array mode unused"); end
    if (n_bank[0] == 0 || n_bank[1] == 0) begin failures++; $display("ping-pong bank unused"); end
    if (n_op[OP_EXP] == 0 || n_op[OP_SIG] == 0 || n_op[OP_DIV] == 0 || n_op[OP_LN] == 0)
      begin failures++; $display("operation unused"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
