// tb_mvpa: an 8-lane array computes random 8 x l matrix-vector products
// (l = 16 and 40 columns), element-wise products and additions. Results are
// checked against reference arithmetic, and the cycle counts against the
// stated latencies: l+4 cycles for an MV chunk and rows+4 cycles for an
// element-wise pass.
module tb_mvpa;
  import hfrwkv_pkg::*;
  import tb_ref_pkg::*;

  localparam int L = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, first = 0, last = 0;
  mv_mode_e mode = MODE_MV;
  act_t x_bcast = '0;
  act_t x_vec [L];
  wgt_t w_vec [L];
  logic out_valid;
  act_t y [L];
  int checks = 0, failures = 0, cyc = 0;

  mvpa #(.LANES(L)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  typedef int row_t [L];
  int exp_y [$];   // L values per expected row
  int exp_cyc [$];

  always @(negedge clk) begin
    if (out_valid) begin
      checks++;
      if (exp_cyc.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        row_t e; int c; bit bad;
        for (int i = 0; i < L; i++) e[i] = exp_y.pop_front();
        c = exp_cyc.pop_front(); bad = 0;
        for (int i = 0; i < L; i++) if (int'(y[i]) != e[i]) bad = 1;
        if (bad || c != cyc) begin
          failures++;
          $display("mismatch cyc=%0d exp_cyc=%0d y0=%0d e0=%0d", cyc, c, y[0], e[0]);
        end
      end
    end
  end

  task automatic run_mv(input int ncol);
    longint s [L]; row_t e; int start;
    for (int i = 0; i < L; i++) s[i] = 0;
    for (int n = 0; n < ncol; n++) begin
      int xi;
      xi = $urandom_range(0, 510) - 255;
      @(negedge clk);
      if (n == 0) start = cyc;
      in_valid = 1; mode = MODE_MV; first = (n == 0); last = (n == ncol - 1);
      x_bcast = act_t'(xi);
      for (int i = 0; i < L; i++) begin
        int wi;
        wi = $urandom_range(0, 511);
        w_vec[i] = wgt_t'(wi);
        x_vec[i] = act_t'($urandom_range(0, 100));   // ignored in MV mode
        s[i] += ref_dpot(xi, wi);
        if (s[i] > 32767) s[i] = 32767;
        if (s[i] < -32768) s[i] = -32768;
      end
    end
    for (int i = 0; i < L; i++) e[i] = sat9(s[i]);
    for (int i = 0; i < L; i++) exp_y.push_back(e[i]);
    exp_cyc.push_back(start + ncol + 3);   // chunk occupies cycles start..start+ncol+3
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic run_rows(input mv_mode_e m, input int rows);
    for (int r = 0; r < rows; r++) begin
      row_t e;
      @(negedge clk);
      in_valid = 1; mode = m; first = 0; last = 0;
      for (int i = 0; i < L; i++) begin
        int xi, wi;
        xi = $urandom_range(0, 510) - 255;
        wi = $urandom_range(0, 511);
        x_vec[i] = act_t'(xi); w_vec[i] = wgt_t'(wi);
        e[i] = (m == MODE_EW) ? ref_dpot(xi, wi) : sat9(xi + int'($signed(wgt_t'(wi))));
      end
      for (int i = 0; i < L; i++) exp_y.push_back(e[i]);
      exp_cyc.push_back(cyc + 4);   // a pass of R rows ends R+4 cycles after it starts
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    for (int i = 0; i < L; i++) begin x_vec[i] = '0; w_vec[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int t = 0; t < 20; t++) begin
      run_mv((t % 2) ? 16 : 40);
      repeat (5) @(posedge clk);
    end
    for (int t = 0; t < 10; t++) begin
      run_rows(MODE_EW, 2 + t);
      run_rows(MODE_ADD, 1 + t);
      repeat (5) @(posedge clk);
    end
    repeat (8) @(posedge clk);
    checks++;
    if (exp_cyc.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
