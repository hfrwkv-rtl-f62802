// tb_pmac: drives random dot products (accumulator on) and element-wise
// products (accumulator off) through one PMAC and checks each result and its
// 3-cycle latency against a saturating reference accumulation.
module tb_pmac;
  import hfrwkv_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, ac_on = 0, first = 0, last = 0;
  act_t x = '0;
  wgt_t w = '0;
  logic out_valid;
  logic signed [15:0] acc;
  int checks = 0, failures = 0, cyc = 0;

  pmac dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  // expected results, tagged with the cycle in which they must appear
  int exp_val [$];
  int exp_cyc [$];

  always @(negedge clk) begin
    if (out_valid) begin
      checks++;
      if (exp_val.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        int v, c;
        v = exp_val.pop_front(); c = exp_cyc.pop_front();
        if (int'(acc) != v || cyc != c) begin
          failures++;
          $display("acc=%0d exp=%0d cyc=%0d exp_cyc=%0d", acc, v, cyc, c);
        end
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int t = 0; t < 200; t++) begin
      int n; longint s;
      n = 1 + $urandom_range(0, 40);
      s = 0;
      for (int k = 0; k < n; k++) begin
        int xi, wi;
        xi = $urandom_range(0, 510) - 255;
        wi = $urandom_range(0, 511);
        if (t % 7 == 0) xi = 255;          // drive into saturation
        if (t % 7 == 0) wi = 9'b0_01_1_00_1_00;
        s = s + ref_dpot(xi, wi);
        if (s > 32767) s = 32767;
        if (s < -32768) s = -32768;
        @(negedge clk);
        in_valid = 1; ac_on = (t % 2 == 0); first = (k == 0); last = (k == n - 1);
        x = act_t'(xi); w = wgt_t'(wi);
        if (!ac_on) begin
          exp_val.push_back(ref_dpot(xi, wi)); exp_cyc.push_back(cyc + 3);
        end else if (k == n - 1) begin
          exp_val.push_back(int'(s)); exp_cyc.push_back(cyc + 3);
        end
      end
      @(negedge clk);
      in_valid = 0;
      if ($urandom_range(0, 1)) @(negedge clk);
    end
    repeat (6) @(posedge clk);
    checks++;
    if (exp_val.size() != 0) begin failures++; $display("missing outputs"); end
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
