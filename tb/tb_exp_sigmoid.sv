// tb_exp_sigmoid: sweeps both modes of the shared unit. exp results must lie
// within 1% + 0.6% per unit of |x| (plus 2 LSB) of e^x, the bound set by the
// 1.0111b approximation of log2(e), over the range where the Q8.8 result is
// representable and saturate above it; sigmoid results must match the paper's
// piecewise-linear function within 2 LSB. Every output must appear exactly
// 2 cycles after its input, with the modes interleaved.
module tb_exp_sigmoid;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, mode = 0;
  logic [15:0] x = 0;
  logic out_valid;
  logic [15:0] z;
  int checks = 0, failures = 0, cyc = 0;

  exp_sigmoid dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  int qx [$], qm [$], qc [$];

  always @(negedge clk) begin
    if (out_valid) begin
      int xv, m, c;
      real t;
      xv = qx.pop_front(); m = qm.pop_front(); c = qc.pop_front();
      checks++;
      if (c != cyc) begin failures++; $display("latency x=%0d", xv); end
      if (m == 0) begin
        t = real_exp_q88(xv);
        checks++;
        // log2(e) ~ 1.0111b is 0.36% low, so the relative error grows with |x|
        if (t >= 72000.0 || z == 16'hFFFF) begin
          if (z != 16'hFFFF || t < 55000.0) begin failures++; $display("exp sat x=%0d z=%0d", xv, z); end
        end else if (rabs(real'(z) - t) > (0.01 + 0.006 * rabs(real'(xv)) / 256.0) * t + 2.0) begin
          failures++;
          if (failures < 10) $display("exp x=%0d z=%0d true=%f", xv, z, t);
        end
      end else begin
        t = real_sig_q88(xv);
        checks++;
        if (rabs(real'(z) - t) > 2.0) begin
          failures++;
          if (failures < 10) $display("sig x=%0d z=%0d ref=%f", xv, z, t);
        end
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int v = -4096; v <= 2048; v += 3) begin   // -16.0 .. 8.0
      @(negedge clk);
      in_valid = 1; mode = v[0]; x = 16'(v);
      qx.push_back(v); qm.push_back(int'(v[0])); qc.push_back(cyc + 2);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (qx.size() != 0) begin failures++; $display("missing outputs"); end
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
