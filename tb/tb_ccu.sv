// tb_ccu: rows of 8 activations through a complex-unit group of 2 division
// and 2 exp/sigmoid units (4 slices per row). exp and sigmoid results are
// compared with e^x and the piecewise-linear sigmoid, divisions with a/b, all
// in the 9-bit activation format, including negative operands for the sign
// separation of the divider and a division by zero (saturates).
module tb_ccu;
  import hfrwkv_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 8, N = 2;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid;
  cu_op_e op = CU_EXP;
  act_t a [L];
  act_t b [L];
  act_t y [L];
  int checks = 0, failures = 0;

  ccu #(.LANES(L), .NCU(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic row(input cu_op_e o);
    int av [L], bv [L];
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    for (int i = 0; i < L; i++) begin
      av[i] = (o == CU_EXP) ? $urandom_range(0, 150) - 120 : $urandom_range(0, 510) - 255;
      bv[i] = $urandom_range(0, 510) - 255;
      if (o == CU_DIV && i == 3) bv[i] = 0;
      if (o == CU_DIV && i == 4) begin av[i] = 200; bv[i] = 16; end
      a[i] = act_t'(av[i]); b[i] = act_t'(bv[i]);
    end
    in_valid = 1; op = o;
    @(negedge clk);
    in_valid = 0;
    while (!out_valid) @(negedge clk);
    for (int i = 0; i < L; i++) begin
      real e, tol;
      if (o == CU_EXP)      begin e = 16.0 * $exp(av[i] / 16.0); tol = 0.04 * e + 1.0; end
      else if (o == CU_SIG) begin e = real_sig_q88(av[i] * 16) / 16.0; tol = 1.0; end
      else begin
        if (bv[i] == 0) e = (av[i] < 0) ? -255.0 : 255.0;
        else e = 16.0 * av[i] / bv[i];
        tol = 0.07 * rabs(e) + 1.0;
      end
      if (e > 255.0) e = 255.0;
      if (e < -255.0) e = -255.0;
      if (o == CU_DIV && bv[i] == 0 && av[i] == 0) e = 0.0;
      checks++;
      if (rabs(real'(y[i]) - e) > tol) begin
        failures++;
        if (failures < 10) $display("op=%0d a=%0d b=%0d y=%0d exp=%f", o, av[i], bv[i], y[i], e);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < L; i++) begin a[i] = '0; b[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) row(cu_op_e'(t % 3));
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
