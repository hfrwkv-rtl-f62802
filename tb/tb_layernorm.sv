// tb_layernorm: random vectors of 1..4 blocks of 8 elements (16-bit inputs
// with 4 fractional bits) through an 8-wide LayerNorm. Every output must be
// within 2 LSB + 8% of the exact (x - mean) / std computed in real arithmetic
// (the division table is accurate to about 1/16), blocks must come back in
// order with out_last on the final one, and a constant vector must give 0.
module tb_layernorm;
  import hfrwkv_pkg::*;
  import tb_ref_pkg::*;

  localparam int P = 8, MB = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0, in_ready;
  logic signed [15:0] x [P];
  logic out_valid, out_last;
  act_t y [P];
  int checks = 0, failures = 0;

  layernorm #(.P(P), .MAX_BLK(MB)) dut (.*);
  always #5 clk = ~clk;

  int xs [MB*P];

  task automatic run(input int nb, input bit constant);
    real mu, var_, sd;
    int ob;
    mu = 0; var_ = 0;
    for (int k = 0; k < nb * P; k++) begin
      xs[k] = constant ? 100 : ($urandom_range(0, 1600) - 800);   // +-50.0
      mu += xs[k];
    end
    mu = mu / (nb * P);
    for (int k = 0; k < nb * P; k++) var_ += (xs[k] - mu) * (xs[k] - mu);
    sd = $sqrt(var_ / (nb * P) * 16.0 + 1.0) / 4.0;   // in input LSBs, eps = 1/256
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      in_valid = 1; in_last = (b == nb - 1);
      for (int i = 0; i < P; i++) x[i] = 16'(xs[b*P + i]);
    end
    @(negedge clk);
    in_valid = 0; in_last = 0;
    ob = 0;
    while (ob < nb) begin
      @(negedge clk);
      if (out_valid) begin
        for (int i = 0; i < P; i++) begin
          real e;
          e = (xs[ob*P + i] - mu) / sd * 16.0;   // Q4.4 units
          if (e > 255.0) e = 255.0;
          if (e < -255.0) e = -255.0;
          checks++;
          if (rabs(real'(y[i]) - e) > 2.0 + 0.08 * rabs(e)) begin
            failures++;
            if (failures < 10) $display("nb=%0d blk=%0d lane=%0d y=%0d exp=%f", nb, ob, i, y[i], e);
          end
        end
        checks++;
        if (out_last != (ob == nb - 1)) begin failures++; $display("out_last wrong"); end
        ob++;
      end
    end
  endtask

  initial begin
    for (int i = 0; i < P; i++) x[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) run(1 + (t % MB), t % 9 == 8);
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
