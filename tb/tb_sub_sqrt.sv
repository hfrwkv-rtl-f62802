// tb_sub_sqrt: random moment pairs; sigma must be floor(sqrt(max(a-b,0)+1))
// (checked as r^2 <= v < (r+1)^2) one cycle after the inputs.
module tb_sub_sqrt;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [31:0] mean_sq_x = 0, sq_mean = 0;
  logic out_valid;
  logic [15:0] sigma;
  int checks = 0, failures = 0;

  sub_sqrt #(.EPS(1)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      longint unsigned v, r;
      @(negedge clk);
      in_valid = 1;
      mean_sq_x = $urandom() >> $urandom_range(0, 31);
      sq_mean   = (t % 5 == 0) ? mean_sq_x + 3 : ($urandom() >> $urandom_range(0, 31));
      v = (mean_sq_x > sq_mean) ? longint'(mean_sq_x - sq_mean) + 1 : 1;
      @(negedge clk);
      in_valid = 0;
      r = sigma;
      checks++;
      if (!out_valid || r * r > v || (r + 1) * (r + 1) <= v) begin
        failures++;
        if (failures < 10) $display("v=%0d sigma=%0d", v, r);
      end
    end
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
