// tb_divu: random and directed divisions. Each quotient is compared with the
// reference model of the LOD / table / shift algorithm, bounded against the
// exact quotient (table error below 1/16 relative), and must appear exactly 3
// cycles after its operands.
module tb_divu;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [15:0] x = 0, y = 0;
  logic out_valid;
  logic [15:0] q;
  int checks = 0, failures = 0, cyc = 0;

  divu #(.W(16), .Q_FRAC(8)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  int ex [$], ey [$], ec [$];

  always @(negedge clk) begin
    if (out_valid) begin
      int a, b, c, r;
      real t;
      a = ex.pop_front(); b = ey.pop_front(); c = ec.pop_front();
      r = ref_div(a, b, 8);
      checks++;
      if (int'(q) != r || cyc != c) begin
        failures++;
        if (failures < 10) $display("%0d/%0d q=%0d exp=%0d cyc=%0d/%0d", a, b, q, r, cyc, c);
      end
      if (b != 0 && a != 0) begin
        t = 256.0 * a / b;
        if (t < 60000.0 && t > 64.0) begin
          checks++;
          if (rabs(real'(q) - t) > t / 16.0 + 1.0) begin
            failures++;
            $display("accuracy %0d/%0d q=%0d true=%f", a, b, q, t);
          end
        end
      end
    end
  end

  task automatic put(input int a, input int b);
    @(negedge clk);
    in_valid = 1; x = 16'(a); y = 16'(b);
    ex.push_back(a); ey.push_back(b); ec.push_back(cyc + 3);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    put(100, 10);   // exactly 10.0 -> 2560
    put(1, 1);
    put(0, 5);
    put(7, 0);
    put(65535, 1);
    put(3, 40000);
    for (int t = 0; t < 3000; t++) begin
      int a, b;
      a = $urandom_range(0, 65535) >> $urandom_range(0, 15);
      b = 1 + ($urandom_range(0, 65534) >> $urandom_range(0, 15));
      put(a, b);
      if (t % 13 == 0) begin @(negedge clk); in_valid = 0; end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (ex.size() != 0) begin failures++; $display("missing outputs"); end
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
