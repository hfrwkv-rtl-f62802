// tb_atac: random vectors of 1..6 blocks through an 8-wide ATAC and a
// 512-wide ATAC (the paper's tree parallelism). Each sum must be exact and
// must appear B + log2(P) cycles after the first block, i.e. B + 9 cycles for
// P = 512. The held output is checked to stay constant afterwards.
module tb_atac;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  logic in_valid = 0, first = 0, last = 0;
  logic signed [15:0] v8 [8];
  logic signed [15:0] v512 [512];
  logic ov8, ov512;
  logic signed [31:0] s8, s512;

  atac #(.P(8), .IN_W(16), .OUT_W(32)) dut8 (
    .clk, .rst_n, .in_valid, .first, .last, .in_vec(v8), .out_valid(ov8), .sum(s8));
  atac #(.P(512), .IN_W(16), .OUT_W(32)) dut512 (
    .clk, .rst_n, .in_valid, .first, .last, .in_vec(v512), .out_valid(ov512), .sum(s512));

  task automatic run(input int nb);
    longint e8, e512; int start;
    e8 = 0; e512 = 0;
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      if (b == 0) start = cyc;
      in_valid = 1; first = (b == 0); last = (b == nb - 1);
      for (int i = 0; i < 8; i++) begin
        v8[i] = 16'($urandom_range(0, 65535)); e8 += v8[i];
      end
      for (int i = 0; i < 512; i++) begin
        v512[i] = 16'($urandom_range(0, 65535)); e512 += v512[i];
      end
    end
    @(negedge clk);
    in_valid = 0; first = 0; last = 0;
    while (!ov8) @(negedge clk);
    checks++;
    if (s8 != 32'(e8) || cyc - start != nb + 3) begin
      failures++; $display("P=8 sum=%0d exp=%0d cycles=%0d", s8, e8, cyc - start);
    end
    while (!ov512) @(negedge clk);
    checks++;
    if (s512 != 32'(e512) || cyc - start != nb + 9) begin
      failures++; $display("P=512 sum=%0d exp=%0d cycles=%0d", s512, e512, cyc - start);
    end
    repeat (3) @(negedge clk);
    checks++;
    if (s512 != 32'(e512) || s8 != 32'(e8)) begin failures++; $display("not held"); end
  endtask

  initial begin
    for (int i = 0; i < 8; i++) v8[i] = '0;
    for (int i = 0; i < 512; i++) v512[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) run(1 + (t % 6));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
