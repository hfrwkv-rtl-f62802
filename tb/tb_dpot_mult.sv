// tb_dpot_mult: exhaustive check of the Delta-PoT multiplier against an
// independent integer model, plus the worked example of the weight figure
// (w = 1_01_101_111 -> -(1/2 + 1/4 + 1/32) * 2 = -1.5625).
module tb_dpot_mult;
  import hfrwkv_pkg::*;
  import tb_ref_pkg::*;

  act_t x, y;
  wgt_t w;
  int checks = 0, failures = 0;

  dpot_mult dut (.x(x), .w(w), .y(y));

  initial begin
    // worked example: sign 1, dq0 = 1, v1 = 1 dq1 = 1, v2 = 1 dq2 = 3
    x = 9'sd64; w = 9'b1_01_1_01_1_11; #1;
    checks++; if (y !== -9'sd100) begin failures++; $display("example: y=%0d", y); end
    for (int xi = -255; xi <= 255; xi++)
      for (int wi = 0; wi < 512; wi++) begin
        x = act_t'(xi); w = wgt_t'(wi); #1;
        checks++;
        if (int'(y) != ref_dpot(xi, wi)) begin
          failures++;
          if (failures < 10) $display("x=%0d w=%b y=%0d exp=%0d", xi, w, y, ref_dpot(xi, wi));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
