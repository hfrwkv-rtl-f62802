// tb_lod: exhaustive check of the 16-bit leading-one detector against a
// linear scan, including the all-zero input.
module tb_lod;
  logic [15:0] d;
  logic [3:0]  pos;
  logic        found;
  int checks = 0, failures = 0;

  lod #(.K(16)) dut (.*);

  initial begin
    for (int v = 0; v < 65536; v++) begin
      int e;
      d = 16'(v); #1;
      e = -1;
      for (int b = 0; b < 16; b++) if (v[b]) e = b;
      checks++;
      if ((e < 0 && found) || (e >= 0 && (!found || int'(pos) != e))) begin
        failures++;
        if (failures < 10) $display("d=%h pos=%0d found=%b exp=%0d", d, pos, found, e);
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
