// tb_act_buffer: random writes against a memory model while the three read
// ports read independent random rows; every port must return the row as it
// was before the clock edge (one-cycle latency, read-before-write).
module tb_act_buffer;
  import hfrwkv_pkg::*;
  localparam int L = 4, D = 16;
  logic clk = 0;
  logic [3:0] rd_addr_a = 0, rd_addr_b = 0, rd_addr_h = 0, wr_addr = 0;
  act_t rd_data_a [L];
  act_t rd_data_b [L];
  act_t rd_data_h [L];
  logic wr_en = 0;
  act_t wr_data [L];
  int model [D][L];
  int checks = 0, failures = 0;

  act_buffer #(.LANES(L), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 4'(a);
      for (int l = 0; l < L; l++) begin
        model[a][l] = $urandom_range(0, 510) - 255; wr_data[l] = act_t'(model[a][l]);
      end
    end
    for (int t = 0; t < 500; t++) begin
      int ra, rb, rh;
      @(negedge clk);
      ra = $urandom_range(0, D - 1); rb = $urandom_range(0, D - 1); rh = $urandom_range(0, D - 1);
      rd_addr_a = 4'(ra); rd_addr_b = 4'(rb); rd_addr_h = 4'(rh);
      wr_en = $urandom_range(0, 1);
      wr_addr = (t % 4 == 0) ? 4'(ra) : 4'($urandom_range(0, D - 1));
      for (int l = 0; l < L; l++) wr_data[l] = act_t'($urandom_range(0, 510) - 255);
      @(posedge clk);
      #1;
      for (int l = 0; l < L; l++) begin
        checks += 3;
        if (int'(rd_data_a[l]) != model[ra][l]) begin failures++; $display("a a%0d", ra); end
        if (int'(rd_data_b[l]) != model[rb][l]) begin failures++; $display("b a%0d", rb); end
        if (int'(rd_data_h[l]) != model[rh][l]) begin failures++; $display("h a%0d", rh); end
      end
      if (wr_en) for (int l = 0; l < L; l++) model[wr_addr][l] = int'(wr_data[l]);
    end
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
