// tb_vector_bram: writes random rows to random addresses, keeps a model of
// the memory, and checks reads (one-cycle latency) including a read of the
// row written in the same cycle, which must return the previous contents.
module tb_vector_bram;
  import hfrwkv_pkg::*;
  localparam int L = 4, D = 32;
  logic clk = 0;
  logic wr_en = 0;
  logic [4:0] wr_addr = 0, rd_addr = 0;
  act_t wr_data [L];
  act_t rd_data [L];
  int model [D][L];
  int checks = 0, failures = 0;

  vector_bram #(.LANES(L), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 5'(a);
      for (int l = 0; l < L; l++) begin
        model[a][l] = $urandom_range(0, 510) - 255; wr_data[l] = act_t'(model[a][l]);
      end
    end
    for (int t = 0; t < 500; t++) begin
      int ra;
      @(negedge clk);
      ra = $urandom_range(0, D - 1);
      rd_addr = 5'(ra);
      wr_en = $urandom_range(0, 1);
      wr_addr = (t % 5 == 0) ? 5'(ra) : 5'($urandom_range(0, D - 1));
      for (int l = 0; l < L; l++) wr_data[l] = act_t'($urandom_range(0, 510) - 255);
      @(posedge clk);
      #1;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (int'(rd_data[l]) != model[ra][l]) begin failures++; $display("a%0d l%0d", ra, l); end
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
