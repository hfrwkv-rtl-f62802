// tb_weight_buffer: fills both banks of a small ping-pong buffer with
// address-dependent patterns, checks read data (one-cycle latency) from each
// bank while the other is written, and the full/empty flag protocol.
module tb_weight_buffer;
  import hfrwkv_pkg::*;
  localparam int L = 4, D = 16;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, wr_bank = 0, fill_done = 0, rd_bank = 0, release_bank = 0;
  logic [3:0] wr_addr = 0, rd_addr = 0;
  wgt_t wr_data [L];
  wgt_t rd_data [L];
  logic [1:0] bank_full;
  int checks = 0, failures = 0;

  weight_buffer #(.LANES(L), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  function automatic wgt_t pat(input int b, input int a, input int l);
    return wgt_t'(b * 211 + a * 37 + l * 5 + 1);
  endfunction

  task automatic fill(input int b);
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      wr_en = 1; wr_bank = 1'(b); wr_addr = 4'(a);
      for (int l = 0; l < L; l++) wr_data[l] = pat(b, a, l);
    end
    @(negedge clk);
    wr_en = 0; fill_done = 1;
    @(negedge clk);
    fill_done = 0;
    checks++;
    if (!bank_full[b]) begin failures++; $display("bank %0d not full", b); end
  endtask

  task automatic drain(input int b);
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      rd_bank = 1'(b); rd_addr = 4'(a);
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        checks++;
        if (rd_data[l] !== pat(b, a, l)) begin failures++; $display("b%0d a%0d l%0d", b, a, l); end
      end
    end
    release_bank = 1;
    @(negedge clk);
    release_bank = 0;
    checks++;
    if (bank_full[b]) begin failures++; $display("bank %0d not released", b); end
  endtask

  initial begin
    for (int l = 0; l < L; l++) wr_data[l] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    checks++;
    if (bank_full != 2'b00) failures++;
    fill(0);
    fork
      drain(0);
      fill(1);
    join
    drain(1);
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
