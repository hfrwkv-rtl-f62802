// ext_mem_model: behavioural model of the external (HBM) memory read port,
// for simulation only. Requests are accepted when req_ready is high (ready is
// withheld at random when STALL is set), and each accepted request returns
// one word LAT cycles later, in order. The memory content is generated, not
// stored: lane i of word a holds word_lane(a, i), a 9-bit value.
module ext_mem_model #(
  parameter int unsigned LANES = 8,
  parameter int unsigned LAT   = 4,
  parameter bit          STALL = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic [31:0]          req_addr,
  output logic                 rsp_valid,
  output logic [LANES*9-1:0]   rsp_data
);
  logic [LAT-1:0]      v_pipe;
  logic [31:0]         a_pipe [LAT];

  function automatic logic [8:0] word_lane(input logic [31:0] a, input int i);
    return 9'((a * 73) + (i * 29) + ((a >> 3) * 7) + (i * i));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_ready <= 1'b0;
      v_pipe    <= '0;
      for (int k = 0; k < LAT; k++) a_pipe[k] <= '0;
    end else begin
      req_ready <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
      v_pipe    <= {v_pipe[LAT-2:0], req_valid && req_ready};
      a_pipe[0] <= req_addr;
      for (int k = 1; k < LAT; k++) a_pipe[k] <= a_pipe[k-1];
    end
  end

  always_comb begin
    rsp_valid = v_pipe[LAT-1];
    for (int i = 0; i < LANES; i++) rsp_data[i*9 +: 9] = word_lane(a_pipe[LAT-1], i);
  end
endmodule
