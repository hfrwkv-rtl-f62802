// ccu: complex computing units - NCU division units and NCU exponential/sigmoid
// units working on rows of the activation buffer.
//
// A row of LANES activations (and a second row for division) is accepted when
// in_ready is high and processed in LANES/NCU slices of NCU lanes, one slice
// per cycle into the pipelined units. Activations (9-bit, 4 fractional bits)
// are widened to the units' 16-bit Q8.8 format; for division the signs are
// split off first, the magnitudes divided by the unsigned divider and the
// sign a_sign xor b_sign restored afterwards. Results are truncated back to
// 9 bits with saturation. out_valid rises for one cycle when the whole result
// row is in y. Timing: LANES/NCU slice cycles plus the unit latency (3 cycles
// for division, 2 for exp/sigmoid) plus one register. The unit count of 128
// of each kind is the paper's; slicing, conversion and handshake are this
// design's.
module ccu
  import hfrwkv_pkg::*;
#(
  parameter int unsigned LANES = 512,
  parameter int unsigned NCU   = 128
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  cu_op_e op,
  input  act_t   a [LANES],
  input  act_t   b [LANES],
  output logic   out_valid,
  output act_t   y [LANES]
);
  localparam int unsigned NS = LANES / NCU;
  localparam int unsigned SW = (NS > 1) ? $clog2(NS) : 1;

  act_t   a_r [LANES];
  act_t   b_r [LANES];
  cu_op_e op_r;
  logic   busy;
  logic [SW:0] n_iss, n_ret;

  logic        iss;
  logic [15:0] ux [NCU];
  logic [15:0] uy [NCU];
  logic [15:0] ex [NCU];
  logic        d_v [NCU];
  logic        e_v [NCU];
  logic [15:0] dq [NCU];
  logic [15:0] ez [NCU];
  logic        ret;

  assign in_ready = !busy;
  assign iss      = busy && (n_iss < (SW+1)'(NS));

  always_comb begin
    for (int j = 0; j < NCU; j++) begin
      act_t xa, xb;
      xa    = a_r[int'(n_iss[SW-1:0]) * NCU + j];
      xb    = b_r[int'(n_iss[SW-1:0]) * NCU + j];
      ux[j] = 16'(xa[8] ? -32'(xa) : 32'(xa));
      uy[j] = 16'(xb[8] ? -32'(xb) : 32'(xb));
      ex[j] = 16'(signed'(xa)) << (CU_FRAC - ACT_FRAC);
    end
  end

  for (genvar j = 0; j < NCU; j++) begin : g_cu
    divu #(.W(16), .Q_FRAC(CU_FRAC)) u_divu (
      .clk, .rst_n, .in_valid(iss && op_r == CU_DIV), .x(ux[j]), .y(uy[j]),
      .out_valid(d_v[j]), .q(dq[j]));
    exp_sigmoid u_exps (
      .clk, .rst_n, .in_valid(iss && op_r != CU_DIV), .mode(op_r == CU_SIG),
      .x(ex[j]), .out_valid(e_v[j]), .z(ez[j]));
  end

  assign ret = d_v[0] || e_v[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; n_iss <= '0; n_ret <= '0; op_r <= CU_EXP; out_valid <= 1'b0;
      for (int i = 0; i < LANES; i++) begin
        a_r[i] <= '0; b_r[i] <= '0; y[i] <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      if (!busy) begin
        if (in_valid) begin
          busy  <= 1'b1;
          a_r   <= a;
          b_r   <= b;
          op_r  <= op;
          n_iss <= '0;
          n_ret <= '0;
        end
      end else begin
        if (iss) n_iss <= n_iss + (SW+1)'(1);
        if (ret) begin
          for (int j = 0; j < NCU; j++) begin
            int unsigned l;
            logic signed [31:0] m;
            l = int'(n_ret[SW-1:0]) * NCU + j;
            m = 32'((op_r == CU_DIV ? dq[j] : ez[j]) >> (CU_FRAC - ACT_FRAC));
            if (op_r == CU_DIV && (a_r[l][8] ^ b_r[l][8])) m = -m;
            y[l] <= sat_act(m);
          end
          n_ret <= n_ret + (SW+1)'(1);
          if (n_ret + (SW+1)'(1) == (SW+1)'(NS)) begin
            busy      <= 1'b0;
            out_valid <= 1'b1;
          end
        end
      end
    end
  end
endmodule
