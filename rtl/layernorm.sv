// layernorm: on-chip LayerNorm, y_i = (x_i - mu) / sigma.
//
// A vector of d = B*P elements streams in as B blocks of P 16-bit signed
// values (4 fractional bits), one block per cycle while in_ready is high, the
// last flagged in_last. Three units work on the stream at once:
//   Delay unit: a FIFO keeps the blocks until mu and sigma are known.
//   Mean unit : an ATAC sums x_i; the sum is divided by d with a right shift
//               by log2(P) and a shift-add multiplication by a 17-bit
//               reciprocal of B (the paper's "n + d/2^n" shift addition).
//   Std unit  : P squarers feed a second ATAC that sums x_i^2; the same
//               division gives E[x^2]; a multiplier squares mu; sub_sqrt
//               returns sigma = sqrt(E[x^2] - mu^2 + eps).
// Once sigma is valid the blocks leave the FIFO one per cycle; each lane forms
// x_i - mu, splits off the sign, divides the magnitude by sigma in its own
// DIVU and restores the sign. The output is 9-bit signed with 4 fractional
// bits, one block per cycle, the last flagged out_last.
// Timing: statistics are ready B + log2(P) + 4 cycles after the first block
// (ATAC B + 9 cycles for P = 512, then divide, square, sub_sqrt); each output
// block follows its FIFO read by 4 cycles. A new vector is accepted once the
// previous one has been read out of the FIFO.
// The unit structure and the two-ATAC single-pass variance are the paper's;
// number formats, the reciprocal table, the FIFO depth (MAX_BLK blocks) and
// the one-DIVU-per-lane normalisation are this design's choices. The learned
// scale and bias of LayerNorm are applied elsewhere (array EW and ADD modes).
module layernorm
  import hfrwkv_pkg::*;
#(
  parameter int unsigned P       = 512,
  parameter int unsigned MAX_BLK = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               in_last,
  output logic               in_ready,
  input  logic signed [15:0] x [P],
  output logic               out_valid,
  output logic               out_last,
  output act_t               y [P]
);
  localparam int unsigned LP  = $clog2(P);
  localparam int unsigned BW  = $clog2(MAX_BLK + 1);
  localparam int unsigned SW  = 48;   // accumulator width of both ATACs

  typedef enum logic [1:0] {S_IN, S_STAT, S_NORM} state_e;
  state_e state;

  // ---------------- delay unit ----------------
  logic signed [15:0] fifo [MAX_BLK][P];
  logic [BW-1:0]      wr_ptr, rd_ptr, n_blk;

  // ---------------- mean / std ATACs ----------------
  logic signed [31:0] sq_in [P];
  logic               first_blk;
  logic               m_valid, s_valid;
  logic signed [SW-1:0] m_sum, s_sum;
  logic               acc_in;

  assign in_ready  = (state == S_IN) && (wr_ptr < BW'(MAX_BLK));
  assign acc_in    = in_valid && in_ready;
  assign first_blk = (wr_ptr == '0);

  always_comb begin
    for (int i = 0; i < P; i++) sq_in[i] = 32'(x[i]) * 32'(x[i]);
  end

  atac #(.P(P), .IN_W(16), .OUT_W(SW)) u_atac_mean (
    .clk, .rst_n, .in_valid(acc_in), .first(first_blk), .last(in_last),
    .in_vec(x), .out_valid(m_valid), .sum(m_sum));

  atac #(.P(P), .IN_W(32), .OUT_W(SW)) u_atac_sq (
    .clk, .rst_n, .in_valid(acc_in), .first(first_blk), .last(in_last),
    .in_vec(sq_in), .out_valid(s_valid), .sum(s_sum));

  // ---------------- divide by d: >> log2(P), then * recip(B) >> 16 ----------
  function automatic logic [16:0] recip(input logic [BW-1:0] b);
    return (b == '0) ? 17'd0 : 17'((65536 + int'(b) - 1) / int'(b));
  endfunction

  // shift-add multiplication by the reciprocal bits
  function automatic logic signed [SW+17:0] shift_add(input logic signed [SW-1:0] v,
                                                       input logic [16:0] r);
    logic signed [SW+17:0] a;
    a = '0;
    for (int k = 0; k < 17; k++)
      if (r[k]) a = a + ((SW+18)'(v) <<< k);
    return a;
  endfunction

  logic signed [SW+17:0] mean_w, msq_w;
  logic signed [15:0]    mu;
  logic [31:0]           mean_sq_x, mu_sq;
  logic                  st1_v, st2_v, sig_v;
  logic [15:0]           sigma;

  always_comb begin
    mean_w = shift_add(m_sum >>> LP, recip(n_blk)) >>> 16;
    msq_w  = shift_add(s_sum >>> LP, recip(n_blk)) >>> 16;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st1_v <= 1'b0; st2_v <= 1'b0; mu <= '0; mean_sq_x <= '0; mu_sq <= '0;
    end else begin
      // stage 1: the two divisions by d
      st1_v <= m_valid;
      if (m_valid) begin
        mu        <= 16'(mean_w);
        mean_sq_x <= 32'(msq_w);
      end
      // stage 2: mean squared (Std unit multiplier)
      st2_v <= st1_v;
      if (st1_v) mu_sq <= 32'(32'(mu) * 32'(mu));
    end
  end

  sub_sqrt #(.EPS(1)) u_sub_sqrt (
    .clk, .rst_n, .in_valid(st2_v), .mean_sq_x(mean_sq_x), .sq_mean(mu_sq),
    .out_valid(sig_v), .sigma(sigma));

  // ---------------- normalisation ----------------
  logic               rd_en;
  logic               n_last;
  logic [15:0]        mag  [P];
  logic [P-1:0]       neg;
  logic [P-1:0]       neg_d [3];
  logic [2:0]         last_d;
  logic               q_valid [P];
  logic [15:0]        q [P];
  logic               n_valid;

  assign rd_en  = (state == S_NORM);
  assign n_last = rd_en && (rd_ptr == n_blk - BW'(1));

  always_comb begin
    for (int i = 0; i < P; i++) begin
      logic signed [16:0] diff;
      diff   = 17'(fifo[rd_ptr][i]) - 17'(mu);
      neg[i] = diff[16];
      if (diff[16]) mag[i] = (-diff > 17'sd65535) ? 16'hFFFF : 16'(-diff);
      else          mag[i] = 16'(diff);
    end
  end

  for (genvar i = 0; i < P; i++) begin : g_div
    divu #(.W(16), .Q_FRAC(8)) u_divu (
      .clk, .rst_n, .in_valid(rd_en), .x(mag[i]), .y(sigma),
      .out_valid(q_valid[i]), .q(q[i]));
  end

  assign n_valid = q_valid[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      neg_d[0] <= '0; neg_d[1] <= '0; neg_d[2] <= '0; last_d <= '0;
      out_valid <= 1'b0; out_last <= 1'b0;
      for (int i = 0; i < P; i++) y[i] <= '0;
    end else begin
      neg_d[0] <= neg; neg_d[1] <= neg_d[0]; neg_d[2] <= neg_d[1];
      last_d   <= {last_d[1:0], n_last};
      out_valid <= n_valid;
      out_last  <= n_valid && last_d[2];
      if (n_valid)
        for (int i = 0; i < P; i++) begin
          // Q8.8 quotient -> Q4.4 activation
          logic signed [31:0] m;
          m    = 32'(q[i] >> (CU_FRAC - ACT_FRAC));
          y[i] <= sat_act(neg_d[2][i] ? -m : m);
        end
    end
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IN; wr_ptr <= '0; rd_ptr <= '0; n_blk <= '0;
    end else begin
      case (state)
        S_IN: if (acc_in) begin
          wr_ptr <= wr_ptr + BW'(1);
          if (in_last) begin
            n_blk <= wr_ptr + BW'(1);
            state <= S_STAT;
          end
        end
        S_STAT: if (sig_v) begin
          rd_ptr <= '0;
          state  <= S_NORM;
        end
        S_NORM: begin
          rd_ptr <= rd_ptr + BW'(1);
          if (n_last) begin
            wr_ptr <= '0;
            state  <= S_IN;
          end
        end
        default: state <= S_IN;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (acc_in) fifo[wr_ptr[$clog2(MAX_BLK)-1:0]] <= x;
  end

  // A last block must not overflow the FIFO
  assert property (@(posedge clk) disable iff (!rst_n)
                   acc_in |-> (wr_ptr < BW'(MAX_BLK)));
endmodule
