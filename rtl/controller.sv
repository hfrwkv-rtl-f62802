// controller: command sequencer of the accelerator.
//
// Takes one command (cmd_t, see hfrwkv_pkg) at a time with a valid/ready
// handshake and drives the on-chip units until the command is complete:
//   LOADW   hands a weight transfer to the memory bridge and retires at once,
//           so the transfer runs under the following commands (double
//           buffering). It waits while the bridge is busy or the target bank
//           still holds unconsumed weights.
//   LOADV   moves words into the vector BRAM and waits for the transfer.
//   MV      waits until its weight bank is full (a stall), then for each of
//           len_out output chunks streams the N = len*LANES columns - one
//           vector element and one weight word per cycle - waits for the
//           array result (drain) and writes it to dst+chunk. Column n of
//           chunk r is word r*N + n of the bank. Afterwards the bank is
//           released to the bridge.
//   EW/ADD  stream len rows through the array, one per cycle.
//   EXP/SIG/DIV send one row at a time to the complex units.
//   LN      streams len rows into the LayerNorm unit and collects its output.
//   SAVE / RESTORE copy rows activation buffer -> BRAM / BRAM -> activation
//           buffer.
// All reads take one cycle, so operands reach the units one cycle after the
// read address. A command's write-back counter 'o' runs up to len (len_out for
// MV); the command retires when it is reached. The command set, this
// sequencing and the counters are this design's own: the paper states only
// that the controller orchestrates transfers and makes the units fetch from
// given addresses. MV chunks are drained one by one, which yields the
// (l+4)*(l/d) array latency the paper gives.
module controller
  import hfrwkv_pkg::*;
#(
  parameter int unsigned LANES  = 512,
  parameter int unsigned WDEPTH = 4096,
  parameter int unsigned VDEPTH = 4096,
  parameter int unsigned ADEPTH = 256
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   cmd_valid,
  output logic   cmd_ready,
  input  cmd_t   cmd,
  output logic   busy,
  // memory bridge
  output logic                      br_valid,
  input  logic                      br_ready,
  output logic                      br_to_wbuf,
  output logic                      br_bank,
  output logic [ADDR_W-1:0]         br_ext_addr,
  output logic [15:0]               br_count,
  output logic [15:0]               br_dst,
  input  logic                      br_busy,
  // weight buffer
  output logic                      wb_rd_bank,
  output logic [$clog2(WDEPTH)-1:0] wb_rd_addr,
  output logic                      wb_release,
  input  logic [1:0]                wb_full,
  // vector BRAM
  output logic [$clog2(VDEPTH)-1:0] vb_rd_addr,
  output logic                      vb_wr_en,
  output logic [$clog2(VDEPTH)-1:0] vb_wr_addr,
  // activation buffer
  output logic [$clog2(ADEPTH)-1:0] ab_rd_addr_a,
  output logic [$clog2(ADEPTH)-1:0] ab_rd_addr_b,
  output logic                      ab_wr_en,
  output logic [$clog2(ADEPTH)-1:0] ab_wr_addr,
  output op_e                       ab_wr_src,     // which unit's row is written
  // matrix-vector processing array
  output logic                      mv_valid,
  output mv_mode_e                  mv_mode,
  output logic                      mv_first,
  output logic                      mv_last,
  output logic [$clog2(LANES)-1:0]  mv_lane,       // lane of row a to broadcast
  output logic                      mv_b_act,      // ADD operand from act buffer
  input  logic                      mv_out_valid,
  // complex units
  output logic                      cu_valid,
  output cu_op_e                    cu_op,
  input  logic                      cu_ready,
  input  logic                      cu_out_valid,
  // LayerNorm
  output logic                      ln_valid,
  output logic                      ln_last,
  input  logic                      ln_ready,
  input  logic                      ln_out_valid,
  // counters
  output logic [31:0]               stall_cycles,    // MV waiting for its bank
  output logic [31:0]               overlap_cycles   // bridge busy under compute
);
  localparam int unsigned LL = $clog2(LANES);

  typedef enum logic [1:0] {C_IDLE, C_RUN, C_LOADV_WAIT} cstate_e;
  cstate_e state;
  cmd_t    c;

  logic [31:0] i;          // issue counter (rows, or columns within a chunk)
  logic [15:0] r;          // MV chunk
  logic [15:0] o;          // write-back counter
  logic [31:0] n_cols;     // MV columns per chunk
  logic        chunk_open; // MV: columns of chunk r issued, waiting for result
  logic        inflight;   // complex unit row outstanding
  logic        rd_v, rd_first, rd_last;
  logic [LL-1:0] rd_lane;
  logic        issue;
  logic [15:0] o_end;
  logic        wb_event;
  logic        compute_op;

  assign busy      = (state != C_IDLE);
  assign cmd_ready = (state == C_IDLE);
  assign n_cols    = 32'(c.len) << LL;
  assign o_end     = (c.op == OP_MV) ? c.len_out : c.len;

  // ---------------- issue decision ----------------
  always_comb begin
    issue = 1'b0;
    if (state == C_RUN) begin
      case (c.op)
        OP_MV:   issue = wb_full[c.bank] && !chunk_open && (r < c.len_out);
        OP_EW, OP_ADD, OP_SAVE, OP_RESTORE:
                 issue = (i < 32'(c.len));
        OP_EXP, OP_SIG, OP_DIV:
                 issue = (i < 32'(c.len)) && cu_ready && !inflight && !rd_v;
        OP_LN:   issue = (i < 32'(c.len)) && ln_ready;
        default: issue = 1'b0;
      endcase
    end
  end

  // read addresses
  always_comb begin
    ab_rd_addr_a = ($clog2(ADEPTH))'(c.src_a + ((c.op == OP_MV) ? 16'(i >> LL) : 16'(i)));
    ab_rd_addr_b = ($clog2(ADEPTH))'(c.src_b + 16'(i));
    vb_rd_addr   = ($clog2(VDEPTH))'(((c.op == OP_RESTORE) ? c.src_a : c.src_b) + 16'(i));
    wb_rd_bank   = c.bank;
    wb_rd_addr   = ($clog2(WDEPTH))'(32'(r) * n_cols + i);
  end

  // unit inputs, one cycle after the read
  always_comb begin
    mv_valid = rd_v && (c.op == OP_MV || c.op == OP_EW || c.op == OP_ADD);
    unique case (c.op)
      OP_EW:   mv_mode = MODE_EW;
      OP_ADD:  mv_mode = MODE_ADD;
      default: mv_mode = MODE_MV;
    endcase
    mv_first = rd_first;
    mv_last  = rd_last;
    mv_lane  = rd_lane;
    mv_b_act = c.b_act;
    cu_valid = rd_v && (c.op == OP_EXP || c.op == OP_SIG || c.op == OP_DIV);
    unique case (c.op)
      OP_SIG:  cu_op = CU_SIG;
      OP_DIV:  cu_op = CU_DIV;
      default: cu_op = CU_EXP;
    endcase
    ln_valid = rd_v && (c.op == OP_LN);
    ln_last  = rd_last;
  end

  // write-back
  always_comb begin
    wb_event = 1'b0;
    if (state == C_RUN)
      case (c.op)
        OP_MV, OP_EW, OP_ADD:   wb_event = mv_out_valid;
        OP_EXP, OP_SIG, OP_DIV: wb_event = cu_out_valid;
        OP_LN:                  wb_event = ln_out_valid;
        OP_RESTORE:             wb_event = rd_v;
        default:                wb_event = 1'b0;
      endcase
    ab_wr_en   = wb_event;
    ab_wr_addr = ($clog2(ADEPTH))'(c.dst + o);
    ab_wr_src  = c.op;
    vb_wr_en   = (state == C_RUN) && (c.op == OP_SAVE) && rd_v;
    vb_wr_addr = ($clog2(VDEPTH))'(c.dst + o);
  end

  // memory bridge request
  always_comb begin
    br_valid    = (state == C_RUN) && (
                    (c.op == OP_LOADW && !wb_full[c.bank]) || c.op == OP_LOADV);
    br_to_wbuf  = (c.op == OP_LOADW);
    br_bank     = c.bank;
    br_ext_addr = c.ext_addr;
    br_count    = c.len;
    br_dst      = c.dst;
  end

  assign wb_release = (state == C_RUN) && (c.op == OP_MV) && wb_event &&
                      (o + 16'd1 == c.len_out);
  assign compute_op = (state != C_IDLE) && (c.op != OP_LOADW) && (c.op != OP_LOADV);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; c <= '0; i <= '0; r <= '0; o <= '0;
      chunk_open <= 1'b0; inflight <= 1'b0;
      rd_v <= 1'b0; rd_first <= 1'b0; rd_last <= 1'b0; rd_lane <= '0;
      stall_cycles <= '0; overlap_cycles <= '0;
    end else begin
      rd_v     <= issue;
      rd_first <= (c.op == OP_MV) ? (i == 0) : 1'b0;
      rd_last  <= (c.op == OP_MV) ? (i == n_cols - 1) : (i == 32'(c.len) - 1);
      rd_lane  <= LL'(i);
      if (state == C_RUN && c.op == OP_MV && !wb_full[c.bank]) stall_cycles <= stall_cycles + 1;
      if (compute_op && br_busy) overlap_cycles <= overlap_cycles + 1;

      case (state)
        C_IDLE: if (cmd_valid) begin
          c <= cmd; i <= '0; r <= '0; o <= '0; chunk_open <= 1'b0; inflight <= 1'b0;
          state <= (cmd.op == OP_NOP) ? C_IDLE : C_RUN;
        end
        C_RUN: begin
          if (issue) begin
            if (c.op == OP_MV) begin
              if (i == n_cols - 1) begin
                i <= '0;
                chunk_open <= 1'b1;
              end else i <= i + 1;
            end else i <= i + 1;
            if (c.op == OP_EXP || c.op == OP_SIG || c.op == OP_DIV) inflight <= 1'b1;
          end
          if (cu_out_valid) inflight <= 1'b0;
          if (wb_event || (c.op == OP_SAVE && rd_v)) begin
            o <= o + 16'd1;
            if (c.op == OP_MV) begin
              chunk_open <= 1'b0;
              r <= r + 16'd1;
            end
            if (o + 16'd1 == o_end) state <= C_IDLE;
          end
          if (br_valid && br_ready) state <= (c.op == OP_LOADW) ? C_IDLE : C_LOADV_WAIT;
        end
        C_LOADV_WAIT: if (!br_busy) state <= C_IDLE;
        default: state <= C_IDLE;
      endcase
    end
  end

  // A zero-length row command would never retire
  assert property (@(posedge clk) disable iff (!rst_n)
                   (cmd_valid && cmd_ready && cmd.op != OP_NOP) |-> cmd.len != '0);
endmodule
