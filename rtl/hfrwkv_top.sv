// hfrwkv_top: fully on-chip RWKV accelerator.
//
// The host issues commands (cmd_t) that move weights from external memory
// and run vector operations on rows of LANES 9-bit values. The blocks:
//   controller     sequences one command at a time
//   mem_bridge     external memory -> weight buffer bank or vector BRAM
//   weight_buffer  two URAM banks of matrix weights (ping-pong)
//   vector_bram    vector weights and recurrent history
//   act_buffer     activations and intermediate vectors
//   mvpa           LANES Delta-PoT MAC lanes plus addition array
//   ccu            128 division and 128 exponential/sigmoid units
//   layernorm      mean/std/normalise over a vector of up to MAX_BLK rows
// Data paths: the array takes its broadcast element and vector lanes from
// activation-buffer port a, and its weights from the weight buffer (MV), the
// vector BRAM (EW, ADD) or activation-buffer port b (ADD of two activations).
// The complex units read ports a and b; LayerNorm reads port a (sign-extended
// to 16 bits). All results return to the activation buffer; SAVE copies rows
// to the BRAM. External memory is a read port with a request handshake and
// in-order responses of LANES*9 bits per word. The block set and its data
// flow follow the paper's system figure; the LayerNorm width equal to the
// array width (512 in the paper's U50 build for larger models) lets both
// share the row format. Ports, command set and sizes of buffers are this
// design's choices.
module hfrwkv_top
  import hfrwkv_pkg::*;
#(
  parameter int unsigned LANES   = 512,
  parameter int unsigned NCU     = 128,
  parameter int unsigned WDEPTH  = 4096,
  parameter int unsigned VDEPTH  = 4096,
  parameter int unsigned ADEPTH  = 256,
  parameter int unsigned MAX_BLK = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  cmd_t                     cmd,
  output logic                     busy,
  output logic                     ext_req_valid,
  input  logic                     ext_req_ready,
  output logic [ADDR_W-1:0]        ext_req_addr,
  input  logic                     ext_rsp_valid,
  input  logic [LANES*WGT_W-1:0]   ext_rsp_data,
  input  logic [$clog2(ADEPTH)-1:0] host_rd_addr,
  output act_t                     host_rd_data [LANES],
  output logic [31:0]              stall_cycles,
  output logic [31:0]              overlap_cycles
);
  localparam int unsigned WA = $clog2(WDEPTH);
  localparam int unsigned VA = $clog2(VDEPTH);
  localparam int unsigned AA = $clog2(ADEPTH);

  // controller <-> bridge
  logic              br_valid, br_ready, br_to_wbuf, br_bank, br_busy;
  logic [ADDR_W-1:0] br_ext_addr;
  logic [15:0]       br_count, br_dst;
  // weight buffer
  logic              wb_wr_en, wb_wr_bank, wb_fill_done, wb_rd_bank, wb_release;
  logic [WA-1:0]     wb_wr_addr, wb_rd_addr;
  wgt_t              wb_wr_data [LANES];
  wgt_t              wb_rd_data [LANES];
  logic [1:0]        wb_full;
  // vector BRAM
  logic              vb_wr_en_br, vb_wr_en_c, vb_wr_en;
  logic [VA-1:0]     vb_wr_addr_br, vb_wr_addr_c, vb_wr_addr, vb_rd_addr;
  act_t              vb_wr_data_br [LANES];
  act_t              vb_wr_data [LANES];
  act_t              vb_rd_data [LANES];
  // activation buffer
  logic [AA-1:0]     ab_rd_addr_a, ab_rd_addr_b, ab_wr_addr;
  logic              ab_wr_en;
  op_e               ab_wr_src;
  act_t              ab_rd_a [LANES];
  act_t              ab_rd_b [LANES];
  act_t              ab_wr_data [LANES];
  // array
  logic              mv_valid, mv_first, mv_last, mv_b_act, mv_out_valid;
  mv_mode_e          mv_mode;
  logic [$clog2(LANES)-1:0] mv_lane;
  wgt_t              mv_w [LANES];
  act_t              mv_y [LANES];
  // complex units
  logic              cu_valid, cu_ready, cu_out_valid;
  cu_op_e            cu_op;
  act_t              cu_y [LANES];
  // LayerNorm
  logic              ln_valid, ln_last, ln_ready, ln_out_valid, ln_out_last;
  logic signed [15:0] ln_x [LANES];
  act_t              ln_y [LANES];

  controller #(.LANES(LANES), .WDEPTH(WDEPTH), .VDEPTH(VDEPTH), .ADEPTH(ADEPTH)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .busy,
    .br_valid, .br_ready, .br_to_wbuf, .br_bank, .br_ext_addr, .br_count, .br_dst, .br_busy,
    .wb_rd_bank, .wb_rd_addr, .wb_release, .wb_full,
    .vb_rd_addr, .vb_wr_en(vb_wr_en_c), .vb_wr_addr(vb_wr_addr_c),
    .ab_rd_addr_a, .ab_rd_addr_b, .ab_wr_en, .ab_wr_addr, .ab_wr_src,
    .mv_valid, .mv_mode, .mv_first, .mv_last, .mv_lane, .mv_b_act, .mv_out_valid,
    .cu_valid, .cu_op, .cu_ready, .cu_out_valid,
    .ln_valid, .ln_last, .ln_ready, .ln_out_valid,
    .stall_cycles, .overlap_cycles);

  mem_bridge #(.LANES(LANES), .WDEPTH(WDEPTH), .VDEPTH(VDEPTH)) u_bridge (
    .clk, .rst_n,
    .cmd_valid(br_valid), .cmd_ready(br_ready), .cmd_to_wbuf(br_to_wbuf), .cmd_bank(br_bank),
    .cmd_ext_addr(br_ext_addr), .cmd_count(br_count), .cmd_dst(br_dst), .busy(br_busy),
    .ext_req_valid, .ext_req_ready, .ext_req_addr, .ext_rsp_valid, .ext_rsp_data,
    .wb_wr_en, .wb_wr_bank, .wb_wr_addr, .wb_wr_data, .wb_fill_done,
    .vb_wr_en(vb_wr_en_br), .vb_wr_addr(vb_wr_addr_br), .vb_wr_data(vb_wr_data_br));

  weight_buffer #(.LANES(LANES), .DEPTH(WDEPTH)) u_wbuf (
    .clk, .rst_n, .wr_en(wb_wr_en), .wr_bank(wb_wr_bank), .wr_addr(wb_wr_addr),
    .wr_data(wb_wr_data), .fill_done(wb_fill_done), .rd_bank(wb_rd_bank),
    .rd_addr(wb_rd_addr), .rd_data(wb_rd_data), .release_bank(wb_release),
    .bank_full(wb_full));

  // BRAM write: bridge (LOADV) or SAVE from activation port a
  always_comb begin
    vb_wr_en   = vb_wr_en_br || vb_wr_en_c;
    vb_wr_addr = vb_wr_en_br ? vb_wr_addr_br : vb_wr_addr_c;
    vb_wr_data = vb_wr_en_br ? vb_wr_data_br : ab_rd_a;
  end

  vector_bram #(.LANES(LANES), .DEPTH(VDEPTH)) u_vbram (
    .clk, .wr_en(vb_wr_en), .wr_addr(vb_wr_addr), .wr_data(vb_wr_data),
    .rd_addr(vb_rd_addr), .rd_data(vb_rd_data));

  always_comb begin
    unique case (ab_wr_src)
      OP_EXP, OP_SIG, OP_DIV: ab_wr_data = cu_y;
      OP_LN:                  ab_wr_data = ln_y;
      OP_RESTORE:             ab_wr_data = vb_rd_data;
      default:                ab_wr_data = mv_y;
    endcase
  end

  act_buffer #(.LANES(LANES), .DEPTH(ADEPTH)) u_abuf (
    .clk, .rd_addr_a(ab_rd_addr_a), .rd_data_a(ab_rd_a),
    .rd_addr_b(ab_rd_addr_b), .rd_data_b(ab_rd_b),
    .rd_addr_h(host_rd_addr), .rd_data_h(host_rd_data),
    .wr_en(ab_wr_en), .wr_addr(ab_wr_addr), .wr_data(ab_wr_data));

  // array weight operand
  always_comb begin
    for (int k = 0; k < LANES; k++) begin
      unique case (mv_mode)
        MODE_MV:  mv_w[k] = wb_rd_data[k];
        MODE_ADD: mv_w[k] = mv_b_act ? wgt_t'(ab_rd_b[k]) : wgt_t'(vb_rd_data[k]);
        default:  mv_w[k] = wgt_t'(vb_rd_data[k]);
      endcase
      ln_x[k] = 16'(ab_rd_a[k]);
    end
  end

  mvpa #(.LANES(LANES)) u_mvpa (
    .clk, .rst_n, .in_valid(mv_valid), .mode(mv_mode), .first(mv_first), .last(mv_last),
    .x_bcast(ab_rd_a[mv_lane]), .x_vec(ab_rd_a), .w_vec(mv_w),
    .out_valid(mv_out_valid), .y(mv_y));

  ccu #(.LANES(LANES), .NCU(NCU)) u_ccu (
    .clk, .rst_n, .in_valid(cu_valid), .in_ready(cu_ready), .op(cu_op),
    .a(ab_rd_a), .b(ab_rd_b), .out_valid(cu_out_valid), .y(cu_y));

  layernorm #(.P(LANES), .MAX_BLK(MAX_BLK)) u_ln (
    .clk, .rst_n, .in_valid(ln_valid), .in_last(ln_last), .in_ready(ln_ready),
    .x(ln_x), .out_valid(ln_out_valid), .out_last(ln_out_last), .y(ln_y));
endmodule
