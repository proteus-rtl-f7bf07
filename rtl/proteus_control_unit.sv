// proteus_control_unit: the Proteus Control Unit beside the memory controller.
//
// Receives bbop instructions from the host and runs each one as a uProgram of
// in-DRAM primitives at the bit-precision the data actually needs. It holds
// the Parallelism-Aware uProgram Library's on-chip part (the cost-model tables
// and the uProgram Scratchpad), the uProgram Select Unit (bit-precision
// calculator, fetch unit, uProgram Buffer) and the AP/AAP dispatcher:
//   bbop -> select unit reads maxima -> bit-precision -> cost model (3 cycles)
//        -> scratchpad (hit: 1 cycle, miss: uProgram Memory) -> buffer
//        -> dispatcher -> AAP/AP/RBM commands to the memory controller.
//
// Interface: bbop_*; ot_* to the Object Tracker in the Data Transposition Unit;
// lut_ld_* pre-loads the cost-model tables; upm_* reads uProgram Memory;
// cmd_* carries PuD commands; fc_* carries the Fetch Unit's loads. Statistics
// count primitives, scratchpad hits and misses, and reduction overflows.
//
// From the paper: the partition and the flow (Fig. 4, Fig. 9, Sec. 4.2). The
// ports are own choices.
module proteus_control_unit
  import proteus_pkg::*;
#(
  parameter int unsigned IW = 9,
  parameter int unsigned SP_SLOTS = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  bbop_valid,
  output logic                  bbop_ready,
  input  bbop_t                 bbop,
  output logic                  bbop_done,
  output logic [BP_W-1:0]       bbop_done_bp,
  output logic [ADDR_W-1:0]     ot_addr,
  input  logic                  ot_hit,
  input  logic [IW-1:0]         ot_idx,
  input  trsp_init_t            ot_info,
  input  logic [MAXV_W-1:0]     ot_max,
  output logic                  ot_upd_valid,
  output logic [IW-1:0]         ot_upd_idx,
  output logic [MAXV_W-1:0]     ot_upd_max,
  input  logic                  lut_ld_we,
  input  logic [OP_W-1:0]       lut_ld_op,
  input  logic [BPF_W-1:0]      lut_ld_row,
  input  logic [IDX_W-1:0]      lut_ld_idx,
  output logic                  upm_req_valid,
  input  logic                  upm_req_ready,
  output logic [ADDR_W-1:0]     upm_req_addr,
  input  logic                  upm_resp_valid,
  input  logic [LINE_BITS-1:0]  upm_resp_data,
  output logic                  cmd_valid,
  input  logic                  cmd_ready,
  output pud_cmd_t              cmd,
  output logic                  fc_req_valid,
  input  logic                  fc_req_ready,
  output logic [SUB_W-1:0]      fc_req_sub,
  output logic [ROW_W-1:0]      fc_req_row,
  output logic [CHUNK_W-1:0]    fc_req_chunk,
  input  logic                  fc_resp_valid,
  input  logic [LINE_BITS-1:0]  fc_resp_data,
  output logic [31:0]           n_aap,
  output logic [31:0]           n_rbm,
  output logic [31:0]           n_bbops,
  output logic [31:0]           n_overflows,
  output logic [31:0]           sp_hits,
  output logic [31:0]           sp_misses
);
  logic                  cm_q_valid, cm_r_valid;
  logic [BPF_W-1:0]      cm_q_bpf;
  logic [OP_W-1:0]       cm_q_op;
  logic [GIDX_W-1:0]     cm_r_gidx;
  logic                  sp_req_valid, sp_req_ready, sp_resp_valid;
  logic [GIDX_W-1:0]     sp_req_gidx;
  logic [UOP_W*UPROG_WORDS-1:0] sp_resp_prog;
  logic                  d_start, d_busy, d_done;
  logic [BP_W-1:0]       d_bp;
  logic [ROW_W-1:0]      d_r1, d_r2, d_rd;
  logic [UPC_W-1:0]      prog_addr;
  uop_t                  prog_word;

  cost_model_logic #(.NLUT(N_OPS), .ROWS(64), .IDXW(IDX_W)) u_cm (
    .clk, .rst_n,
    .ld_we(lut_ld_we), .ld_op(lut_ld_op), .ld_row(lut_ld_row), .ld_idx(lut_ld_idx),
    .q_valid(cm_q_valid), .q_bpf(cm_q_bpf), .q_op(cm_q_op),
    .r_valid(cm_r_valid), .r_gidx(cm_r_gidx)
  );

  uprog_scratchpad #(.SLOTS(SP_SLOTS)) u_sp (
    .clk, .rst_n,
    .req_valid(sp_req_valid), .req_ready(sp_req_ready), .req_gidx(sp_req_gidx),
    .resp_valid(sp_resp_valid), .resp_prog(sp_resp_prog),
    .mem_req_valid(upm_req_valid), .mem_req_ready(upm_req_ready), .mem_req_addr(upm_req_addr),
    .mem_resp_valid(upm_resp_valid), .mem_resp_data(upm_resp_data),
    .hits(sp_hits), .misses(sp_misses)
  );

  uprog_select_unit #(.IW(IW)) u_sel (
    .clk, .rst_n,
    .bbop_valid, .bbop_ready, .bbop, .bbop_done, .bbop_done_bp,
    .ot_addr, .ot_hit, .ot_idx, .ot_info, .ot_max, .ot_upd_valid, .ot_upd_idx, .ot_upd_max,
    .cm_q_valid, .cm_q_bpf, .cm_q_op, .cm_r_valid, .cm_r_gidx,
    .sp_req_valid, .sp_req_ready, .sp_req_gidx, .sp_resp_valid, .sp_resp_prog,
    .disp_start(d_start), .disp_bp(d_bp), .disp_src1_row(d_r1), .disp_src2_row(d_r2),
    .disp_dst_row(d_rd), .disp_busy(d_busy), .disp_done(d_done),
    .prog_addr, .prog_word,
    .fc_req_valid, .fc_req_ready, .fc_req_sub, .fc_req_row, .fc_req_chunk,
    .fc_resp_valid, .fc_resp_data,
    .n_bbops, .n_overflows
  );

  aap_dispatcher u_disp (
    .clk, .rst_n,
    .start(d_start), .bp(d_bp), .src1_row(d_r1), .src2_row(d_r2), .dst_row(d_rd),
    .busy(d_busy), .prog_addr, .prog_word,
    .cmd_valid, .cmd_ready, .cmd, .done(d_done), .n_aap, .n_rbm
  );

endmodule
