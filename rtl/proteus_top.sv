// proteus_top: the processor-side Proteus hardware.
//
// Proteus lets a processing-using-DRAM (PuD) system run each bulk bit-serial
// operation at the bit-precision its data needs, with the uProgram (algorithm,
// data mapping, number format) that is fastest at that precision. This top
// joins its two units:
//   * data_transposition_unit, between LLC and memory controller: registers
//     PuD objects (bbop_trsp_init), transposes their evicted lines into the
//     one-bit-per-subarray vertical layout and tracks each object's maximum
//     value with the Dynamic Bit-Precision Engine;
//   * proteus_control_unit, beside the memory controller: takes bbop
//     instructions, reads the maxima from the Object Tracker, picks the
//     bit-precision and the uProgram, and dispatches AAP/AP/RBM commands.
// The host CPU, LLC, memory controller and the PuD-capable DRAM bank are
// outside; their connections are this module's ports.
//
// Ports (all synchronous to clk, active-low asynchronous reset):
//   dbp_enable               Dynamic Bit-Precision Engine on/off
//   init_*                   bbop_trsp_init registrations
//   ev_*  -> wb_*, vw_*      evicted lines in; plain write-backs and vertical
//                            writes out (valid/ready)
//   clr_*                    host read-back of an object: clear its maximum
//   bbop_*                   bbop instructions in (valid/ready), completion out
//   lut_ld_*                 cost-model table pre-load
//   upm_*                    uProgram Memory reads (line requests, in-order data)
//   cmd_*                    PuD commands to the memory controller
//   fc_*                     Fetch Unit loads of carry-out rows
//   statistics counters
module proteus_top
  import proteus_pkg::*;
#(
  parameter int unsigned OT_ENTRIES = 512,
  parameter int unsigned SP_SLOTS   = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  dbp_enable,
  input  logic                  init_valid,
  input  trsp_init_t            init_info,
  input  logic                  ev_valid,
  output logic                  ev_ready,
  input  logic [ADDR_W-1:0]     ev_addr,
  input  logic [LINE_BITS-1:0]  ev_data,
  output logic                  wb_valid,
  input  logic                  wb_ready,
  output logic [ADDR_W-1:0]     wb_addr,
  output logic [LINE_BITS-1:0]  wb_data,
  output logic                  vw_valid,
  input  logic                  vw_ready,
  output vwrite_t               vw,
  input  logic                  clr_valid,
  input  logic [ADDR_W-1:0]     clr_addr,
  input  logic                  bbop_valid,
  output logic                  bbop_ready,
  input  bbop_t                 bbop,
  output logic                  bbop_done,
  output logic [BP_W-1:0]       bbop_done_bp,
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
  output logic                  eng_busy,
  output logic                  eng_update,
  output logic [31:0]           n_aap,
  output logic [31:0]           n_rbm,
  output logic [31:0]           n_bbops,
  output logic [31:0]           n_overflows,
  output logic [31:0]           sp_hits,
  output logic [31:0]           sp_misses
);
  localparam int unsigned IW = $clog2(OT_ENTRIES);

  logic [ADDR_W-1:0]  ot_addr;
  logic               ot_hit, ot_upd_valid;
  logic [IW-1:0]      ot_idx, ot_upd_idx;
  trsp_init_t         ot_info;
  logic [MAXV_W-1:0]  ot_max, ot_upd_max;

  data_transposition_unit #(.OT_ENTRIES(OT_ENTRIES)) u_dtu (
    .clk, .rst_n, .dyn_en(dbp_enable),
    .init_valid, .init_info,
    .ev_valid, .ev_ready, .ev_addr, .ev_data,
    .wb_valid, .wb_ready, .wb_addr, .wb_data,
    .vw_valid, .vw_ready, .vw,
    .cu_addr(ot_addr), .cu_hit(ot_hit), .cu_idx(ot_idx), .cu_info(ot_info), .cu_max(ot_max),
    .cu_upd_valid(ot_upd_valid), .cu_upd_idx(ot_upd_idx), .cu_upd_max(ot_upd_max),
    .clr_valid, .clr_addr,
    .eng_busy, .eng_update
  );

  proteus_control_unit #(.IW(IW), .SP_SLOTS(SP_SLOTS)) u_cu (
    .clk, .rst_n,
    .bbop_valid, .bbop_ready, .bbop, .bbop_done, .bbop_done_bp,
    .ot_addr, .ot_hit, .ot_idx, .ot_info, .ot_max, .ot_upd_valid, .ot_upd_idx, .ot_upd_max,
    .lut_ld_we, .lut_ld_op, .lut_ld_row, .lut_ld_idx,
    .upm_req_valid, .upm_req_ready, .upm_req_addr, .upm_resp_valid, .upm_resp_data,
    .cmd_valid, .cmd_ready, .cmd,
    .fc_req_valid, .fc_req_ready, .fc_req_sub, .fc_req_row, .fc_req_chunk,
    .fc_resp_valid, .fc_resp_data,
    .n_aap, .n_rbm, .n_bbops, .n_overflows, .sp_hits, .sp_misses
  );

endmodule
