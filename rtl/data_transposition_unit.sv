// data_transposition_unit: the Data Transposition Unit, extended by Proteus.
//
// Sits between the last-level cache and the memory controller. Every evicted
// cache line is held for one lookup in the Object Tracker:
//   * a line outside every registered PuD object passes through unchanged
//     (wb_* port, an ordinary write-back);
//   * a line inside an object goes to the transposition engine, which turns it
//     into vertical bit-rows for the one-bit-per-subarray layout (vw_* port),
//     and, when dynamic bit-precision is enabled, at the same time to the
//     Dynamic Bit-Precision Engine, which raises the object's maximum value.
// Elements are stored in W-bit containers, W the declared bit-precision
// rounded up to a power of two (cont_w), as in the host's integer types; the
// engine scans W-bit elements.
// The host registers objects with bbop_trsp_init (init_* port) and clears an
// object's maximum when it reads the object back (clr_* port). The control
// unit reads and writes maxima through the cu_* ports.
//
// Timing: one line is in flight in the hand-off register; it leaves when the
// engine (if used) and the transposition engine both accept it, or when the
// write-back port accepts it. ev_ready is high while the register is empty.
// The engine's update reaches the tracker before the engine takes its next line,
// so consecutive lines of one object see each other's maxima.
//
// From the paper: the unit's parts (Object Tracker, transposition engine,
// Dynamic Bit-Precision Engine) and their connections (Fig. 4, steps 2-3). The
// hand-off register and the pass-through of non-PuD lines are own choices.
module data_transposition_unit
  import proteus_pkg::*;
#(
  parameter int unsigned OT_ENTRIES = 512
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     dyn_en,
  // bbop_trsp_init
  input  logic                     init_valid,
  input  trsp_init_t               init_info,
  // evicted lines from the LLC
  input  logic                     ev_valid,
  output logic                     ev_ready,
  input  logic [ADDR_W-1:0]        ev_addr,
  input  logic [LINE_BITS-1:0]     ev_data,
  // ordinary write-backs to the memory controller
  output logic                     wb_valid,
  input  logic                     wb_ready,
  output logic [ADDR_W-1:0]        wb_addr,
  output logic [LINE_BITS-1:0]     wb_data,
  // vertical writes to the memory controller
  output logic                     vw_valid,
  input  logic                     vw_ready,
  output vwrite_t                  vw,
  // control-unit access to the Object Tracker
  input  logic [ADDR_W-1:0]        cu_addr,
  output logic                     cu_hit,
  output logic [$clog2(OT_ENTRIES)-1:0] cu_idx,
  output trsp_init_t               cu_info,
  output logic [MAXV_W-1:0]        cu_max,
  input  logic                     cu_upd_valid,
  input  logic [$clog2(OT_ENTRIES)-1:0] cu_upd_idx,
  input  logic [MAXV_W-1:0]        cu_upd_max,
  // host read-back: clear the object's maximum
  input  logic                     clr_valid,
  input  logic [ADDR_W-1:0]        clr_addr,
  // activity
  output logic                     eng_busy,
  output logic                     eng_update
);
  localparam int unsigned IW = $clog2(OT_ENTRIES);
  localparam int unsigned OW = SIZE_W + BP_W;

  logic                 hold_v;
  logic [ADDR_W-1:0]    hold_addr;
  logic [LINE_BITS-1:0] hold_data;

  logic                 ev_hit;
  logic [IW-1:0]        ev_idx;
  trsp_init_t           ev_info;
  logic [MAXV_W-1:0]    ev_max;

  logic                 eng_upd_v;
  logic [IW-1:0]        eng_upd_idx;
  logic [MAXV_W-1:0]    eng_upd_max;
  logic                 eng_ready, te_ready;

  logic [OW-1:0]        bit_off, obj_bits;
  always_comb begin
    bit_off  = OW'(hold_addr - ev_info.addr) << 3;
    obj_bits = OW'(ev_info.size) * OW'(cont_w(ev_info.bp));
  end

  logic go_pud, go_wb, eng_take;
  always_comb begin
    // the engine must be idle and its last update written (upd_valid low)
    eng_take = dyn_en;
    go_pud   = hold_v && ev_hit && te_ready && (!dyn_en || (eng_ready && !eng_upd_v));
    go_wb    = hold_v && !ev_hit && wb_ready;
  end

  assign ev_ready = !hold_v;
  assign wb_valid = hold_v && !ev_hit;
  assign wb_addr  = hold_addr;
  assign wb_data  = hold_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_v    <= 1'b0;
      hold_addr <= '0;
      hold_data <= '0;
    end else begin
      if (ev_valid && ev_ready) begin
        hold_v    <= 1'b1;
        hold_addr <= ev_addr;
        hold_data <= ev_data;
      end else if (go_pud || go_wb) begin
        hold_v <= 1'b0;
      end
    end
  end

  object_tracker #(.ENTRIES(OT_ENTRIES)) u_ot (
    .clk, .rst_n,
    .reg_valid(init_valid), .reg_info(init_info),
    .ev_addr(hold_addr), .ev_hit, .ev_idx, .ev_info, .ev_max,
    .cu_addr, .cu_hit, .cu_idx, .cu_info, .cu_max,
    .eng_upd_valid(eng_upd_v), .eng_upd_idx, .eng_upd_max,
    .cu_upd_valid, .cu_upd_idx, .cu_upd_max,
    .clr_valid, .clr_addr
  );

  dbp_engine #(.IW(IW)) u_eng (
    .clk, .rst_n,
    .start(go_pud && eng_take), .ready(eng_ready),
    .line(hold_data), .obj_idx(ev_idx), .obj_bp(cont_w(ev_info.bp)), .obj_max(ev_max),
    .line_bit_off(bit_off), .obj_bits,
    .upd_valid(eng_upd_v), .upd_idx(eng_upd_idx), .upd_max(eng_upd_max),
    .busy(eng_busy)
  );

  transposition_engine u_te (
    .clk, .rst_n,
    .in_valid(go_pud), .in_ready(te_ready),
    .in_line(hold_data), .in_bp(ev_info.bp), .in_row(ev_info.row),
    .in_bit_off(bit_off), .in_obj_bits(obj_bits),
    .out_valid(vw_valid), .out_ready(vw_ready), .out_wr(vw)
  );

  assign eng_update = eng_upd_v;

endmodule
