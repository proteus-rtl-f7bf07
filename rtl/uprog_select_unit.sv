// uprog_select_unit: the uProgram Select Unit of the Proteus Control Unit.
//
// Turns one bbop instruction into a run of the best uProgram at the right
// bit-precision. For each bbop it
//   1. reads the Object Tracker entries of src1, src2 and dst (maxima and
//      DRAM rows), one per cycle;
//   2. has the Bit-Precision Calculator (n-bit ALU) compute the target
//      bit-precision and the output's predicted maximum, and writes that
//      maximum into dst's entry (vector-to-vector chains);
//   3. queries the cost model with {bp-1, bbop_op} for the global uProgram
//      index and fetches that uProgram from the scratchpad into the uProgram
//      Buffer;
//   4. starts the AP/AAP dispatcher and waits for it to finish;
//   5. for a reduction (REDSUM) repeats 3-4 once per reduction-tree level;
//      after each level the Fetch Unit reads the level's carry-out bits (the
//      dst bit-row just above the current precision, i.e. subarray bp) and,
//      if any is 1, the precision grows by one bit before the next level.
// An input object missing from the tracker counts as full-range
// (maximum 2^bp - 1 at the user's bit-precision).
//
// Interface: bbop_valid/bbop_ready; ot_* reads and writes the tracker; cm_*
// queries the cost model; sp_* reads the scratchpad; disp_* drives the
// dispatcher, which reads the buffer through prog_addr/prog_word; fc_* are
// the Fetch Unit's loads. bbop_done pulses at the end with the final bp.
// Counters: bbops completed, precision raises after reduction overflow.
//
// From the paper (Sec. 4.2 steps 4-5, Sec. 5.4): the probe of the maxima, the
// bit-precision computation, the tracker write-back, the cost-model probe, the
// dispatch, and the overflow check with precision increment between reduction
// steps. Sequencing, one lookup per cycle, the carry-row location and the
// missing-object rule are own choices.
module uprog_select_unit
  import proteus_pkg::*;
#(
  parameter int unsigned IW = 9
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  bbop_valid,
  output logic                  bbop_ready,
  input  bbop_t                 bbop,
  output logic                  bbop_done,
  output logic [BP_W-1:0]       bbop_done_bp,
  // Object Tracker
  output logic [ADDR_W-1:0]     ot_addr,
  input  logic                  ot_hit,
  input  logic [IW-1:0]         ot_idx,
  input  trsp_init_t            ot_info,
  input  logic [MAXV_W-1:0]     ot_max,
  output logic                  ot_upd_valid,
  output logic [IW-1:0]         ot_upd_idx,
  output logic [MAXV_W-1:0]     ot_upd_max,
  // cost model
  output logic                  cm_q_valid,
  output logic [BPF_W-1:0]      cm_q_bpf,
  output logic [OP_W-1:0]       cm_q_op,
  input  logic                  cm_r_valid,
  input  logic [GIDX_W-1:0]     cm_r_gidx,
  // scratchpad
  output logic                  sp_req_valid,
  input  logic                  sp_req_ready,
  output logic [GIDX_W-1:0]     sp_req_gidx,
  input  logic                  sp_resp_valid,
  input  logic [UOP_W*UPROG_WORDS-1:0] sp_resp_prog,
  // dispatcher
  output logic                  disp_start,
  output logic [BP_W-1:0]       disp_bp,
  output logic [ROW_W-1:0]      disp_src1_row,
  output logic [ROW_W-1:0]      disp_src2_row,
  output logic [ROW_W-1:0]      disp_dst_row,
  input  logic                  disp_busy,
  input  logic                  disp_done,
  input  logic [UPC_W-1:0]      prog_addr,
  output uop_t                  prog_word,
  // Fetch Unit loads
  output logic                  fc_req_valid,
  input  logic                  fc_req_ready,
  output logic [SUB_W-1:0]      fc_req_sub,
  output logic [ROW_W-1:0]      fc_req_row,
  output logic [CHUNK_W-1:0]    fc_req_chunk,
  input  logic                  fc_resp_valid,
  input  logic [LINE_BITS-1:0]  fc_resp_data,
  // statistics
  output logic [31:0]           n_bbops,
  output logic [31:0]           n_overflows
);
  typedef enum logic [3:0] {
    S_IDLE, S_SRC1, S_SRC2, S_DST, S_CALC, S_CALCW, S_COST, S_COSTW,
    S_SP, S_SPW, S_DISP, S_DISPW, S_CARRY, S_CARRYW, S_FIN
  } state_e;
  state_e state;

  bbop_t              b_q;
  logic [MAXV_W-1:0]  max1, max2;
  logic [ROW_W-1:0]   row1, row2, rowd;
  logic               dst_hit;
  logic [IW-1:0]      dst_idx;
  logic [BP_W-1:0]    bp_q, ubp;
  logic [GIDX_W-1:0]  gidx_q;
  logic [5:0]         level, levels;
  logic [SIZE_W-1:0]  active;

  logic               bpc_out_valid, bpc_upd;
  logic [BP_W-1:0]    bpc_bp;
  logic [MAXV_W-1:0]  bpc_max;
  logic               fu_busy, fu_done, fu_ovf;

  // number of reduction-tree levels: ceil(log2(n)), at least 1
  function automatic logic [5:0] tree_levels(input logic [SIZE_W-1:0] n);
    logic [5:0] l;
    l = 6'd1;
    for (int k = 1; k < SIZE_W; k++)
      if ((SIZE_W'(1) << k) < n) l = 6'(k + 1);
    return l;
  endfunction

  function automatic logic [MAXV_W-1:0] full_range(input logic [BP_W-1:0] n);
    return (n >= 7'd64) ? '1 : ((MAXV_W'(1) << n) - 1'b1);
  endfunction

  always_comb begin
    ubp = (b_q.bp == 0) ? BP_W'(1) : ((b_q.bp > 7'd64) ? 7'd64 : b_q.bp);
    unique case (state)
      S_SRC1:  ot_addr = b_q.src1;
      S_SRC2:  ot_addr = b_q.src2;
      default: ot_addr = b_q.dst;
    endcase
  end

  assign bbop_ready    = (state == S_IDLE);
  assign cm_q_valid    = (state == S_COST);
  assign cm_q_bpf      = BPF_W'(bp_q - 7'd1);
  assign cm_q_op       = b_q.op;
  assign sp_req_valid  = (state == S_SP);
  assign sp_req_gidx   = gidx_q;
  assign disp_start    = (state == S_DISP) && !disp_busy;
  assign disp_bp       = bp_q;
  assign disp_src1_row = row1;
  assign disp_src2_row = row2;
  assign disp_dst_row  = rowd;

  // number of 512-column chunks holding the current level's carry bits
  logic [SIZE_W-1:0] act_next, chunks;
  always_comb begin
    act_next = (active + 1) >> 1;
    chunks   = (act_next + 511) >> 9;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; b_q <= '0; max1 <= '0; max2 <= '0;
      row1 <= '0; row2 <= '0; rowd <= '0; dst_hit <= 1'b0; dst_idx <= '0;
      bp_q <= BP_W'(1); gidx_q <= '0; level <= '0; levels <= '0; active <= '0;
      ot_upd_valid <= 1'b0; ot_upd_idx <= '0; ot_upd_max <= '0;
      bbop_done <= 1'b0; bbop_done_bp <= '0; n_bbops <= '0; n_overflows <= '0;
    end else begin
      ot_upd_valid <= 1'b0;
      bbop_done    <= 1'b0;
      unique case (state)
        S_IDLE: if (bbop_valid) begin
          b_q   <= bbop;
          state <= S_SRC1;
        end
        S_SRC1: begin
          max1  <= ot_hit ? ot_max : full_range(ubp);
          row1  <= ot_hit ? ot_info.row : '0;
          state <= S_SRC2;
        end
        S_SRC2: begin
          max2  <= ot_hit ? ot_max : full_range(ubp);
          row2  <= ot_hit ? ot_info.row : '0;
          state <= S_DST;
        end
        S_DST: begin
          dst_hit <= ot_hit;
          dst_idx <= ot_idx;
          rowd    <= ot_hit ? ot_info.row : '0;
          state   <= S_CALC;
        end
        S_CALC: state <= S_CALCW;
        S_CALCW: if (bpc_out_valid) begin
          bp_q <= bpc_bp;
          if (bpc_upd && dst_hit) begin
            ot_upd_valid <= 1'b1;
            ot_upd_idx   <= dst_idx;
            ot_upd_max   <= bpc_max;
          end
          level  <= '0;
          active <= b_q.size;
          levels <= (b_q.op == OP_REDSUM) ? tree_levels(b_q.size) : 6'd1;
          state  <= S_COST;
        end
        S_COST:  state <= S_COSTW;
        S_COSTW: if (cm_r_valid) begin
          gidx_q <= cm_r_gidx;
          state  <= S_SP;
        end
        S_SP:    if (sp_req_ready) state <= S_SPW;
        S_SPW:   if (sp_resp_valid) state <= S_DISP;
        S_DISP:  if (!disp_busy) state <= S_DISPW;
        S_DISPW: if (disp_done) begin
          if (b_q.op == OP_REDSUM && levels != 0) state <= (bp_q < 7'd64) ? S_CARRY : S_CARRYW;
          else                                    state <= S_FIN;
        end
        S_CARRY: state <= S_CARRYW;
        S_CARRYW: if (fu_done || bp_q >= 7'd64) begin
          if (fu_done && fu_ovf && bp_q < ubp) begin
            bp_q        <= bp_q + 1'b1;
            n_overflows <= n_overflows + 1;
          end
          active <= act_next;
          level  <= level + 1'b1;
          state  <= (level + 1'b1 >= levels) ? S_FIN : S_COST;
        end
        S_FIN: begin
          bbop_done    <= 1'b1;
          bbop_done_bp <= bp_q;
          n_bbops      <= n_bbops + 1;
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  bit_precision_calculator u_bpc (
    .clk, .rst_n,
    .in_valid(state == S_CALC), .in_op(b_q.op), .in_a(max1), .in_b(max2),
    .in_user_bp(b_q.bp), .in_dyn_en(b_q.dyn_en),
    .out_valid(bpc_out_valid), .out_bp(bpc_bp), .out_max(bpc_max), .out_upd_dst(bpc_upd)
  );

  fetch_unit u_fu (
    .clk, .rst_n,
    .start(state == S_CARRY), .sub(SUB_W'(bp_q)), .row(rowd),
    .nchunks((CHUNK_W+1)'((chunks > 128) ? 128 : chunks)),
    .busy(fu_busy),
    .rd_req_valid(fc_req_valid), .rd_req_ready(fc_req_ready),
    .rd_req_sub(fc_req_sub), .rd_req_row(fc_req_row), .rd_req_chunk(fc_req_chunk),
    .rd_resp_valid(fc_resp_valid), .rd_resp_data(fc_resp_data),
    .done(fu_done), .overflow(fu_ovf)
  );

  uprog_buffer u_buf (
    .clk, .rst_n,
    .ld(state == S_SPW && sp_resp_valid), .ld_prog(sp_resp_prog),
    .rd_addr(prog_addr), .rd_word(prog_word)
  );

endmodule
