// aap_dispatcher: the AP/AAP dispatcher of the Proteus Control Unit.
//
// Runs the uProgram held in the uProgram Buffer and sends its in-DRAM
// primitives to the memory controller. Each uProgram word is one of
//   AAP  row copy (a -> b), AP  triple-row activation of a, b, c (majority),
//   RBM  LISA inter-subarray copy of row a in subarray i to row b in i+1,
//   LOOP / ENDLOOP  a counted loop over subarrays i, DONE.
// With the one-bit-per-subarray mapping bit i of every operand is in subarray
// i, so a word's subarray target decides the parallelism: TGT_ALL sends one
// command to subarrays 0..bp-1 together (SALP-MASA: every designated bit set),
// TGT_LOOP to subarray i only, TGT_FIRST to subarray 0, TGT_LAST to bp-1.
// Symbolic row operands are resolved here: a fixed B-/C-group row, or the row
// of src1, src2 or dst plus an offset. The same uProgram thus runs at any
// bit-precision bp: bp only sets the subarray mask and the loop bounds.
//
// Interface: start with bp and the three operand rows; prog_addr/prog_word
// read the buffer; cmd_valid/cmd_ready carry one pud_cmd_t per primitive;
// done pulses when DONE is reached. n_aap counts AAP and AP commands, n_rbm
// RBM commands, since start.
// Timing: one uProgram word per cycle; a command word waits for cmd_ready.
// Loops may not nest; a LOOP whose range is empty skips to its ENDLOOP one
// word per cycle.
//
// From the paper: the dispatcher's place and role (Fig. 4), the AAP/AP/RBM
// primitives, SALP-MASA concurrency over the OBPS subarrays and the serial
// inter-subarray carry pass (Sec. 5.1, 5.2.2). The word format, the symbolic
// rows and the loop construct are this design's own.
module aap_dispatcher
  import proteus_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [BP_W-1:0]    bp,
  input  logic [ROW_W-1:0]   src1_row,
  input  logic [ROW_W-1:0]   src2_row,
  input  logic [ROW_W-1:0]   dst_row,
  output logic               busy,
  output logic [UPC_W-1:0]   prog_addr,
  input  uop_t               prog_word,
  output logic               cmd_valid,
  input  logic               cmd_ready,
  output pud_cmd_t           cmd,
  output logic               done,
  output logic [31:0]        n_aap,
  output logic [31:0]        n_rbm
);
  logic [UPC_W-1:0]  pc, loop_pc;
  logic [6:0]        i, limit;
  logic              skipping;
  logic [BP_W-1:0]   bp_q;
  logic [ROW_W-1:0]  r1_q, r2_q, rd_q;

  function automatic logic [ROW_W-1:0] resolve(input logic [7:0] op,
      input logic [ROW_W-1:0] r1, input logic [ROW_W-1:0] r2, input logic [ROW_W-1:0] rd);
    unique case (op[7:6])
      RB_FIXED: return fixed_row(op[5:0]);
      RB_SRC1:  return r1 + ROW_W'(op[5:0]);
      RB_SRC2:  return r2 + ROW_W'(op[5:0]);
      default:  return rd + ROW_W'(op[5:0]);
    endcase
  endfunction

  logic [NSUB-1:0] all_mask, tgt_mask;
  logic            is_cmd;
  always_comb begin
    all_mask = (bp_q >= 7'd64) ? '1 : ((NSUB'(1) << bp_q) - 1'b1);
    unique case (prog_word.tgt)
      TGT_ALL:   tgt_mask = all_mask;
      TGT_LOOP:  tgt_mask = NSUB'(1) << i[5:0];
      TGT_FIRST: tgt_mask = NSUB'(1);
      default:   tgt_mask = NSUB'(1) << (bp_q[5:0] - 6'd1);
    endcase
    is_cmd = busy && !skipping &&
             (prog_word.kind == UOP_AAP || prog_word.kind == UOP_AP || prog_word.kind == UOP_RBM);
    cmd_valid   = is_cmd;
    cmd.kind    = (prog_word.kind == UOP_AP) ? CMD_AP : ((prog_word.kind == UOP_RBM) ? CMD_RBM : CMD_AAP);
    cmd.sa_mask = tgt_mask;
    cmd.row_a   = resolve(prog_word.a, r1_q, r2_q, rd_q);
    cmd.row_b   = resolve(prog_word.b, r1_q, r2_q, rd_q);
    cmd.row_c   = resolve(prog_word.c, r1_q, r2_q, rd_q);
  end

  assign prog_addr = pc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; pc <= '0; loop_pc <= '0; i <= '0; limit <= '0; skipping <= 1'b0;
      bp_q <= BP_W'(1); r1_q <= '0; r2_q <= '0; rd_q <= '0;
      done <= 1'b0; n_aap <= '0; n_rbm <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          pc    <= '0;
          skipping <= 1'b0;
          bp_q  <= (bp == 0) ? BP_W'(1) : ((bp > 7'd64) ? 7'd64 : bp);
          r1_q  <= src1_row; r2_q <= src2_row; rd_q <= dst_row;
          n_aap <= '0; n_rbm <= '0;
        end
      end else if (skipping) begin
        if (prog_word.kind == UOP_ENDLOOP) skipping <= 1'b0;
        pc <= pc + 1'b1;
      end else begin
        unique case (prog_word.kind)
          UOP_DONE: begin
            busy <= 1'b0;
            done <= 1'b1;
          end
          UOP_AAP, UOP_AP, UOP_RBM: if (cmd_ready) begin
            if (prog_word.kind == UOP_RBM) n_rbm <= n_rbm + 1;
            else                           n_aap <= n_aap + 1;
            pc <= pc + 1'b1;
          end
          UOP_LOOP: begin
            i       <= {1'b0, prog_word.a[5:0]};
            limit   <= bp_q - 7'd1 - {1'b0, prog_word.b[5:0]};
            loop_pc <= pc + 1'b1;
            // empty range (start above bp-1-b): skip the body
            if ({1'b0, prog_word.a[5:0]} + {1'b0, prog_word.b[5:0]} + 7'd1 > bp_q)
              skipping <= 1'b1;
            pc <= pc + 1'b1;
          end
          UOP_ENDLOOP: begin
            if (i < limit) begin
              i  <= i + 1'b1;
              pc <= loop_pc;
            end else begin
              pc <= pc + 1'b1;
            end
          end
          default: begin   // unknown word: treat as DONE
            busy <= 1'b0;
            done <= 1'b1;
          end
        endcase
      end
    end
  end

endmodule
