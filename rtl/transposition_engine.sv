// transposition_engine: horizontal-to-vertical data transposition.
//
// PuD arithmetic is bit-serial: bit b of 512 neighbouring elements must sit in
// one DRAM row segment, and with the one-bit-per-subarray (OBPS) mapping bit b
// of every element lives in subarray b. Evicted cache lines arrive in the usual
// horizontal layout (elements packed one after another). This engine collects
// the W lines that hold 512 consecutive W-bit elements in one 4 kB transposition
// buffer, then drains it as W vertical writes: write b carries bit b of those 512
// elements and goes to subarray b, row obj_row + chunk/128, column chunk
// chunk%128 (512-column chunks of a 65,536-column row). Two buffers alternate:
// one fills while the other drains.
//
// The container width W is the object's declared bit-precision rounded up to a
// power of two (1..64). Lines of one 512-element chunk must arrive in order;
// the object's last line closes a partly filled chunk (unfilled columns carry
// stale data, beyond the object's end).
//
// Interface: in_valid/in_ready with the line, the object's bit-precision and
// first row, and the line's bit offset in the object and the object's size in
// bits; out_valid/out_ready with a vwrite_t.
// Timing: a line is accepted in one cycle while its buffer is filling. A full
// buffer drains as W vertical writes; each is built in W cycles, reading one
// buffered line per cycle (the buffers are plain one-read-port memories), and
// leaves when out_ready is high. A line that would fill a buffer still being
// drained waits.
//
// From the paper: the unit's place between LLC and memory controller, its two
// 4 kB transposition buffers and the OBPS placement of bit b in subarray b. The
// buffer organisation, chunking and interface are this design's own.
module transposition_engine
  import proteus_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [LINE_BITS-1:0]     in_line,
  input  logic [BP_W-1:0]          in_bp,
  input  logic [ROW_W-1:0]         in_row,
  input  logic [SIZE_W+BP_W-1:0]   in_bit_off,
  input  logic [SIZE_W+BP_W-1:0]   in_obj_bits,
  output logic                     out_valid,
  input  logic                     out_ready,
  output vwrite_t                  out_wr
);
  // log2 of the power-of-two container holding bp bits
  function automatic logic [2:0] cont_log2(input logic [BP_W-1:0] bp);
    if (bp <= 1)       return 3'd0;
    else if (bp <= 2)  return 3'd1;
    else if (bp <= 4)  return 3'd2;
    else if (bp <= 8)  return 3'd3;
    else if (bp <= 16) return 3'd4;
    else if (bp <= 32) return 3'd5;
    else               return 3'd6;
  endfunction

  // the two 4 kB buffers: 64 lines each, line address {buffer, slot}
  logic [LINE_BITS-1:0] lines_m [128];
  logic                fill_sel;          // buffer being filled
  logic [1:0]          full_q;            // buffer waiting to be drained
  logic [2:0]          lw_q [2];
  logic [ROW_W-1:0]    row_q [2];
  logic [31:0]         chunk_q [2];       // element chunk index (elements / 512)
  logic                drain_sel;         // buffer being drained (fills and drains alternate)
  logic [6:0]          drain_b;           // bit row being built
  logic [6:0]          drain_j;           // line being read into it
  logic [LINE_BITS-1:0] acc;              // the bit row under construction

  // current line's position
  logic [2:0]      lw;
  logic [31:0]     line_no;
  logic [5:0]      slot;
  logic            closes;
  always_comb begin
    lw      = cont_log2(in_bp);
    line_no = 32'(in_bit_off >> 9);
    slot    = 6'(line_no & ((32'd1 << lw) - 1));
    closes  = (slot == 6'((32'd1 << lw) - 1)) || ((in_bit_off + 512) >= in_obj_bits);
  end

  assign in_ready = !full_q[fill_sel];

  // drain: row b gathers bit b of the 512/W elements of each of the W lines,
  // one line per cycle; line j's elements are columns j*512/W onwards
  logic [2:0]           dlw;
  logic [6:0]           dw;
  logic                 gathered;
  logic [LINE_BITS-1:0] rd_line, sh, piece;
  always_comb begin
    dlw      = lw_q[drain_sel];
    dw       = 7'd1 << dlw;
    gathered = (drain_j == dw);
    rd_line  = lines_m[{drain_sel, drain_j[5:0]}];
    sh       = rd_line >> drain_b[5:0];
    piece    = '0;
    for (int k = 0; k < LINE_BITS; k++) begin
      unique case (dlw)
        3'd0: piece[k] = sh[k];
        3'd1: if (k < 256) piece[k] = sh[k*2];
        3'd2: if (k < 128) piece[k] = sh[k*4];
        3'd3: if (k < 64)  piece[k] = sh[k*8];
        3'd4: if (k < 32)  piece[k] = sh[k*16];
        3'd5: if (k < 16)  piece[k] = sh[k*32];
        default: if (k < 8) piece[k] = sh[k*64];
      endcase
    end
    out_valid     = full_q[drain_sel] && gathered;
    out_wr.sub    = SUB_W'(drain_b);
    out_wr.row    = row_q[drain_sel] + ROW_W'(chunk_q[drain_sel] >> CHUNK_W);
    out_wr.chunk  = CHUNK_W'(chunk_q[drain_sel]);
    out_wr.data   = acc;
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) lines_m[{fill_sel, slot}] <= in_line;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill_sel <= 1'b0;
      full_q   <= '0;
      lw_q[0] <= '0; lw_q[1] <= '0;
      row_q[0] <= '0; row_q[1] <= '0;
      chunk_q[0] <= '0; chunk_q[1] <= '0;
      drain_sel <= 1'b0;
      drain_b  <= '0;
      drain_j  <= '0;
      acc      <= '0;
    end else begin
      // fill
      if (in_valid && in_ready) begin
        lw_q[fill_sel]    <= lw;
        row_q[fill_sel]   <= in_row;
        chunk_q[fill_sel] <= line_no >> lw;
        if (closes) begin
          full_q[fill_sel] <= 1'b1;
          fill_sel         <= ~fill_sel;
        end
      end
      // drain
      if (full_q[drain_sel] && !gathered) begin
        acc     <= acc | (piece << (10'(drain_j) << (4'd9 - 4'(dlw))));
        drain_j <= drain_j + 1'b1;
      end else if (out_valid && out_ready) begin
        acc     <= '0;
        drain_j <= '0;
        if (drain_b == dw - 1'b1) begin
          drain_b           <= '0;
          full_q[drain_sel] <= 1'b0;
          drain_sel         <= ~drain_sel;
        end else begin
          drain_b <= drain_b + 1'b1;
        end
      end
    end
  end

endmodule
