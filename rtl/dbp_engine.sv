// dbp_engine: the Dynamic Bit-Precision Engine.
//
// Finds the largest value in an evicted cache line that belongs to a PuD memory
// object and, if it beats the maximum the Object Tracker holds for that object,
// writes the new maximum back. It is a small FSM around one reconfigurable
// n-bit comparator, stepping through the line one n-bit element per cycle:
//   LOAD   take the object's bit-precision n and current maximum (probed from
//          the Object Tracker by the Data Transposition Unit) and configure
//          the comparator: mask = 2^n - 1, stride = n;
//   SCAN   compare element k (line bits [k*n +: n]) with the running maximum,
//          for every whole element in the line that lies inside the object;
//   UPDATE if any element was larger, pulse upd_valid with the new maximum.
// Elements are compared as unsigned n-bit numbers.
//
// Interface: start/ready handshake with the line, the tracker entry index, the
// object's bit-precision, its current maximum, the bit offset of this line in
// the object and the object's size in bits. upd_* is a one-cycle write into
// the Object Tracker.
// Timing: 1 cycle LOAD + floor(512/n) SCAN cycles (fewer for the object's last
// line) + 1 UPDATE cycle; ready is high only in IDLE.
//
// From the paper: the FSM with its four operations and the one-at-a-time
// n-bit comparator. Own choices: unsigned comparison (the paper's examples use
// non-negative values), the per-element bounds check against the object size,
// and the exact cycle split.
module dbp_engine
  import proteus_pkg::*;
#(
  parameter int unsigned IW = 9
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  output logic                  ready,
  input  logic [LINE_BITS-1:0]  line,
  input  logic [IW-1:0]         obj_idx,
  input  logic [BP_W-1:0]       obj_bp,
  input  logic [MAXV_W-1:0]     obj_max,
  input  logic [SIZE_W+BP_W-1:0] line_bit_off,   // bit offset of line[0] in the object
  input  logic [SIZE_W+BP_W-1:0] obj_bits,       // size * bp
  output logic                  upd_valid,
  output logic [IW-1:0]         upd_idx,
  output logic [MAXV_W-1:0]     upd_max,
  output logic                  busy
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_SCAN, S_UPDATE} state_e;
  state_e state;

  logic [LINE_BITS-1:0]    line_q;
  logic [IW-1:0]           idx_q;
  logic [BP_W-1:0]         n_q;
  logic [MAXV_W-1:0]       mask_q, cur_max, run_max;
  logic                    larger;
  logic [9:0]              off_q;            // bit position of element k in the line
  logic [SIZE_W+BP_W-1:0]  obj_off_q, obj_bits_q;

  // reconfigurable n-bit comparator
  logic [MAXV_W-1:0] elem;
  logic              elem_in_line, elem_in_obj, elem_gt;
  always_comb begin
    elem         = MAXV_W'(line_q >> off_q) & mask_q;
    elem_in_line = (11'(off_q) + 11'(n_q)) <= 11'(LINE_BITS);
    elem_in_obj  = (obj_off_q + (SIZE_W+BP_W)'(off_q) + (SIZE_W+BP_W)'(n_q)) <= obj_bits_q;
    elem_gt      = elem > run_max;
  end

  assign ready = (state == S_IDLE);
  assign busy  = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      line_q     <= '0;
      idx_q      <= '0;
      n_q        <= 7'd1;
      mask_q     <= '0;
      cur_max    <= '0;
      run_max    <= '0;
      larger     <= 1'b0;
      off_q      <= '0;
      obj_off_q  <= '0;
      obj_bits_q <= '0;
      upd_valid  <= 1'b0;
      upd_idx    <= '0;
      upd_max    <= '0;
    end else begin
      upd_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          // step 1: read bit-precision and current maximum of the object
          line_q     <= line;
          idx_q      <= obj_idx;
          n_q        <= (obj_bp == 0) ? 7'd1 : ((obj_bp > 7'd64) ? 7'd64 : obj_bp);
          cur_max    <= obj_max;
          obj_off_q  <= line_bit_off;
          obj_bits_q <= obj_bits;
          state      <= S_LOAD;
        end
        S_LOAD: begin
          // step 2: configure the n-bit comparator
          mask_q  <= (n_q >= 7'd64) ? '1 : ((MAXV_W'(1) << n_q) - 1'b1);
          run_max <= cur_max;
          larger  <= 1'b0;
          off_q   <= '0;
          state   <= S_SCAN;
        end
        S_SCAN: begin
          // step 3: one n-bit element per cycle against the running maximum
          if (elem_in_line && elem_in_obj) begin
            if (elem_gt) begin
              run_max <= elem;
              larger  <= 1'b1;
            end
            off_q <= off_q + 10'(n_q);
          end else begin
            state <= S_UPDATE;
          end
        end
        S_UPDATE: begin
          // step 4: report a larger maximum to the Object Tracker
          if (larger) begin
            upd_valid <= 1'b1;
            upd_idx   <= idx_q;
            upd_max   <= run_max;
          end
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
