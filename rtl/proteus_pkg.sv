// proteus_pkg: types and constants shared by the Proteus processor-side hardware.
//
// Proteus sits next to the memory controller of a host that offloads bulk
// bit-serial arithmetic to DRAM (processing-using-DRAM, PuD). This package fixes
// the widths every block agrees on: cache lines, object addresses, bit-precision
// fields, the bbop instruction, the micro-program (uProgram) word format and the
// PuD command that leaves the control unit for the memory controller.
//
// Taken from the paper: 64 B cache lines, 6-bit bit-precision and 4-bit bbop_op
// fields, 8-bit per-operation uProgram index, 16 operations, 64 PuD-capable
// subarrays per bank, 65,536 columns per subarray, 128 B per uProgram.
// Own choices: the operation list and its encoding (the 16 SIMDRAM-style
// operations the paper lists), the 32-bit uProgram word layout, the symbolic row
// operands, the reserved-row map of the B-group and C-group, address widths.
package proteus_pkg;

  // ---------------------------------------------------------------- widths
  localparam int unsigned LINE_BITS  = 512;   // one 64 B cache line
  localparam int unsigned ADDR_W     = 48;    // physical byte address
  localparam int unsigned SIZE_W     = 32;    // object size in elements
  localparam int unsigned MAXV_W     = 64;    // maximum-value field (up to 64-bit data)
  localparam int unsigned BP_W       = 7;     // bit-precision 1..64 held as a number
  localparam int unsigned BPF_W      = 6;     // bit-precision field in LUT index (bp-1)
  localparam int unsigned OP_W       = 4;     // bbop_op opcode
  localparam int unsigned IDX_W      = 8;     // per-operation uProgram index
  localparam int unsigned GIDX_W     = OP_W + IDX_W;  // global uProgram index
  localparam int unsigned N_OPS      = 16;

  localparam int unsigned NSUB       = 64;    // PuD-capable subarrays in the bank
  localparam int unsigned SUB_W      = 6;
  localparam int unsigned ROW_W      = 10;    // 1024 rows per subarray
  localparam int unsigned CHUNK_W    = 7;     // 65,536 columns = 128 chunks of 512

  localparam int unsigned UOP_W      = 32;    // one uProgram word
  localparam int unsigned UPROG_WORDS = 32;   // 128 B uProgram
  localparam int unsigned UPC_W      = 5;

  // ---------------------------------------------------------------- bbop operations
  typedef enum logic [OP_W-1:0] {
    OP_ADD    = 4'd0,
    OP_SUB    = 4'd1,
    OP_MUL    = 4'd2,
    OP_DIV    = 4'd3,
    OP_COPY   = 4'd4,
    OP_RELU   = 4'd5,
    OP_MAX    = 4'd6,
    OP_MIN    = 4'd7,
    OP_EQ     = 4'd8,
    OP_GT     = 4'd9,
    OP_IFELSE = 4'd10,
    OP_BITCNT = 4'd11,
    OP_AND    = 4'd12,
    OP_OR     = 4'd13,
    OP_XOR    = 4'd14,
    OP_REDSUM = 4'd15
  } bbop_op_e;

  // A bbop instruction as the host dispatches it: operation, object addresses,
  // element count, user bit-precision and the dynamic bit-precision enable.
  typedef struct packed {
    bbop_op_e              op;
    logic [ADDR_W-1:0]     dst;
    logic [ADDR_W-1:0]     src1;
    logic [ADDR_W-1:0]     src2;
    logic [SIZE_W-1:0]     size;
    logic [BP_W-1:0]       bp;
    logic                  dyn_en;
  } bbop_t;

  // bbop_trsp_init: registers a PuD memory object in the Object Tracker.
  typedef struct packed {
    logic [ADDR_W-1:0]     addr;
    logic [SIZE_W-1:0]     size;   // elements
    logic [BP_W-1:0]       bp;     // declared (container) bit-precision
    logic [ROW_W-1:0]      row;    // first DRAM row of the object's vertical layout
  } trsp_init_t;

  // ---------------------------------------------------------------- uProgram words
  // [31:28] kind, [27:26] subarray target, [25:24] unused,
  // [23:16] operand a, [15:8] operand b, [7:0] operand c.
  typedef enum logic [3:0] {
    UOP_DONE    = 4'd0,
    UOP_AAP     = 4'd1,   // row copy a -> b (ACT-ACT-PRE)
    UOP_AP      = 4'd2,   // triple-row activation of a, b, c (MAJ3), then PRE
    UOP_RBM     = 4'd3,   // LISA-RISC copy: row a of subarray i -> row b of subarray i+1
    UOP_LOOP    = 4'd4,   // i = a[5:0]; loop body runs while i <= bp-1-b[5:0]
    UOP_ENDLOOP = 4'd5
  } uop_kind_e;

  typedef enum logic [1:0] {
    TGT_ALL   = 2'd0,     // every active subarray 0..bp-1 at once (SALP-MASA)
    TGT_LOOP  = 2'd1,     // subarray i of the enclosing loop
    TGT_FIRST = 2'd2,     // subarray 0
    TGT_LAST  = 2'd3      // subarray bp-1
  } uop_tgt_e;

  typedef struct packed {
    uop_kind_e   kind;
    uop_tgt_e    tgt;
    logic [1:0]  rsvd;
    logic [7:0]  a;
    logic [7:0]  b;
    logic [7:0]  c;
  } uop_t;

  // Row operand: [7:6] base (0 fixed row, 1 src1, 2 src2, 3 dst), [5:0] offset.
  localparam logic [1:0] RB_FIXED = 2'd0;
  localparam logic [1:0] RB_SRC1  = 2'd1;
  localparam logic [1:0] RB_SRC2  = 2'd2;
  localparam logic [1:0] RB_DST   = 2'd3;

  // Fixed rows live in the top 16 rows of every subarray: the Ambit B-group
  // (T0-T3, two dual-contact cells with their negated wordlines) and the C-group.
  localparam int unsigned FIX_T0 = 0, FIX_T1 = 1, FIX_T2 = 2, FIX_T3 = 3;
  localparam int unsigned FIX_DCC0 = 4, FIX_DCC0N = 5, FIX_DCC1 = 6, FIX_DCC1N = 7;
  localparam int unsigned FIX_C0 = 8, FIX_C1 = 9;
  localparam int unsigned FIXED_ROWS = 16;

  function automatic logic [ROW_W-1:0] fixed_row(input logic [5:0] k);
    return ROW_W'((1 << ROW_W) - FIXED_ROWS) + ROW_W'(k[3:0]);
  endfunction

  // ---------------------------------------------------------------- PuD command
  typedef enum logic [1:0] {
    CMD_AAP = 2'd0,
    CMD_AP  = 2'd1,
    CMD_RBM = 2'd2
  } pud_cmd_kind_e;

  typedef struct packed {
    pud_cmd_kind_e      kind;
    logic [NSUB-1:0]    sa_mask;   // subarrays whose designated bit is set (SA_SEL)
    logic [ROW_W-1:0]   row_a;
    logic [ROW_W-1:0]   row_b;
    logic [ROW_W-1:0]   row_c;
  } pud_cmd_t;

  // Vertical-layout write from the transposition engine.
  typedef struct packed {
    logic [SUB_W-1:0]     sub;
    logic [ROW_W-1:0]     row;
    logic [CHUNK_W-1:0]   chunk;
    logic [LINE_BITS-1:0] data;
  } vwrite_t;

  // ---------------------------------------------------------------- helpers
  // Number of bits needed to hold an unsigned value (at least 1).
  function automatic logic [BP_W-1:0] bits_needed(input logic [MAXV_W-1:0] v);
    logic [BP_W-1:0] n;
    n = 7'd1;
    for (int i = 0; i < MAXV_W; i++)
      if (v[i]) n = BP_W'(i + 1);
    return n;
  endfunction

  // storage width of an element of bit-precision bp: the power of two
  // (1..64) holding it, as in the host's data types
  function automatic logic [BP_W-1:0] cont_w(input logic [BP_W-1:0] bp);
    if (bp <= 1)       return 7'd1;
    else if (bp <= 2)  return 7'd2;
    else if (bp <= 4)  return 7'd4;
    else if (bp <= 8)  return 7'd8;
    else if (bp <= 16) return 7'd16;
    else if (bp <= 32) return 7'd32;
    else               return 7'd64;
  endfunction

endpackage
