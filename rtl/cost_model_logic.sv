// cost_model_logic: the cost-model lookup tables and Select Logic.
//
// For each of the 16 bbop operations a table of 64 eight-bit rows names the
// uProgram (by its per-operation index) that performs best at each
// bit-precision; row k stands for a precision of k+1 bits. The tables are
// filled ahead of use ("pre-loaded") from an offline Pareto analysis, through
// the ld_* port. A query walks a three-stage pipeline:
//   cycle 1  the 6-bit bit-precision field indexes all 16 tables at once;
//   cycle 2  the Select Logic picks the entry of the 4-bit bbop_op;
//   cycle 3  {bbop_op, index} forms the 12-bit global uProgram index.
// The fourth step of the paper's sequence, the scratchpad access, is done by
// uprog_scratchpad, which takes this module's output.
//
// Interface: q_valid/q_bpf/q_op in, r_valid/r_gidx out exactly three cycles
// later; a new query may enter every cycle. ld_we writes one table row.
// The tables are SRAM-like (no reset): they must be loaded before use.
//
// From the paper (Sec. 5.2.3, Fig. 9): table count and size, the 6-bit and
// 4-bit inputs, the per-cycle steps and the concatenation order. The load port
// and the row-k = (k+1)-bit convention are own choices.
module cost_model_logic
  import proteus_pkg::*;
#(
  parameter int unsigned NLUT  = 16,
  parameter int unsigned ROWS  = 64,
  parameter int unsigned IDXW  = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     ld_we,
  input  logic [$clog2(NLUT)-1:0]  ld_op,
  input  logic [$clog2(ROWS)-1:0]  ld_row,
  input  logic [IDXW-1:0]          ld_idx,
  input  logic                     q_valid,
  input  logic [$clog2(ROWS)-1:0]  q_bpf,
  input  logic [$clog2(NLUT)-1:0]  q_op,
  output logic                     r_valid,
  output logic [$clog2(NLUT)+IDXW-1:0] r_gidx
);
  localparam int unsigned OPW = $clog2(NLUT);

  logic [IDXW-1:0] lut [NLUT][ROWS];

  // table writes
  always_ff @(posedge clk) begin
    if (ld_we) lut[ld_op][ld_row] <= ld_idx;
  end

  // cycle 1: all tables read in parallel
  logic [IDXW-1:0] row_q [NLUT];
  logic            v1, v2;
  logic [OPW-1:0]  op1, op2;
  always_ff @(posedge clk) begin
    for (int t = 0; t < NLUT; t++) row_q[t] <= lut[t][q_bpf];
  end

  // cycle 2: Select Logic; cycle 3: concatenation
  logic [IDXW-1:0] sel_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; r_valid <= 1'b0;
      op1 <= '0; op2 <= '0; sel_q <= '0; r_gidx <= '0;
    end else begin
      v1      <= q_valid;
      op1     <= q_op;
      v2      <= v1;
      op2     <= op1;
      sel_q   <= row_q[op1];
      r_valid <= v2;
      r_gidx  <= {op2, sel_q};
    end
  end

endmodule
