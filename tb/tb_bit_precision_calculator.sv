// tb_bit_precision_calculator: self-checking test of the bit-precision ALU.
// Directed: the paper's worked example (maxima 3 and 6 added give 4 bits and
// maximum 9; 9 times 2 gives 5 bits and maximum 18) and the disabled mode.
// Random: ADD, MUL, SUB, MAX, COPY, AND with a reference model written here
// (own rules for SUB/MAX/COPY/AND as documented in the design), clamping to the
// user bit-precision, one-cycle latency.
module tb_bit_precision_calculator;
  import proteus_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_dyn_en, out_valid, out_upd_dst;
  bbop_op_e in_op;
  logic [MAXV_W-1:0] in_a, in_b, out_max;
  logic [BP_W-1:0] in_user_bp, out_bp;

  bit_precision_calculator dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int unsigned nb(longint unsigned v);
    int unsigned n = 1;
    for (int i = 0; i < 64; i++) if ((v >> i) & 1) n = i + 1;
    return n;
  endfunction

  task automatic run(bbop_op_e op, longint unsigned a, longint unsigned b, int unsigned ubp, bit dyn,
                     int unsigned e_bp, longint unsigned e_max, bit e_upd, bit chk_max);
    @(negedge clk);
    in_valid = 1'b1; in_op = op; in_a = a; in_b = b; in_user_bp = 7'(ubp); in_dyn_en = dyn;
    @(negedge clk);
    in_valid = 1'b0;
    checks++;
    if (!out_valid || out_bp != 7'(e_bp) || out_upd_dst != e_upd || (chk_max && out_max != e_max)) begin
      failures++;
      $display("FAIL: op %0d a %0d b %0d ubp %0d dyn %0d: got v%0d bp %0d max %0d upd %0d, expected bp %0d max %0d upd %0d",
               op, a, b, ubp, dyn, out_valid, out_bp, out_max, out_upd_dst, e_bp, e_max, e_upd);
    end
  endtask

  initial begin
    longint unsigned a, b, m;
    int unsigned u, e;
    in_valid = 0; in_op = OP_ADD; in_a = 0; in_b = 0; in_user_bp = 32; in_dyn_en = 1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // the paper's example
    run(OP_ADD, 3, 6, 32, 1, 4, 9, 1, 1);
    run(OP_MUL, 9, 2, 32, 1, 5, 18, 1, 1);
    // disabled: user bit-precision, no write-back
    run(OP_ADD, 3, 6, 32, 0, 32, 9, 0, 0);
    // clamped to the container
    run(OP_ADD, 200, 100, 8, 1, 8, 300, 1, 1);
    // reduction: bits of the input, no prediction
    run(OP_REDSUM, 12, 0, 16, 1, 4, 0, 0, 0);
    for (int k = 0; k < 2000; k++) begin
      a = longint'($urandom_range(0, 31)) < 16 ? longint'($urandom) >> $urandom_range(0, 31)
                                               : {longint'($urandom), longint'($urandom)} >> 32;
      b = longint'($urandom) >> $urandom_range(0, 31);
      u = $urandom_range(1, 64);
      case ($urandom_range(0, 5))
        0: begin m = a + b; e = nb(m); run(OP_ADD, a, b, u, 1, e > u ? u : e, m, 1, 1); end
        1: begin
             a = a & 64'hffff_ffff; m = a * b; e = nb(m);
             run(OP_MUL, a, b, u, 1, e > u ? u : e, m, 1, 1);
           end
        2: begin m = a > b ? a : b; e = nb(m) + 1; run(OP_SUB, a, b, u, 1, e > u ? u : e, m, 1, 1); end
        3: begin m = a > b ? a : b; e = nb(m); run(OP_MAX, a, b, u, 1, e > u ? u : e, m, 1, 1); end
        4: begin e = nb(a); run(OP_COPY, a, b, u, 1, e > u ? u : e, a, 1, 1); end
        default: begin
             m = a > b ? a : b; e = nb(m);
             run(OP_AND, a, b, u, 1, e > u ? u : e, e >= 64 ? '1 : (64'd1 << e) - 1, 1, 1);
           end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
