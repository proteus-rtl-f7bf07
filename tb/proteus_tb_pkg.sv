// proteus_tb_pkg: uProgram builders shared by the testbenches.
//
// uop() packs one uProgram word. add_prog() is a bit-serial ripple-carry
// addition for the one-bit-per-subarray mapping (bit i of A, B and S in
// subarray i), written with Ambit primitives:
//   all subarrays   T3 <- 0, T0 <- A, T1 <- B
//   i = 0..bp-2     T2 <- T3; AP(T0,T1,T2) = Cout_i; RBM T0 -> T3 of i+1
//   subarray bp-1   T2 <- T3; AP(T0,T1,T2) = Cout
//   all subarrays   DCC0 <- !Cout; T0 <- A; T1 <- B; DCC1 <- !Cin;
//                   AP(T0,T1,DCC1) = MAJ(A,B,!Cin); T2 <- Cin;
//                   AP(DCC0,T0,T2) = S; S row <- T0
// S = MAJ(!Cout, MAJ(A,B,!Cin), Cin) is the sum bit. Cost: 2*bp + 11 AAP/AP
// commands and bp-1 inter-subarray copies (each two RBM cycles in DRAM).
// copy_prog() copies src1 to dst in all active subarrays (one AAP).
package proteus_tb_pkg;
  import proteus_pkg::*;

  function automatic logic [31:0] uop(uop_kind_e k, uop_tgt_e t,
                                      logic [7:0] a, logic [7:0] b, logic [7:0] c);
    uop_t u;
    u.kind = k; u.tgt = t; u.rsvd = '0; u.a = a; u.b = b; u.c = c;
    return u;
  endfunction

  function automatic logic [7:0] fx(int unsigned k);
    return {RB_FIXED, 6'(k)};
  endfunction
  function automatic logic [7:0] s1(); return {RB_SRC1, 6'd0}; endfunction
  function automatic logic [7:0] s2(); return {RB_SRC2, 6'd0}; endfunction
  function automatic logic [7:0] ds(); return {RB_DST,  6'd0}; endfunction

  localparam int unsigned PROG_BITS = UOP_W * UPROG_WORDS;

  function automatic logic [PROG_BITS-1:0] add_prog();
    logic [31:0] w [UPROG_WORDS];
    logic [PROG_BITS-1:0] p;
    for (int k = 0; k < UPROG_WORDS; k++) w[k] = '0;
    w[0]  = uop(UOP_AAP, TGT_ALL,  fx(FIX_C0), fx(FIX_T3), 8'd0);
    w[1]  = uop(UOP_AAP, TGT_ALL,  s1(), fx(FIX_T0), 8'd0);
    w[2]  = uop(UOP_AAP, TGT_ALL,  s2(), fx(FIX_T1), 8'd0);
    w[3]  = uop(UOP_LOOP, TGT_ALL, 8'd0, 8'd1, 8'd0);
    w[4]  = uop(UOP_AAP, TGT_LOOP, fx(FIX_T3), fx(FIX_T2), 8'd0);
    w[5]  = uop(UOP_AP,  TGT_LOOP, fx(FIX_T0), fx(FIX_T1), fx(FIX_T2));
    w[6]  = uop(UOP_RBM, TGT_LOOP, fx(FIX_T0), fx(FIX_T3), 8'd0);
    w[7]  = uop(UOP_ENDLOOP, TGT_ALL, 8'd0, 8'd0, 8'd0);
    w[8]  = uop(UOP_AAP, TGT_LAST, fx(FIX_T3), fx(FIX_T2), 8'd0);
    w[9]  = uop(UOP_AP,  TGT_LAST, fx(FIX_T0), fx(FIX_T1), fx(FIX_T2));
    w[10] = uop(UOP_AAP, TGT_ALL,  fx(FIX_T0), fx(FIX_DCC0N), 8'd0);
    w[11] = uop(UOP_AAP, TGT_ALL,  s1(), fx(FIX_T0), 8'd0);
    w[12] = uop(UOP_AAP, TGT_ALL,  s2(), fx(FIX_T1), 8'd0);
    w[13] = uop(UOP_AAP, TGT_ALL,  fx(FIX_T3), fx(FIX_DCC1N), 8'd0);
    w[14] = uop(UOP_AP,  TGT_ALL,  fx(FIX_T0), fx(FIX_T1), fx(FIX_DCC1));
    w[15] = uop(UOP_AAP, TGT_ALL,  fx(FIX_T3), fx(FIX_T2), 8'd0);
    w[16] = uop(UOP_AP,  TGT_ALL,  fx(FIX_DCC0), fx(FIX_T0), fx(FIX_T2));
    w[17] = uop(UOP_AAP, TGT_ALL,  fx(FIX_T0), ds(), 8'd0);
    w[18] = uop(UOP_DONE, TGT_ALL, 8'd0, 8'd0, 8'd0);
    for (int k = 0; k < UPROG_WORDS; k++) p[k*32 +: 32] = w[k];
    return p;
  endfunction

  function automatic logic [PROG_BITS-1:0] copy_prog();
    logic [PROG_BITS-1:0] p;
    p = '0;
    p[31:0]  = uop(UOP_AAP, TGT_ALL, s1(), ds(), 8'd0);
    p[63:32] = uop(UOP_DONE, TGT_ALL, 8'd0, 8'd0, 8'd0);
    return p;
  endfunction

endpackage
