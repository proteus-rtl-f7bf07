// tb_proteus_top: end-to-end test of proteus_top at its default parameters.
//
// The top is connected to pud_bank_model (a behavioural PuD bank with its
// memory-controller side). The test:
//   1. pre-loads the cost-model tables and places two uPrograms in uProgram
//      Memory (bit-serial OBPS addition; row copy);
//   2. registers objects A, B, T, D, R (bbop_trsp_init) and evicts A's and B's
//      cache lines, plus one line that belongs to no object;
//   3. T = A + B with dynamic bit-precision: checks the chosen precision
//      (bits of maxA + maxB), every sum bit in DRAM, the command counts
//      (2bp+11 AAP/AP, bp-1 RBM) and that all bp subarrays ran together;
//   4. D = T + A: the precision now comes from T's predicted maximum;
//   5. D = A + B with dynamic bit-precision off: runs at the user's 8 bits;
//   6. a reduction over A whose first level reports a carry-out: the
//      precision rises by one bit;
//   7. clears A's maximum (host read-back) and checks that a copy of A then
//      runs at 1 bit.
// Mechanisms counted (each must occur): engine updates, plain write-backs,
// vertical writes, scratchpad misses and hits, tracker write-back chaining,
// disabled dynamic precision, reduction overflow, maximum clear.
module tb_proteus_top;
  import proteus_pkg::*;
  import proteus_tb_pkg::*;

  localparam int unsigned N    = 512;       // elements per object
  localparam int unsigned CBP  = 8;         // declared bit-precision
  localparam logic [ADDR_W-1:0] A_ADDR = 48'h1000, B_ADDR = 48'h2000,
                                 T_ADDR = 48'h3000, D_ADDR = 48'h4000, R_ADDR = 48'h5000;
  localparam logic [ROW_W-1:0]  A_ROW = 10'd100, B_ROW = 10'd110, T_ROW = 10'd120,
                                 D_ROW = 10'd130, R_ROW = 10'd140;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // DUT signals
  logic dbp_enable, init_valid, ev_valid, ev_ready, wb_valid, wb_ready, vw_valid, vw_ready;
  trsp_init_t init_info;
  logic [ADDR_W-1:0] ev_addr, wb_addr, clr_addr, upm_req_addr;
  logic [LINE_BITS-1:0] ev_data, wb_data, upm_resp_data, fc_resp_data;
  vwrite_t vw;
  logic clr_valid, bbop_valid, bbop_ready, bbop_done;
  bbop_t bbop;
  logic [BP_W-1:0] bbop_done_bp;
  logic lut_ld_we;
  logic [OP_W-1:0] lut_ld_op;
  logic [BPF_W-1:0] lut_ld_row;
  logic [IDX_W-1:0] lut_ld_idx;
  logic upm_req_valid, upm_req_ready, upm_resp_valid;
  logic cmd_valid, cmd_ready;
  pud_cmd_t cmd;
  logic fc_req_valid, fc_req_ready, fc_resp_valid;
  logic [SUB_W-1:0] fc_req_sub;
  logic [ROW_W-1:0] fc_req_row;
  logic [CHUNK_W-1:0] fc_req_chunk;
  logic eng_busy, eng_update;
  logic [31:0] n_aap, n_rbm, n_bbops, n_overflows, sp_hits, sp_misses;

  proteus_top dut (.*);

  pud_bank_model #(.CHUNKS(1)) u_bank (
    .clk, .cmd_valid, .cmd_ready, .cmd, .vw_valid, .vw_ready, .vw,
    .fc_req_valid, .fc_req_ready, .fc_req_sub, .fc_req_row, .fc_req_chunk,
    .fc_resp_valid, .fc_resp_data,
    .upm_req_valid, .upm_req_ready, .upm_req_addr, .upm_resp_valid, .upm_resp_data
  );

  // mechanism counters
  int n_eng_upd = 0, n_wb = 0, n_vwr = 0;
  always @(posedge clk) begin
    if (eng_update) n_eng_upd++;
    if (wb_valid && wb_ready) n_wb++;
    if (vw_valid && vw_ready) n_vwr++;
  end

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // element values: random, A below 13 and B below 29
  int unsigned av [N], bv [N];
  function automatic int unsigned aval(int e); return av[e]; endfunction
  function automatic int unsigned bval(int e); return bv[e]; endfunction

  function automatic int unsigned nbits(longint unsigned v);
    int unsigned n = 1;
    for (int i = 0; i < 64; i++) if (v[i]) n = i + 1;
    return n;
  endfunction

  task automatic reg_obj(logic [ADDR_W-1:0] a, logic [ROW_W-1:0] r);
    @(negedge clk);
    init_valid = 1'b1;
    init_info.addr = a; init_info.size = N; init_info.bp = CBP; init_info.row = r;
    @(negedge clk);
    init_valid = 1'b0;
  endtask

  task automatic evict(logic [ADDR_W-1:0] a, logic [LINE_BITS-1:0] d);
    @(negedge clk);
    ev_valid = 1'b1; ev_addr = a; ev_data = d;
    @(posedge clk);
    while (!ev_ready) @(posedge clk);
    @(negedge clk);
    ev_valid = 1'b0;
  endtask

  task automatic evict_obj(logic [ADDR_W-1:0] a, bit is_b);
    for (int l = 0; l < N * CBP / LINE_BITS; l++) begin
      logic [LINE_BITS-1:0] d;
      for (int k = 0; k < LINE_BITS / CBP; k++) begin
        int e = l * (LINE_BITS / CBP) + k;
        d[k*CBP +: CBP] = CBP'(is_b ? bval(e) : aval(e));
      end
      evict(a + ADDR_W'(l * 64), d);
    end
  endtask

  task automatic run_bbop(bbop_op_e op, logic [ADDR_W-1:0] d, logic [ADDR_W-1:0] s1,
                          logic [ADDR_W-1:0] s2, bit dyn, output int unsigned bp_used);
    @(negedge clk);
    bbop_valid = 1'b1;
    bbop.op = op; bbop.dst = d; bbop.src1 = s1; bbop.src2 = s2;
    bbop.size = N; bbop.bp = CBP; bbop.dyn_en = dyn;
    @(posedge clk);
    while (!bbop_ready) @(posedge clk);
    @(negedge clk);
    bbop_valid = 1'b0;
    while (!bbop_done) @(posedge clk);
    bp_used = bbop_done_bp;
    @(negedge clk);
  endtask

  int unsigned bp, exp_bp, exp_max, bad;
  int unsigned max_a, max_b;
  bit miss_seen, hit_seen, ovf_seen, chain_seen, nodyn_seen, clr_seen;

  initial begin
    dbp_enable = 1'b1; init_valid = 1'b0; init_info = '0; ev_valid = 1'b0; ev_addr = '0;
    ev_data = '0; wb_ready = 1'b1; clr_valid = 1'b0; clr_addr = '0; bbop_valid = 1'b0;
    bbop = '0; lut_ld_we = 1'b0; lut_ld_op = '0; lut_ld_row = '0; lut_ld_idx = '0;
    miss_seen = 0; hit_seen = 0; ovf_seen = 0; chain_seen = 0; nodyn_seen = 0; clr_seen = 0;
    max_a = 0; max_b = 0;
    for (int e = 0; e < N; e++) begin
      av[e] = $urandom % 13;
      bv[e] = $urandom % 29;
    end
    for (int e = 0; e < N; e++) begin
      if (aval(e) > max_a) max_a = aval(e);
      if (bval(e) > max_b) max_b = bval(e);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1. cost-model tables and uProgram Memory
    for (int op = 0; op < 16; op++)
      for (int r = 0; r < 64; r++) begin
        @(negedge clk);
        lut_ld_we = 1'b1; lut_ld_op = 4'(op); lut_ld_row = 6'(r);
        lut_ld_idx = (op == OP_ADD) ? 8'd1 : 8'd2;
      end
    @(negedge clk);
    lut_ld_we = 1'b0;
    u_bank.progs[{OP_ADD, 8'd1}]    = add_prog();
    u_bank.progs[{OP_REDSUM, 8'd2}] = copy_prog();
    u_bank.progs[{OP_COPY, 8'd2}]   = copy_prog();

    // 2. objects and evictions
    reg_obj(A_ADDR, A_ROW); reg_obj(B_ADDR, B_ROW); reg_obj(T_ADDR, T_ROW);
    reg_obj(D_ADDR, D_ROW); reg_obj(R_ADDR, R_ROW);
    evict_obj(A_ADDR, 0);
    evict_obj(B_ADDR, 1);
    evict(48'h9000_0000, {16{32'hdead_beef}});
    repeat (200) @(posedge clk);
    check(n_wb == 1, "line outside every object passed through");
    check(wb_addr == 48'h9000_0000, "write-back address");
    check(n_vwr == 2 * CBP, $sformatf("vertical writes %0d", n_vwr));
    bad = 0;
    for (int e = 0; e < N; e++)
      for (int i = 0; i < CBP; i++)
        if (u_bank.cells[i][A_ROW][e] != ((aval(e) >> i) & 1)) bad++;
    check(bad == 0, $sformatf("A transposed to OBPS layout (%0d bad bits)", bad));

    // 3. T = A + B
    run_bbop(OP_ADD, T_ADDR, A_ADDR, B_ADDR, 1, bp);
    exp_bp = nbits(max_a + max_b);
    check(bp == exp_bp, $sformatf("add precision %0d, expected %0d", bp, exp_bp));
    check(n_aap == 2 * bp + 11, $sformatf("AAP/AP count %0d for bp %0d", n_aap, bp));
    check(n_rbm == bp - 1, $sformatf("RBM count %0d for bp %0d", n_rbm, bp));
    check(u_bank.max_par == bp, $sformatf("subarrays active at once %0d", u_bank.max_par));
    bad = 0;
    for (int e = 0; e < N; e++)
      for (int i = 0; i < int'(bp); i++)
        if (u_bank.cells[i][T_ROW][e] != (((aval(e) + bval(e)) >> i) & 1)) bad++;
    check(bad == 0, $sformatf("T = A + B in DRAM (%0d bad bits)", bad));
    if (sp_misses == 1) miss_seen = 1;

    // 4. D = T + A: T's maximum was predicted by the first addition
    run_bbop(OP_ADD, D_ADDR, T_ADDR, A_ADDR, 1, bp);
    exp_bp = nbits(max_a + max_b + max_a);
    check(bp == exp_bp, $sformatf("chained add precision %0d, expected %0d", bp, exp_bp));
    if (bp == exp_bp && exp_bp != nbits(max_a)) chain_seen = 1;
    bad = 0;
    for (int e = 0; e < N; e++)
      for (int i = 0; i < int'(bp); i++)
        if (u_bank.cells[i][D_ROW][e] != (((2 * aval(e) + bval(e)) >> i) & 1)) bad++;
    check(bad == 0, $sformatf("D = T + A in DRAM (%0d bad bits)", bad));
    if (sp_hits >= 1) hit_seen = 1;

    // 5. dynamic bit-precision off
    run_bbop(OP_ADD, D_ADDR, A_ADDR, B_ADDR, 0, bp);
    check(bp == CBP, $sformatf("disabled: precision %0d", bp));
    check(n_aap == 2 * CBP + 11 && n_rbm == CBP - 1, "disabled: command counts at 8 bits");
    bad = 0;
    for (int e = 0; e < N; e++)
      for (int i = 0; i < int'(CBP); i++)
        if (u_bank.cells[i][D_ROW][e] != (((aval(e) + bval(e)) >> i) & 1)) bad++;
    check(bad == 0, $sformatf("8-bit D = A + B (%0d bad bits)", bad));
    if (bp == CBP) nodyn_seen = 1;

    // 6. reduction with a carry-out after the first level
    exp_bp = nbits(max_a);
    u_bank.cells[exp_bp][R_ROW][0] = 1'b1;
    run_bbop(OP_REDSUM, R_ADDR, A_ADDR, A_ADDR, 1, bp);
    check(n_overflows == 1, $sformatf("reduction overflows %0d", n_overflows));
    check(bp == exp_bp + 1, $sformatf("reduction precision %0d, expected %0d", bp, exp_bp + 1));
    if (n_overflows == 1) ovf_seen = 1;

    // 7. host reads A back: its maximum is cleared
    @(negedge clk);
    clr_valid = 1'b1; clr_addr = A_ADDR;
    @(negedge clk);
    clr_valid = 1'b0;
    run_bbop(OP_COPY, D_ADDR, A_ADDR, A_ADDR, 1, bp);
    check(bp == 1, $sformatf("copy after clear runs at %0d bits", bp));
    if (bp == 1) clr_seen = 1;
    check(n_bbops == 5, $sformatf("bbops completed %0d", n_bbops));

    // every mechanism must have happened
    $display("mechanisms: engine updates %0d, write-backs %0d, vertical writes %0d, scratchpad misses %0d hits %0d, overflows %0d",
             n_eng_upd, n_wb, n_vwr, sp_misses, sp_hits, n_overflows);
    check(n_eng_upd > 0, "engine update happened");
    check(miss_seen && hit_seen, "scratchpad miss and hit happened");
    check(chain_seen, "tracker write-back chaining happened");
    check(nodyn_seen, "disabled dynamic precision happened");
    check(ovf_seen, "reduction overflow happened");
    check(clr_seen, "maximum clear happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
