// tb_object_tracker: self-checking test of the Object Tracker.
// A reference model kept here mirrors the tracker's documented policy:
// registration reuses the entry of the same base address, else the lowest
// free entry, else a round-robin victim; write priority registration >
// engine update > control-unit update > clear. Random registrations over a
// pool of 40 non-overlapping objects (more than the 16 entries of the tested
// instance, so replacement happens), random updates and clears, and random
// range lookups (any byte inside an object) and exact base lookups.
module tb_object_tracker;
  import proteus_pkg::*;
  localparam int E = 16;
  localparam int IW = $clog2(E);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic reg_valid, ev_hit, cu_hit, eng_upd_valid, cu_upd_valid, clr_valid;
  trsp_init_t reg_info, ev_info, cu_info;
  logic [ADDR_W-1:0] ev_addr, cu_addr, clr_addr;
  logic [IW-1:0] ev_idx, cu_idx, eng_upd_idx, cu_upd_idx;
  logic [MAXV_W-1:0] ev_max, cu_max, eng_upd_max, cu_upd_max;

  object_tracker #(.ENTRIES(E)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference
  bit m_vld [E];
  trsp_init_t m_info [E];
  longint unsigned m_max [E];
  int m_rr;

  function automatic int ref_lookup(logic [ADDR_W-1:0] a, bit exact);
    for (int i = 0; i < E; i++)
      if (m_vld[i]) begin
        longint unsigned endb;
        endb = m_info[i].addr + (longint'(m_info[i].size) * cont_w(m_info[i].bp) + 7) / 8;
        if (exact ? (a == m_info[i].addr) : (a >= m_info[i].addr && a < endb)) return i;
      end
    return -1;
  endfunction

  int n_repl = 0;
  initial begin
    int k, idx, slot;
    bit r, eu, cu, cl;
    reg_valid = 0; eng_upd_valid = 0; cu_upd_valid = 0; clr_valid = 0;
    reg_info = '0; ev_addr = 0; cu_addr = 0; clr_addr = 0;
    eng_upd_idx = 0; cu_upd_idx = 0; eng_upd_max = 0; cu_upd_max = 0;
    for (int i = 0; i < E; i++) begin m_vld[i] = 0; m_info[i] = '0; m_max[i] = 0; end
    m_rr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 6000; t++) begin
      @(negedge clk);
      // lookups (combinational)
      k = $urandom_range(0, 39);
      ev_addr = 48'(k) * 48'h10000 + 48'($urandom_range(0, 'hffff));
      cu_addr = ($urandom_range(0, 1) == 0) ? 48'($urandom_range(0, 39)) * 48'h10000
                                            : 48'($urandom_range(0, 39)) * 48'h10000 + 48'd64;
      #1;
      idx = ref_lookup(ev_addr, 0);
      checks++;
      if (ev_hit != (idx >= 0) || (idx >= 0 && (int'(ev_idx) != idx || ev_info != m_info[idx] || ev_max != m_max[idx]))) begin
        failures++;
        $display("FAIL: range lookup %h hit %0d idx %0d max %0d, expected idx %0d", ev_addr, ev_hit, ev_idx, ev_max, idx);
      end
      idx = ref_lookup(cu_addr, 1);
      checks++;
      if (cu_hit != (idx >= 0) || (idx >= 0 && (int'(cu_idx) != idx || cu_info != m_info[idx] || cu_max != m_max[idx]))) begin
        failures++;
        $display("FAIL: base lookup %h hit %0d idx %0d, expected idx %0d", cu_addr, cu_hit, cu_idx, idx);
      end
      // writes
      r  = ($urandom_range(0, 3) == 0);
      eu = ($urandom_range(0, 2) == 0);
      cu = ($urandom_range(0, 2) == 0);
      cl = ($urandom_range(0, 5) == 0);
      reg_valid = r; eng_upd_valid = eu; cu_upd_valid = cu; clr_valid = cl;
      reg_info.addr = 48'($urandom_range(0, 39)) * 48'h10000;
      reg_info.bp   = 7'($urandom_range(1, 64));
      reg_info.size = 32'($urandom_range(1, 'h80000 / int'(reg_info.bp)));
      reg_info.row  = 10'($urandom);
      eng_upd_idx = IW'($urandom); eng_upd_max = {$urandom, $urandom};
      cu_upd_idx  = IW'($urandom); cu_upd_max  = {$urandom, $urandom};
      clr_addr = 48'($urandom_range(0, 39)) * 48'h10000;
      // reference update (same priority)
      slot = -1;
      if (r) begin
        slot = ref_lookup(reg_info.addr, 1);
        if (slot < 0) for (int i = 0; i < E; i++) if (!m_vld[i]) begin slot = i; break; end
        if (slot < 0) begin slot = m_rr; m_rr = (m_rr + 1) % E; n_repl++; end
      end
      for (int i = 0; i < E; i++) begin
        if (i == slot) begin m_vld[i] = 1; m_info[i] = reg_info; m_max[i] = 0; end
        else if (eu && int'(eng_upd_idx) == i) m_max[i] = eng_upd_max;
        else if (cu && int'(cu_upd_idx) == i) m_max[i] = cu_upd_max;
        else if (cl && m_vld[i] && m_info[i].addr == clr_addr) m_max[i] = 0;
      end
      @(negedge clk);
      reg_valid = 0; eng_upd_valid = 0; cu_upd_valid = 0; clr_valid = 0;
    end
    checks++;
    if (n_repl == 0) begin failures++; $display("FAIL: no replacement exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
