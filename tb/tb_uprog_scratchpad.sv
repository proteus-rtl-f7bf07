// tb_uprog_scratchpad: self-checking test of the uProgram Scratchpad.
// uProgram Memory is modelled here with a random response delay; the content
// of uProgram g, line n is a fixed function of (g, n). Random requests over a
// few operations and indices; each response must carry the right uProgram and
// the hit/miss counters must follow a reference direct-mapped model (slot =
// operation, tag = per-operation index). A hit must answer the next cycle and
// make no memory read.
module tb_uprog_scratchpad;
  import proteus_pkg::*;
  localparam logic [ADDR_W-1:0] BASE = 48'h0000_F000_0000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid, req_ready, resp_valid, mem_req_valid, mem_req_ready, mem_resp_valid;
  logic [GIDX_W-1:0] req_gidx;
  logic [UOP_W*UPROG_WORDS-1:0] resp_prog;
  logic [ADDR_W-1:0] mem_req_addr;
  logic [LINE_BITS-1:0] mem_resp_data;
  logic [31:0] hits, misses;

  uprog_scratchpad dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [LINE_BITS-1:0] content(logic [ADDR_W-1:0] a);
    logic [LINE_BITS-1:0] d;
    for (int k = 0; k < 16; k++) d[k*32 +: 32] = 32'(a) * 32'h9e37_79b9 + 32'(k) * 32'h85eb_ca6b;
    return d;
  endfunction

  // memory model
  logic [ADDR_W-1:0] pend [$];
  int n_mem = 0;
  always @(posedge clk) if (mem_req_valid && mem_req_ready) begin
    pend.push_back(mem_req_addr);
    n_mem++;
  end
  always @(negedge clk) begin
    mem_req_ready = ($urandom_range(0, 2) != 0);
    mem_resp_valid = 1'b0;
    if (pend.size() > 0 && $urandom_range(0, 3) == 0) begin
      mem_resp_valid = 1'b1;
      mem_resp_data = content(pend.pop_front());
    end
  end

  bit m_vld [16];
  logic [7:0] m_tag [16];
  int m_hits = 0, m_miss = 0;

  initial begin
    logic [GIDX_W-1:0] g;
    logic [ADDR_W-1:0] a;
    bit hit;
    int cyc, mem0;
    req_valid = 0; req_gidx = 0; mem_req_ready = 1; mem_resp_valid = 0; mem_resp_data = '0;
    for (int s = 0; s < 16; s++) begin m_vld[s] = 0; m_tag[s] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 1500; t++) begin
      @(negedge clk);
      g = {4'($urandom_range(0, 5)), 8'($urandom_range(0, 3))};
      hit = m_vld[g[11:8]] && m_tag[g[11:8]] == g[7:0];
      if (hit) m_hits++; else m_miss++;
      m_vld[g[11:8]] = 1; m_tag[g[11:8]] = g[7:0];
      req_valid = 1'b1; req_gidx = g;
      @(posedge clk);
      while (!req_ready) @(posedge clk);
      mem0 = n_mem;
      @(negedge clk);
      req_valid = 1'b0;
      cyc = 0;
      while (!resp_valid) begin @(negedge clk); cyc++; end
      a = BASE + 48'(g) * 128;
      checks++;
      if (resp_prog != {content(a + 64), content(a)}) begin
        failures++;
        $display("FAIL: gidx %h wrong uProgram", g);
      end
      if (hit) begin
        checks++;
        if (cyc != 0 || n_mem != mem0) begin
          failures++;
          $display("FAIL: hit on %h took %0d extra cycles, %0d memory reads", g, cyc, n_mem - mem0);
        end
      end
    end
    @(negedge clk);
    checks++;
    if (hits != 32'(m_hits) || misses != 32'(m_miss)) begin
      failures++;
      $display("FAIL: hits %0d misses %0d, expected %0d %0d", hits, misses, m_hits, m_miss);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
