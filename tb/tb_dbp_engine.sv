// tb_dbp_engine: self-checking test of the Dynamic Bit-Precision Engine.
// For random bit-precisions 1..64, random lines, random current maxima and
// random object ends (some inside the line), the engine's reported maximum is
// compared with a reference scan written here: the largest whole n-bit element
// of the line lying inside the object, reported only if it beats the current
// maximum. Also checks that ready drops while busy and the latency bound.
module tb_dbp_engine;
  import proteus_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, ready, upd_valid, busy;
  logic [LINE_BITS-1:0] line;
  logic [8:0] obj_idx, upd_idx;
  logic [BP_W-1:0] obj_bp;
  logic [MAXV_W-1:0] obj_max, upd_max;
  logic [SIZE_W+BP_W-1:0] line_bit_off, obj_bits;

  dbp_engine dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_upd = 0;
  initial begin
    longint unsigned mx, e, cur;
    bit larger, got;
    int n, cyc;
    start = 0; line = '0; obj_idx = 0; obj_bp = 8; obj_max = 0; line_bit_off = 0; obj_bits = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      n = $urandom_range(1, 64);
      for (int k = 0; k < 16; k++) line[k*32 +: 32] = $urandom >> $urandom_range(0, 31);
      cur = ($urandom_range(0, 1) == 0) ? 0 : ({32'h0, $urandom} >> $urandom_range(0, 31));
      obj_bp = 7'(n); obj_idx = 9'($urandom); obj_max = cur;
      line_bit_off = 39'($urandom_range(0, 100)) * 512;
      obj_bits = line_bit_off + (($urandom_range(0, 1) == 0) ? 39'(4096) : 39'($urandom_range(0, 600)));
      // reference
      mx = cur; larger = 0;
      for (int off = 0; off + n <= 512; off += n) begin
        if (line_bit_off + off + n > obj_bits) break;
        e = 64'(line >> off);
        if (n < 64) e = e & ((64'd1 << n) - 1);
        if (e > mx) begin mx = e; larger = 1; end
      end
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      checks++;
      if (ready || !busy) begin failures++; $display("FAIL: ready while busy"); end
      got = 0; cyc = 0;
      while (!ready) begin
        @(posedge clk); #1;
        if (upd_valid) begin
          got = 1;
          checks++;
          if (upd_max != mx || upd_idx != obj_idx) begin
            failures++;
            $display("FAIL: n %0d max %0d idx %0d, expected %0d idx %0d", n, upd_max, upd_idx, mx, obj_idx);
          end
        end
        cyc++;
      end
      checks++;
      if (got != larger) begin
        failures++;
        $display("FAIL: n %0d update %0d expected %0d", n, got, larger);
      end
      checks++;
      if (cyc > 512 / n + 4) begin failures++; $display("FAIL: n %0d took %0d cycles", n, cyc); end
      if (got) n_upd++;
    end
    checks++;
    if (n_upd == 0) begin failures++; $display("FAIL: no update seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
