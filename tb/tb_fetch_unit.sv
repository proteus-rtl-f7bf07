// tb_fetch_unit: self-checking test of the Fetch Unit (carry-out check).
// A small memory model answers chunk reads with a random delay and random
// back-pressure. For random subarray, row and chunk counts (0 meaning 1) the
// test checks the addresses read, one read per chunk, and that overflow is
// set exactly when some read chunk has a 1 bit.
module tb_fetch_unit;
  import proteus_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, rd_req_valid, rd_req_ready, rd_resp_valid, done, overflow;
  logic [SUB_W-1:0] sub, rd_req_sub;
  logic [ROW_W-1:0] row, rd_req_row;
  logic [CHUNK_W:0] nchunks;
  logic [CHUNK_W-1:0] rd_req_chunk;
  logic [LINE_BITS-1:0] rd_resp_data;

  fetch_unit dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // chunk contents of the row under test: zero except the chunks in hot
  bit hot [128];
  int one_bit;
  int nreads, bad_addr;
  logic [SUB_W-1:0] exp_sub;
  logic [ROW_W-1:0] exp_row;
  // read pipeline: queue of pending chunks, answered after 1..3 cycles
  int pend [$];
  int delay;
  always @(posedge clk) begin
    if (rd_req_valid && rd_req_ready) begin
      nreads++;
      if (rd_req_sub != exp_sub || rd_req_row != exp_row) bad_addr++;
      pend.push_back(int'(rd_req_chunk));
    end
  end
  always @(negedge clk) begin
    rd_req_ready = ($urandom_range(0, 3) != 0);
    rd_resp_valid = 1'b0;
    rd_resp_data = '0;
    if (pend.size() > 0 && $urandom_range(0, 2) == 0) begin
      int c;
      c = pend.pop_front();
      rd_resp_valid = 1'b1;
      if (hot[c]) rd_resp_data[one_bit] = 1'b1;
    end
  end

  initial begin
    int n, nexp;
    bit exp_ovf;
    start = 0; sub = 0; row = 0; nchunks = 0; rd_req_ready = 1; rd_resp_valid = 0; rd_resp_data = '0;
    nreads = 0; bad_addr = 0; one_bit = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      n = $urandom_range(0, 128);
      nexp = (n == 0) ? 1 : n;
      exp_ovf = 0;
      for (int c = 0; c < 128; c++) hot[c] = 0;
      if ($urandom_range(0, 1) == 0) begin
        int h;
        h = $urandom_range(0, nexp - 1);
        hot[h] = 1; exp_ovf = 1;
      end
      if ($urandom_range(0, 3) == 0 && nexp < 128) hot[nexp] = 1;   // beyond the range: ignored
      one_bit = $urandom_range(0, 511);
      @(negedge clk);
      exp_sub = 6'($urandom); exp_row = 10'($urandom);
      sub = exp_sub; row = exp_row; nchunks = 8'(n); start = 1'b1;
      nreads = 0; bad_addr = 0;
      @(negedge clk);
      start = 1'b0;
      while (!done) @(posedge clk);
      #1;
      checks++;
      if (overflow != exp_ovf || nreads != nexp || bad_addr != 0) begin
        failures++;
        $display("FAIL: n %0d overflow %0d exp %0d reads %0d bad addr %0d", n, overflow, exp_ovf, nreads, bad_addr);
      end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("FAIL: busy after done"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
