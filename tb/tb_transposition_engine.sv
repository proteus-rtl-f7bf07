// tb_transposition_engine: self-checking test of the horizontal-to-vertical
// transposition. For random bit-precisions 1..64 (stored in power-of-two
// containers W) and random object sizes (partial last chunks included), the
// object's lines are fed in order with random gaps while out_ready toggles
// randomly. Every vertical write is recorded; afterwards every bit b of every
// element e must sit in subarray b, row obj_row + (e/512)/128, chunk
// (e/512)%128, column e%512, and exactly W writes per chunk must appear.
module tb_transposition_engine;
  import proteus_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [LINE_BITS-1:0] in_line;
  logic [BP_W-1:0] in_bp;
  logic [ROW_W-1:0] in_row;
  logic [SIZE_W+BP_W-1:0] in_bit_off, in_obj_bits;
  vwrite_t out_wr;

  transposition_engine dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // recorded writes, key {sub, row, chunk}
  function automatic int kf(int s, int r, int c); return s * 1048576 + r * 128 + c; endfunction
  logic [LINE_BITS-1:0] got [int];
  int n_wr = 0;
  always @(posedge clk) if (out_valid && out_ready) begin
    got[kf(int'(out_wr.sub), int'(out_wr.row), int'(out_wr.chunk))] = out_wr.data;
    n_wr++;
  end
  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);

  logic [63:0] elems [];

  initial begin
    int bp, w, nel, nlines, row, bad, nchunk;
    in_valid = 0; in_line = '0; in_bp = 8; in_row = 0; in_bit_off = 0; in_obj_bits = 0; out_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 60; t++) begin
      bp = (t < 7) ? (1 << t) : $urandom_range(1, 64);
      w = int'(cont_w(7'(bp)));
      nel = (t % 3 == 0) ? 512 * $urandom_range(1, 3) : $urandom_range(1, 1600);
      if (w == 64 && nel > 700) nel = 700;
      row = $urandom_range(0, 900);
      elems = new[nel];
      for (int e = 0; e < nel; e++) begin
        elems[e] = {$urandom, $urandom};
        if (w < 64) elems[e] &= (64'd1 << w) - 1;
      end
      nlines = (nel * w + 511) / 512;
      got.delete();
      n_wr = 0;
      for (int l = 0; l < nlines; l++) begin
        logic [LINE_BITS-1:0] d;
        d = '0;
        for (int k = 0; k < 512 / w; k++) begin
          int e;
          logic [63:0] v;
          e = l * (512 / w) + k;
          v = (e < nel) ? elems[e] : {$urandom, $urandom};   // beyond the object: junk
          for (int b = 0; b < w; b++) d[k*w + b] = v[b];
        end
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) @(negedge clk);
        in_valid = 1'b1; in_line = d; in_bp = 7'(bp); in_row = 10'(row);
        in_bit_off = 39'(l) * 512; in_obj_bits = 39'(nel) * 39'(w);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
        in_valid = 1'b0;
      end
      nchunk = (nel + 511) / 512;
      repeat (12000) @(posedge clk);
      bad = 0;
      for (int e = 0; e < nel; e++)
        for (int b = 0; b < w; b++) begin
          int key;
            key = kf(b, row + (e / 512) / 128, (e / 512) % 128);
          if (!got.exists(key)) bad++;
          else if (got[key][e % 512] != elems[e][b]) bad++;
        end
      checks++;
      if (bad != 0 || n_wr != nchunk * w) begin
        failures++;
        $display("FAIL: bp %0d size %0d: %0d wrong bits, %0d writes (expected %0d)", bp, nel, bad, n_wr, nchunk * w);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
