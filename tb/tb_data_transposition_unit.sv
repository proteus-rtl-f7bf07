// tb_data_transposition_unit: self-checking test of the Data Transposition
// Unit (Object Tracker + Dynamic Bit-Precision Engine + transposition engine).
// Three objects with random bit-precisions (stored in power-of-two
// containers) are registered and their lines evicted in order, mixed with
// lines outside every object. Checks: non-object lines leave unchanged on the
// write-back port; every element bit lands in the right subarray/row/column;
// the tracker's maximum for each object equals the largest element (engine on);
// with the engine off the maximum stays 0; a clear resets a maximum.
module tb_data_transposition_unit;
  import proteus_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic dyn_en, init_valid, ev_valid, ev_ready, wb_valid, wb_ready, vw_valid, vw_ready;
  trsp_init_t init_info, cu_info;
  logic [ADDR_W-1:0] ev_addr, wb_addr, cu_addr, clr_addr;
  logic [LINE_BITS-1:0] ev_data, wb_data;
  vwrite_t vw;
  logic cu_hit, cu_upd_valid, clr_valid, eng_busy, eng_update;
  logic [8:0] cu_idx, cu_upd_idx;
  logic [MAXV_W-1:0] cu_max, cu_upd_max;

  data_transposition_unit dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int kf(int s, int r, int c); return s * 1048576 + r * 128 + c; endfunction
  logic [LINE_BITS-1:0] got [int];
  int n_vw = 0, n_wb = 0, bad_wb = 0;
  logic [LINE_BITS-1:0] exp_wb [$];
  always @(posedge clk) begin
    if (vw_valid && vw_ready) begin
      got[kf(int'(vw.sub), int'(vw.row), int'(vw.chunk))] = vw.data;
      n_vw++;
    end
    if (wb_valid && wb_ready) begin
      n_wb++;
      if (exp_wb.size() == 0 || wb_data != exp_wb.pop_front()) bad_wb++;
    end
  end
  always @(negedge clk) begin
    vw_ready = ($urandom_range(0, 3) != 0);
    wb_ready = ($urandom_range(0, 2) != 0);
  end

  task automatic evict(logic [ADDR_W-1:0] a, logic [LINE_BITS-1:0] d);
    @(negedge clk);
    ev_valid = 1'b1; ev_addr = a; ev_data = d;
    @(posedge clk);
    while (!ev_ready) @(posedge clk);
    @(negedge clk);
    ev_valid = 1'b0;
  endtask

  logic [63:0] el [3][];
  int bp [3], w [3], nel [3], row [3];
  logic [ADDR_W-1:0] base [3];
  longint unsigned mx [3];

  initial begin
    int bad, wbs;
    dyn_en = 1; init_valid = 0; init_info = '0; ev_valid = 0; ev_addr = 0; ev_data = '0;
    cu_addr = 0; cu_upd_valid = 0; cu_upd_idx = 0; cu_upd_max = 0; clr_valid = 0; clr_addr = 0;
    vw_ready = 1; wb_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 4; round++) begin
      dyn_en = (round != 2);
      got.delete(); n_vw = 0;
      wbs = 0;
      for (int o = 0; o < 3; o++) begin
        bp[o] = (o == 0) ? 8 : $urandom_range(1, 40);
        w[o] = int'(cont_w(7'(bp[o])));
        nel[o] = $urandom_range(64, 1100);
        row[o] = 100 + 40 * o + round;
        base[o] = 48'h10_0000 * (o + 1) + 48'h1_0000 * round;
        el[o] = new[nel[o]];
        mx[o] = 0;
        for (int e = 0; e < nel[o]; e++) begin
          el[o][e] = {$urandom, $urandom} >> (64 - bp[o]);
          if (el[o][e] > mx[o]) mx[o] = el[o][e];
        end
        @(negedge clk);
        init_valid = 1; init_info.addr = base[o]; init_info.size = 32'(nel[o]);
        init_info.bp = 7'(bp[o]); init_info.row = 10'(row[o]);
        @(negedge clk);
        init_valid = 0;
      end
      // the objects' lines in order, mixed with lines outside every object
      begin
        int l [3];
        int nl [3];
        int o;
        l = '{0, 0, 0};
        for (int o = 0; o < 3; o++) nl[o] = (nel[o] * w[o] + 511) / 512;
        while (l[0] < nl[0] || l[1] < nl[1] || l[2] < nl[2]) begin
          o = $urandom_range(0, 3);
          // one object at a time: a chunk's lines must arrive back to back
          if (o != 3) o = (l[0] < nl[0]) ? 0 : ((l[1] < nl[1]) ? 1 : 2);
          if (o == 3) begin
            logic [LINE_BITS-1:0] d;
            for (int k = 0; k < 16; k++) d[k*32 +: 32] = $urandom;
            exp_wb.push_back(d);
            wbs++;
            evict(48'h8000_0000 + 48'($urandom_range(0, 1000)) * 64, d);
          end else if (l[o] < nl[o]) begin
            logic [LINE_BITS-1:0] d;
            d = '0;
            for (int k = 0; k < 512 / w[o]; k++) begin
              int e;
              e = l[o] * (512 / w[o]) + k;
              if (e < nel[o]) for (int b = 0; b < w[o]; b++) d[k*w[o] + b] = el[o][e][b];
            end
            evict(base[o] + 48'(l[o]) * 64, d);
            l[o]++;
          end
        end
      end
      repeat (12000) @(posedge clk);
      bad = 0;
      for (int o = 0; o < 3; o++)
        for (int e = 0; e < nel[o]; e++)
          for (int b = 0; b < w[o]; b++) begin
            int key;
            key = kf(b, row[o] + (e / 512) / 128, (e / 512) % 128);
            if (!got.exists(key) || got[key][e % 512] != el[o][e][b]) bad++;
          end
      checks++;
      if (bad != 0) begin failures++; $display("FAIL: round %0d: %0d element bits misplaced", round, bad); end
      checks++;
      if (bad_wb != 0 || exp_wb.size() != 0) begin
        failures++;
        $display("FAIL: round %0d: write-back errors %0d, missing %0d", round, bad_wb, exp_wb.size());
      end
      for (int o = 0; o < 3; o++) begin
        @(negedge clk);
        cu_addr = base[o];
        #1;
        checks++;
        if (!cu_hit || cu_max != (dyn_en ? mx[o] : 0)) begin
          failures++;
          $display("FAIL: round %0d object %0d (bp %0d): max %0d, expected %0d", round, o, bp[o], cu_max, dyn_en ? mx[o] : 0);
        end
      end
      // clear object 1's maximum (host read-back)
      @(negedge clk);
      clr_valid = 1; clr_addr = base[1];
      @(negedge clk);
      clr_valid = 0; cu_addr = base[1];
      #1;
      checks++;
      if (cu_max != 0) begin failures++; $display("FAIL: clear"); end
    end
    checks++;
    if (n_wb == 0) begin failures++; $display("FAIL: no write-back seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
