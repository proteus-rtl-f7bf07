// tb_cost_model_logic: self-checking test of the cost-model LUTs and Select
// Logic. Loads random uProgram indices into all 16 x 64 rows, then queries
// random {bit-precision, operation} pairs back to back and checks each result
// appears exactly three cycles after its query with gidx = {op, index}.
module tb_cost_model_logic;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ld_we, q_valid, r_valid;
  logic [3:0] ld_op, q_op;
  logic [5:0] ld_row, q_bpf;
  logic [7:0] ld_idx;
  logic [11:0] r_gidx;
  logic [7:0] lut [16][64];

  cost_model_logic dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results, indexed by the cycle they must appear in
  logic        exp_v [0:4095];
  logic [11:0] exp_g [0:4095];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (r_valid != exp_v[cyc] || (r_valid && r_gidx != exp_g[cyc])) begin
      failures++;
      $display("FAIL: cycle %0d valid %0d gidx %h, expected %0d %h", cyc, r_valid, r_gidx, exp_v[cyc], exp_g[cyc]);
    end
  end

  initial begin
    for (int i = 0; i < 4096; i++) begin exp_v[i] = 0; exp_g[i] = 0; end
    ld_we = 0; q_valid = 0; ld_op = 0; ld_row = 0; ld_idx = 0; q_op = 0; q_bpf = 0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int o = 0; o < 16; o++)
      for (int r = 0; r < 64; r++) begin
        lut[o][r] = 8'($urandom);
        ld_we = 1; ld_op = 4'(o); ld_row = 6'(r); ld_idx = lut[o][r];
        @(negedge clk);
      end
    ld_we = 0;
    for (int k = 0; k < 2000; k++) begin
      q_valid = ($urandom_range(0, 3) != 0);
      q_op = 4'($urandom); q_bpf = 6'($urandom);
      // the query is sampled at the next rising edge (cycle cyc); the result
      // is visible after the edge that ends cycle cyc + 2
      exp_v[cyc + 3] = q_valid;
      exp_g[cyc + 3] = {q_op, lut[q_op][q_bpf]};
      @(negedge clk);
    end
    q_valid = 0;
    repeat (5) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
