// tb_aap_dispatcher: self-checking test of the AP/AAP dispatcher.
// The dispatcher runs the bit-serial OBPS addition uProgram (from
// proteus_tb_pkg) against the behavioural PuD bank, at random bit-precisions
// 1..24 with random operands of that width stored one bit per subarray. The
// test checks every sum bit (mod 2^bp), the command counts (2bp+11 AAP/AP and
// bp-1 RBM), that the all-subarray commands hit bp subarrays at once, that no
// subarray at or above bp is touched, and a copy uProgram.
module tb_aap_dispatcher;
  import proteus_pkg::*;
  import proteus_tb_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, cmd_valid, cmd_ready, done;
  logic [BP_W-1:0] bp;
  logic [ROW_W-1:0] src1_row, src2_row, dst_row;
  logic [UPC_W-1:0] prog_addr;
  uop_t prog_word;
  pud_cmd_t cmd;
  logic [31:0] n_aap, n_rbm;

  logic [UOP_W*UPROG_WORDS-1:0] prog;
  assign prog_word = prog[int'(prog_addr)*32 +: 32];

  aap_dispatcher dut (.*);

  // unused ports of the bank model
  logic vw_ready, fc_req_ready, fc_resp_valid, upm_req_ready, upm_resp_valid;
  vwrite_t vw;
  logic [LINE_BITS-1:0] fc_resp_data, upm_resp_data;
  pud_bank_model u_bank (
    .clk, .cmd_valid, .cmd_ready, .cmd, .vw_valid(1'b0), .vw_ready, .vw('0),
    .fc_req_valid(1'b0), .fc_req_ready, .fc_req_sub('0), .fc_req_row('0), .fc_req_chunk('0),
    .fc_resp_valid, .fc_resp_data,
    .upm_req_valid(1'b0), .upm_req_ready, .upm_req_addr('0), .upm_resp_valid, .upm_resp_data
  );

  initial begin
    repeat (400000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int high_touch = 0;
  always @(posedge clk) if (cmd_valid && cmd_ready && (cmd.sa_mask >> bp) != 0) high_touch++;

  logic [31:0] av [512], bv [512];

  task automatic run(logic [UOP_W*UPROG_WORDS-1:0] p, int n);
    @(negedge clk);
    prog = p; bp = 7'(n); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(posedge clk);
    @(negedge clk);
  endtask

  initial begin
    int n, bad;
    logic [31:0] s;
    start = 0; bp = 1; prog = '0;
    src1_row = 10'd10; src2_row = 10'd20; dst_row = 10'd30;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 40; t++) begin
      n = (t < 2) ? t + 1 : $urandom_range(1, 24);
      for (int e = 0; e < 512; e++) begin
        av[e] = $urandom & ((32'd1 << n) - 1);
        bv[e] = $urandom & ((32'd1 << n) - 1);
        for (int i = 0; i < 32; i++) begin
          u_bank.cells[i][10][e] = av[e][i];
          u_bank.cells[i][20][e] = bv[e][i];
        end
      end
      u_bank.max_par = 0;
      high_touch = 0;
      run(add_prog(), n);
      bad = 0;
      for (int e = 0; e < 512; e++) begin
        s = av[e] + bv[e];
        for (int i = 0; i < n; i++) if (u_bank.cells[i][30][e] != s[i]) bad++;
      end
      checks++;
      if (bad != 0) begin failures++; $display("FAIL: bp %0d: %0d wrong sum bits", n, bad); end
      checks++;
      if (n_aap != 32'(2 * n + 11) || n_rbm != 32'(n - 1)) begin
        failures++;
        $display("FAIL: bp %0d: %0d AAP/AP and %0d RBM", n, n_aap, n_rbm);
      end
      checks++;
      if (u_bank.max_par != n || high_touch != 0) begin
        failures++;
        $display("FAIL: bp %0d: parallelism %0d, commands above bp %0d", n, u_bank.max_par, high_touch);
      end
    end
    // copy: dst <- src1 in all bp subarrays
    run(copy_prog(), 12);
    bad = 0;
    for (int e = 0; e < 512; e++)
      for (int i = 0; i < 12; i++) if (u_bank.cells[i][30][e] != u_bank.cells[i][10][e]) bad++;
    checks++;
    if (bad != 0 || n_aap != 1 || n_rbm != 0) begin failures++; $display("FAIL: copy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
