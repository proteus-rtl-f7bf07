// tb_uprog_buffer: self-checking test of the 32-word uProgram Buffer.
// Checks the reset contents (all DONE words), that a load replaces all 32
// words at once, random read addresses, and that contents hold between loads.
module tb_uprog_buffer;
  import proteus_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ld;
  logic [UPROG_WORDS*UOP_W-1:0] ld_prog, ref_prog;
  logic [UPC_W-1:0] rd_addr;
  uop_t rd_word;

  uprog_buffer dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int k = 0; k < 64; k++) begin
      rd_addr = 5'($urandom);
      #1;
      checks++;
      if (rd_word != ref_prog[int'(rd_addr)*32 +: 32]) begin
        failures++;
        $display("FAIL: word %0d = %h, expected %h", rd_addr, rd_word, ref_prog[int'(rd_addr)*32 +: 32]);
      end
    end
  endtask

  initial begin
    ld = 0; ld_prog = '0; rd_addr = '0; ref_prog = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check_all();
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      for (int k = 0; k < UPROG_WORDS; k++) ld_prog[k*32 +: 32] = $urandom;
      ld = 1'b1;
      @(negedge clk);
      ld = 1'b0;
      ref_prog = ld_prog;
      ld_prog = ~ld_prog;       // not loaded
      @(negedge clk);
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
