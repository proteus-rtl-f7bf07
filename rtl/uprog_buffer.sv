// uprog_buffer: the uProgram Buffer of the uProgram Select Unit.
//
// Holds the uProgram that is currently being dispatched, so that the
// scratchpad can serve the next bbop while this one runs. A whole 128 B
// uProgram (32 words of 32 bits, word 0 in the low bits) is written in one
// cycle; the dispatcher reads one word per cycle at its program counter.
//
// Interface: ld with ld_prog writes all words; rd_addr selects the word on
// rd_word (combinational read). Contents are cleared to DONE words at reset,
// so an unloaded buffer dispatches nothing.
//
// From the paper: the buffer's existence and role (Sec. 4.1, 5.4). Width,
// depth (from the 128 B uProgram size) and ports are own choices.
module uprog_buffer
  import proteus_pkg::*;
#(
  parameter int unsigned WORDS = UPROG_WORDS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     ld,
  input  logic [WORDS*UOP_W-1:0]   ld_prog,
  input  logic [$clog2(WORDS)-1:0] rd_addr,
  output uop_t                     rd_word
);
  logic [UOP_W-1:0] mem [WORDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < WORDS; w++) mem[w] <= '0;
    end else if (ld) begin
      for (int w = 0; w < WORDS; w++) mem[w] <= ld_prog[w*UOP_W +: UOP_W];
    end
  end

  assign rd_word = uop_t'(mem[rd_addr]);

endmodule
