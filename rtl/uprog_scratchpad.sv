// uprog_scratchpad: the uProgram Scratchpad of the Proteus Control Unit.
//
// Holds recently used uPrograms close to the control unit so that a bbop does
// not have to read its uProgram from the reserved DRAM region (the uProgram
// Memory) every time. It has SLOTS slots of 128 B; slot s is used by
// operation s (direct mapped on the operation part of the global index) and
// tagged with the per-operation index, so every operation keeps its last used
// implementation on chip. On a miss the uProgram is read from uProgram Memory
// at MEM_BASE + gidx*128 as LINES_PER_PROG cache-line reads, written into the
// slot, and then returned.
//
// Interface: req_valid/req_ready with the 12-bit global index; resp_valid
// pulses with the whole uProgram (1024 bits, word 0 in the low bits).
// mem_req_* / mem_resp_* read uProgram Memory one line at a time; responses
// come back in request order.
// Timing: a hit answers one cycle after the request; a miss adds the two
// memory reads. hits/misses count the outcomes.
//
// From the paper: the 2 kB size (16 uPrograms of 128 B), its indexing by the
// global uProgram index, and the fetch from uProgram Memory on a miss. The
// direct-mapped organisation, tag, base address and memory interface are own
// choices.
module uprog_scratchpad
  import proteus_pkg::*;
#(
  parameter int unsigned SLOTS          = 16,
  parameter int unsigned PROG_BITS      = UOP_W * UPROG_WORDS,
  parameter logic [ADDR_W-1:0] MEM_BASE = 48'h0000_F000_0000
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  req_valid,
  output logic                  req_ready,
  input  logic [GIDX_W-1:0]     req_gidx,
  output logic                  resp_valid,
  output logic [PROG_BITS-1:0]  resp_prog,
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic [ADDR_W-1:0]     mem_req_addr,
  input  logic                  mem_resp_valid,
  input  logic [LINE_BITS-1:0]  mem_resp_data,
  output logic [31:0]           hits,
  output logic [31:0]           misses
);
  localparam int unsigned LINES_PER_PROG = PROG_BITS / LINE_BITS;
  localparam int unsigned SW = $clog2(SLOTS);
  localparam int unsigned LW = (LINES_PER_PROG > 1) ? $clog2(LINES_PER_PROG) : 1;

  logic [PROG_BITS-1:0] mem [SLOTS];
  logic [SLOTS-1:0]     tag_v;
  logic [IDX_W-1:0]     tag [SLOTS];

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT, S_DONE} state_e;
  state_e state;
  logic [GIDX_W-1:0]    gidx_q;
  logic [LW:0]          nreq, nresp;
  logic [PROG_BITS-1:0] fill;

  logic [SW-1:0] slot_in, slot_q;
  logic          hit_in;
  always_comb begin
    slot_in = SW'(req_gidx[GIDX_W-1:IDX_W]);
    hit_in  = tag_v[slot_in] && tag[slot_in] == req_gidx[IDX_W-1:0];
    slot_q  = SW'(gidx_q[GIDX_W-1:IDX_W]);
  end

  assign req_ready     = (state == S_IDLE);
  assign mem_req_valid = (state == S_REQ) || (state == S_WAIT && nreq < (LW+1)'(LINES_PER_PROG));
  assign mem_req_addr  = MEM_BASE + ADDR_W'({gidx_q, 7'b0}) + ADDR_W'({nreq, 6'b0});

  always_ff @(posedge clk) begin
    if (state == S_DONE) mem[slot_q] <= fill;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      tag_v      <= '0;
      for (int s = 0; s < SLOTS; s++) tag[s] <= '0;
      gidx_q     <= '0;
      nreq       <= '0;
      nresp      <= '0;
      fill       <= '0;
      resp_valid <= 1'b0;
      resp_prog  <= '0;
      hits       <= '0;
      misses     <= '0;
    end else begin
      resp_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid) begin
          gidx_q <= req_gidx;
          if (hit_in) begin
            resp_valid <= 1'b1;
            resp_prog  <= mem[slot_in];
            hits       <= hits + 1;
          end else begin
            misses <= misses + 1;
            nreq   <= '0;
            nresp  <= '0;
            state  <= S_REQ;
          end
        end
        S_REQ, S_WAIT: begin
          if (mem_req_valid && mem_req_ready) begin
            nreq  <= nreq + 1'b1;
            state <= S_WAIT;
          end
          if (mem_resp_valid) begin
            fill[int'(nresp) * LINE_BITS +: LINE_BITS] <= mem_resp_data;
            nresp <= nresp + 1'b1;
            if (nresp == (LW+1)'(LINES_PER_PROG - 1)) state <= S_DONE;
          end
        end
        S_DONE: begin
          tag_v[slot_q] <= 1'b1;
          tag[slot_q]   <= gidx_q[IDX_W-1:0];
          resp_valid    <= 1'b1;
          resp_prog     <= fill;
          state         <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
