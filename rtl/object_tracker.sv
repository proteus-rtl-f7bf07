// object_tracker: the Object Tracker of the Data Transposition Unit.
//
// A small fully associative table that remembers every PuD memory object the
// host has registered with bbop_trsp_init: its base address, size, declared
// bit-precision and, added by Proteus, the largest value seen so far in it.
// The Dynamic Bit-Precision Engine raises the maximum as evicted lines are
// scanned; the uProgram Select Unit reads the maxima of a bbop's inputs and
// writes the predicted maximum of its output; a host read-back of an object
// clears its maximum for the next round.
//
// Interface
//   reg_*   register an object. An entry with the same base address is reused,
//           else the first free entry, else a round-robin victim. Never stalls.
//   ev_*    range lookup for an evicted line address (combinational):
//           hit when base <= addr < base + size*W/8, W the element's storage
//           width (bp rounded up to a power of two, see cont_w).
//   cu_*    exact base-address lookup for the control unit (combinational).
//   eng_upd_*  write a new maximum from the engine (entry index).
//   cu_upd_*   write an output maximum from the control unit (entry index).
//   clr_*   clear the maximum of the object at this base address.
// Timing: lookups are combinational; every write takes effect at the next
// clock edge. If two writes name the same entry in one cycle, registration
// wins, then the engine, then the control unit, then the clear.
//
// From the paper: the fields (address, size, bit-precision, maximum value),
// the fully associative organisation and the 8 kB / 128-bit-line sizing, from
// which the default of 512 entries follows. Own choices: the stored row field
// (where the object's vertical layout starts in DRAM), the stored end address,
// the replacement policy, and an entry wider than 128 bits.
module object_tracker
  import proteus_pkg::*;
#(
  parameter int unsigned ENTRIES = 512
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // registration
  input  logic                       reg_valid,
  input  trsp_init_t                 reg_info,
  // evicted-line range lookup
  input  logic [ADDR_W-1:0]          ev_addr,
  output logic                       ev_hit,
  output logic [$clog2(ENTRIES)-1:0] ev_idx,
  output trsp_init_t                 ev_info,
  output logic [MAXV_W-1:0]          ev_max,
  // control-unit exact lookup
  input  logic [ADDR_W-1:0]          cu_addr,
  output logic                       cu_hit,
  output logic [$clog2(ENTRIES)-1:0] cu_idx,
  output trsp_init_t                 cu_info,
  output logic [MAXV_W-1:0]          cu_max,
  // maximum-value writes
  input  logic                       eng_upd_valid,
  input  logic [$clog2(ENTRIES)-1:0] eng_upd_idx,
  input  logic [MAXV_W-1:0]          eng_upd_max,
  input  logic                       cu_upd_valid,
  input  logic [$clog2(ENTRIES)-1:0] cu_upd_idx,
  input  logic [MAXV_W-1:0]          cu_upd_max,
  input  logic                       clr_valid,
  input  logic [ADDR_W-1:0]          clr_addr
);
  localparam int unsigned IW = $clog2(ENTRIES);

  // base and end addresses are flops (compared by every lookup); the full
  // entry and the maximum are memories read by entry index
  logic [ENTRIES-1:0]     vld;
  logic [ADDR_W-1:0]      base  [ENTRIES];
  logic [ADDR_W-1:0]      eaddr [ENTRIES];
  trsp_init_t             info_m [ENTRIES];
  logic [MAXV_W-1:0]      max_m  [ENTRIES];
  logic [IW-1:0]          rr_ptr;

  // ------------------------------------------------------------ matches
  logic [ENTRIES-1:0] ev_m, cu_m, same_m, clr_m;
  always_comb begin
    for (int i = 0; i < ENTRIES; i++) begin
      ev_m[i]   = vld[i] && ev_addr >= base[i] && ev_addr < eaddr[i];
      cu_m[i]   = vld[i] && cu_addr == base[i];
      same_m[i] = vld[i] && reg_info.addr == base[i];
      clr_m[i]  = vld[i] && clr_addr == base[i];
    end
  end

  // lowest matching entry
  function automatic logic [IW-1:0] first(input logic [ENTRIES-1:0] m);
    logic [IW-1:0] k;
    k = '0;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (m[i]) k = IW'(i);
    return k;
  endfunction

  logic [IW-1:0] clr_idx;
  always_comb begin
    ev_hit  = |ev_m;
    ev_idx  = first(ev_m);
    ev_info = info_m[ev_idx];
    ev_max  = max_m[ev_idx];
    cu_hit  = |cu_m;
    cu_idx  = first(cu_m);
    cu_info = info_m[cu_idx];
    cu_max  = max_m[cu_idx];
    clr_idx = first(clr_m);
  end

  // ------------------------------------------------------------ allocation
  logic          same_hit, free_hit;
  logic [IW-1:0] alloc_idx;
  always_comb begin
    same_hit  = |same_m;
    free_hit  = ~&vld;
    alloc_idx = same_hit ? first(same_m) : (free_hit ? first(~vld) : rr_ptr);
  end

  logic [ADDR_W-1:0] reg_end;
  logic [SIZE_W+BP_W-1:0] reg_bits;
  always_comb begin
    reg_bits = reg_info.size * cont_w(reg_info.bp);
    reg_end  = reg_info.addr + ADDR_W'((reg_bits + 7) >> 3);
  end

  // ------------------------------------------------------------ writes
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld    <= '0;
      rr_ptr <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        base[i]  <= '0;
        eaddr[i] <= '0;
      end
    end else begin
      if (reg_valid && !same_hit && !free_hit)
        rr_ptr <= rr_ptr + 1'b1;
      if (reg_valid) begin
        vld[alloc_idx]   <= 1'b1;
        base[alloc_idx]  <= reg_info.addr;
        eaddr[alloc_idx] <= reg_end;
      end
    end
  end

  // memories: a later write to the same entry wins, giving the priority
  // registration > engine > control unit > clear
  always_ff @(posedge clk) begin
    if (clr_valid && (|clr_m)) max_m[clr_idx]  <= '0;
    if (cu_upd_valid)          max_m[cu_upd_idx]  <= cu_upd_max;
    if (eng_upd_valid)         max_m[eng_upd_idx] <= eng_upd_max;
    if (reg_valid) begin
      max_m[alloc_idx]  <= '0;
      info_m[alloc_idx] <= reg_info;
    end
  end

endmodule
