// fetch_unit: carry re-evaluation for vector-to-scalar reductions.
//
// A PuD reduction is a tree of additions; its result precision cannot be
// predicted from the input maxima without over-provisioning, so after every
// tree level the uProgram Select Unit asks this unit whether the level
// overflowed. The unit generates the loads that read the row holding the
// level's carry-out bits, one 512-column chunk at a time, ORs every returned
// chunk together and reports overflow if any carry bit is 1; the select unit
// then adds one bit of precision for the next level.
//
// Interface: start with the subarray and row of the carry-out bits and the
// number of chunks to read (1..128); rd_req_* issues one load per chunk,
// rd_resp_* returns the data in order; done pulses with overflow.
// Timing: loads are issued back to back as rd_req_ready allows; done follows
// the last response by one cycle.
//
// From the paper (Sec. 5.4): the load generation, the check for any carry bit
// at 1 and its purpose. The chunked row read and the interface are own choices.
module fetch_unit
  import proteus_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [SUB_W-1:0]      sub,
  input  logic [ROW_W-1:0]      row,
  input  logic [CHUNK_W:0]      nchunks,
  output logic                  busy,
  output logic                  rd_req_valid,
  input  logic                  rd_req_ready,
  output logic [SUB_W-1:0]      rd_req_sub,
  output logic [ROW_W-1:0]      rd_req_row,
  output logic [CHUNK_W-1:0]    rd_req_chunk,
  input  logic                  rd_resp_valid,
  input  logic [LINE_BITS-1:0]  rd_resp_data,
  output logic                  done,
  output logic                  overflow
);
  logic [SUB_W-1:0]   sub_q;
  logic [ROW_W-1:0]   row_q;
  logic [CHUNK_W:0]   n_q, nreq, nresp;
  logic               any;

  assign rd_req_valid = busy && (nreq < n_q);
  assign rd_req_sub   = sub_q;
  assign rd_req_row   = row_q;
  assign rd_req_chunk = CHUNK_W'(nreq);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; sub_q <= '0; row_q <= '0; n_q <= '0;
      nreq <= '0; nresp <= '0; any <= 1'b0; done <= 1'b0; overflow <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          sub_q <= sub;
          row_q <= row;
          n_q   <= (nchunks == 0) ? (CHUNK_W+1)'(1) : nchunks;
          nreq  <= '0;
          nresp <= '0;
          any   <= 1'b0;
        end
      end else begin
        if (rd_req_valid && rd_req_ready) nreq <= nreq + 1'b1;
        if (rd_resp_valid) begin
          nresp <= nresp + 1'b1;
          if (|rd_resp_data) any <= 1'b1;
          if (nresp + 1'b1 == n_q) begin
            busy     <= 1'b0;
            done     <= 1'b1;
            overflow <= any || (|rd_resp_data);
          end
        end
      end
    end
  end

endmodule
