// pud_bank_model: behavioural model of one PuD-capable DRAM bank plus the
// memory-controller side that the Proteus top talks to. Not synthesizable
// logic, a testbench model only.
//
// Each of NSUB subarrays holds 1024 rows of CHUNKS*512 columns. Commands act
// on every subarray whose bit is set in sa_mask (SALP-MASA):
//   AAP  row_b <- row_a            (RowClone; writing a negated DCC wordline
//                                   stores the complement)
//   AP   rows a, b, c <- MAJ(a,b,c) (Ambit triple-row activation)
//   RBM  row_b of subarray i+1 <- row_a of subarray i (LISA-RISC)
// The C-group rows hold all-0 and all-1. Vertical writes store a 512-column
// chunk; carry reads return one. uProgram Memory is a table of PROGS
// uPrograms at MEM_BASE + 128*gidx, read a line per request with a fixed
// latency. Every command takes CMD_LAT cycles (cmd_ready low meanwhile).
module pud_bank_model
  import proteus_pkg::*;
#(
  parameter int unsigned CHUNKS   = 1,
  parameter int unsigned CMD_LAT  = 2,
  parameter logic [ADDR_W-1:0] MEM_BASE = 48'h0000_F000_0000
) (
  input  logic                  clk,
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  pud_cmd_t              cmd,
  input  logic                  vw_valid,
  output logic                  vw_ready,
  input  vwrite_t               vw,
  input  logic                  fc_req_valid,
  output logic                  fc_req_ready,
  input  logic [SUB_W-1:0]      fc_req_sub,
  input  logic [ROW_W-1:0]      fc_req_row,
  input  logic [CHUNK_W-1:0]    fc_req_chunk,
  output logic                  fc_resp_valid,
  output logic [LINE_BITS-1:0]  fc_resp_data,
  input  logic                  upm_req_valid,
  output logic                  upm_req_ready,
  input  logic [ADDR_W-1:0]     upm_req_addr,
  output logic                  upm_resp_valid,
  output logic [LINE_BITS-1:0]  upm_resp_data
);
  localparam int unsigned COLS = CHUNKS * LINE_BITS;
  typedef logic [COLS-1:0] row_t;

  row_t cells [NSUB][1024];
  logic [UOP_W*UPROG_WORDS-1:0] progs [4096];

  int unsigned n_aap_cmds, n_ap_cmds, n_rbm_cmds, max_par, n_vw;

  initial begin
    for (int s = 0; s < NSUB; s++)
      for (int r = 0; r < 1024; r++) cells[s][r] = '0;
    for (int s = 0; s < NSUB; s++) cells[s][fixed_row(6'(FIX_C1))] = '1;
    for (int g = 0; g < 4096; g++) progs[g] = '0;
    n_aap_cmds = 0; n_ap_cmds = 0; n_rbm_cmds = 0; max_par = 0; n_vw = 0;
  end

  // negated wordlines of the dual-contact rows
  function automatic bit is_neg(logic [ROW_W-1:0] r);
    return r == fixed_row(6'(FIX_DCC0N)) || r == fixed_row(6'(FIX_DCC1N));
  endfunction
  function automatic logic [ROW_W-1:0] phys(logic [ROW_W-1:0] r);
    return is_neg(r) ? r - 1'b1 : r;
  endfunction
  function automatic row_t rd(int s, logic [ROW_W-1:0] r);
    return is_neg(r) ? ~cells[s][phys(r)] : cells[s][phys(r)];
  endfunction
  task automatic wr(int s, logic [ROW_W-1:0] r, row_t v);
    if (r == fixed_row(6'(FIX_C0)) || r == fixed_row(6'(FIX_C1))) return;
    cells[s][phys(r)] = is_neg(r) ? ~v : v;
  endtask

  // PuD commands
  int busy_cnt = 0;
  assign cmd_ready = (busy_cnt == 0);
  always @(posedge clk) begin
    if (busy_cnt > 0) busy_cnt <= busy_cnt - 1;
    if (cmd_valid && cmd_ready) begin
      int par;
      par = $countones(cmd.sa_mask);
      if (par > max_par) max_par = par;
      for (int s = 0; s < NSUB; s++) if (cmd.sa_mask[s]) begin
        unique case (cmd.kind)
          CMD_AAP: wr(s, cmd.row_b, rd(s, cmd.row_a));
          CMD_AP: begin
            row_t a, b, c, m;
            a = rd(s, cmd.row_a); b = rd(s, cmd.row_b); c = rd(s, cmd.row_c);
            m = (a & b) | (a & c) | (b & c);
            wr(s, cmd.row_a, m); wr(s, cmd.row_b, m); wr(s, cmd.row_c, m);
          end
          default: if (s + 1 < NSUB) wr(s + 1, cmd.row_b, rd(s, cmd.row_a));
        endcase
      end
      unique case (cmd.kind)
        CMD_AAP: n_aap_cmds++;
        CMD_AP:  n_ap_cmds++;
        default: n_rbm_cmds++;
      endcase
      busy_cnt <= CMD_LAT;
    end
  end

  // vertical writes
  assign vw_ready = 1'b1;
  always @(posedge clk) begin
    if (vw_valid && int'(vw.chunk) < int'(CHUNKS)) begin
      cells[vw.sub][vw.row][int'(vw.chunk) * LINE_BITS +: LINE_BITS] = vw.data;
      n_vw++;
    end
  end

  // carry-row reads: one-cycle latency
  assign fc_req_ready = 1'b1;
  always @(posedge clk) begin
    fc_resp_valid <= fc_req_valid;
    if (fc_req_valid)
      fc_resp_data <= (int'(fc_req_chunk) < int'(CHUNKS)) ?
                      cells[fc_req_sub][fc_req_row][int'(fc_req_chunk) * LINE_BITS +: LINE_BITS] : '0;
  end

  // uProgram Memory: three-cycle latency
  assign upm_req_ready = 1'b1;
  logic [2:0]           pv;
  logic [LINE_BITS-1:0] pd [3];
  initial pv = '0;
  always @(posedge clk) begin
    logic [ADDR_W-1:0] off;
    off = upm_req_addr - MEM_BASE;
    pv    <= {pv[1:0], upm_req_valid};
    pd[0] <= progs[off[18:7]][int'(off[6]) * LINE_BITS +: LINE_BITS];
    pd[1] <= pd[0];
    pd[2] <= pd[1];
  end
  assign upm_resp_valid = pv[2];
  assign upm_resp_data  = pd[2];

endmodule
