// bit_precision_calculator: the n-bit scalar ALU of the uProgram Select Unit.
//
// Given a bbop's operation and the largest values its input objects hold, it
// predicts the largest value the output can take and from it the bit-precision
// the uProgram must run at. For a chain of vector-to-vector operations the
// predicted output maximum is written back to the output object's tracker
// entry, so the next operation in the chain starts from it. Rules (a, b are
// the input maxima, bits(v) the number of bits of v, at least 1):
//   ADD            out = a + b           bp = bits(out)
//   MUL            out = a * b           bp = bits(out)
//   SUB            out = max(a, b)       bp = bits(out) + 1 (sign of a - b)
//   DIV, COPY, RELU out = a              bp = bits(a)
//   MAX, MIN, IFELSE out = max(a, b)     bp = bits(out)
//   EQ, GT         out = 1               bp = bits(max(a, b))
//   BITCNT         out = bits(a)         bp = bits(a)
//   AND, OR, XOR   out = 2^bp - 1        bp = bits(max(a, b))
//   REDSUM         no output prediction  bp = bits(a) (raised later on overflow)
// The result is clamped to the user's bit-precision (the container size). With
// dynamic bit-precision disabled the user's bit-precision is used as is and no
// output maximum is written.
//
// Interface: in_valid with op, a, b, user_bp, dyn_en; out_valid one cycle later
// with bp, out_max and upd_dst (write out_max into the output's entry).
//
// From the paper (Sec. 5.4): ADD and MUL, including its worked example (maxima
// 3, 6, 2 give 4 bits for the addition and 5 bits for the multiplication), the
// write-back of output maxima, and the disabled mode. The rules for the other
// operations, the sign bit for SUB and the clamping are own choices.
module bit_precision_calculator
  import proteus_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  bbop_op_e             in_op,
  input  logic [MAXV_W-1:0]    in_a,
  input  logic [MAXV_W-1:0]    in_b,
  input  logic [BP_W-1:0]      in_user_bp,
  input  logic                 in_dyn_en,
  output logic                 out_valid,
  output logic [BP_W-1:0]      out_bp,
  output logic [MAXV_W-1:0]    out_max,
  output logic                 out_upd_dst
);
  logic [MAXV_W:0]     sum;
  logic [2*MAXV_W-1:0] prod;
  logic [MAXV_W-1:0]   mx, omax, sat_sum, sat_prod;
  logic [BP_W-1:0]     bp, ubp;
  logic                upd;

  always_comb begin
    sum      = {1'b0, in_a} + {1'b0, in_b};
    prod     = in_a * in_b;
    sat_sum  = sum[MAXV_W] ? '1 : sum[MAXV_W-1:0];
    sat_prod = (prod[2*MAXV_W-1:MAXV_W] != '0) ? '1 : prod[MAXV_W-1:0];
    mx       = (in_a > in_b) ? in_a : in_b;
    ubp      = (in_user_bp == 0) ? BP_W'(1) : ((in_user_bp > 7'd64) ? 7'd64 : in_user_bp);
    upd      = 1'b1;
    unique case (in_op)
      OP_ADD:                    begin omax = sat_sum;  bp = bits_needed(omax); end
      OP_MUL:                    begin omax = sat_prod; bp = bits_needed(omax); end
      OP_SUB:                    begin omax = mx;       bp = bits_needed(mx) + 1'b1; end
      OP_DIV, OP_COPY, OP_RELU:  begin omax = in_a;     bp = bits_needed(in_a); end
      OP_MAX, OP_MIN, OP_IFELSE: begin omax = mx;       bp = bits_needed(mx); end
      OP_EQ, OP_GT:              begin omax = 1;        bp = bits_needed(mx); end
      OP_BITCNT:                 begin bp = bits_needed(in_a); omax = MAXV_W'(bp); end
      OP_AND, OP_OR, OP_XOR:     begin
        bp   = bits_needed(mx);
        omax = (bp >= 7'd64) ? '1 : ((MAXV_W'(1) << bp) - 1'b1);
      end
      default:                   begin omax = '0; bp = bits_needed(in_a); upd = 1'b0; end
    endcase
    if (bp > ubp) bp = ubp;
    if (!in_dyn_en) begin
      bp  = ubp;
      upd = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_bp      <= BP_W'(1);
      out_max     <= '0;
      out_upd_dst <= 1'b0;
    end else begin
      out_valid   <= in_valid;
      out_bp      <= bp;
      out_max     <= omax;
      out_upd_dst <= upd && in_valid;
    end
  end

endmodule
