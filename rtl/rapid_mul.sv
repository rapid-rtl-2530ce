// rapid_mul: RAPID approximate unsigned multiplier, N x N -> 2N bits, with
// 1 to 4 pipeline stages.
//
// Mitchell's method replaces the product by a sum of logarithms:
// log2(A*B) ~ (k1 + x1) + (k2 + x2), where k is the leading-one position and x
// the bits below it read as a fraction. RAPID lowers Mitchell's error by adding
// an error-reduction coefficient to the two fractions in the same (ternary)
// addition; the coefficient is selected from the four MSBs of both fractions
// only. The datapath, in order:
//   1. approximate log of both operands (rapid_alog) and coefficient selection
//      (rapid_coef_mul), in parallel;
//   2. ternary addition x1 + x2 + coefficient, built from 4-bit slices
//      (rapid_tadd4) chained through a 2-bit carry;
//   3. integer-part addition k1 + k2 and the anti-log barrel shifter
//      (rapid_antilog_mul).
// The chain is written as a row of slots (rapid_pipe_reg), and STAGES picks
// which slots hold a register, reproducing the 2-, 3- and 4-stage cuts of the
// paper for the 16-bit unit: P2 cuts the ternary addition after bit 11; P3
// after bit 3 and after the full addition; P4 after coefficient selection,
// after bit 7 and after the full addition. STAGES = 1 is the non-pipelined
// unit. For other widths the cut positions are scaled to the number of slices.
//
// Interface: in_valid/a/b are sampled on every rising clk edge (one operation
// per cycle, no back-pressure); out_valid/p follow exactly STAGES cycles later
// (STAGES-1 internal registers plus an output register, which is this
// design's choice). rst_n is an asynchronous active-low reset of the valid
// bits only. A zero operand gives 0.
//
// The algorithm, coefficient values, slice structure and cut positions follow
// the paper. The coefficient alignment, the region boundaries (read from the
// paper's plot), the valid handshake, the output register and the
// truncating/saturating output are this design's choices.
//
// Lint notes: the region output of the coefficient selector is only for
// observation and is left unused here, and the last slot still carries the
// operand fractions and coefficient, which nothing reads after the final
// slice; synthesis removes both.
module rapid_mul
  import rapid_pkg::*;
#(
  parameter int unsigned N      = 16,
  parameter int unsigned NCOEF  = MUL_NCOEF_DEFAULT,
  parameter int unsigned STAGES = 4,
  localparam int unsigned KW    = $clog2(N),
  localparam int unsigned FW    = N - 1,
  localparam int unsigned SEGS  = N / 4,          // 4-bit slices of the FW+1 bit word
  localparam int unsigned W     = 4 * SEGS,
  localparam int unsigned NSLOT = 2 + SEGS
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic           out_valid,
  output logic [2*N-1:0] p
);
  // Everything the rest of the datapath still needs travels in one word.
  typedef struct packed {
    logic          zero;
    logic [KW-1:0] ka;
    logic [KW-1:0] kb;
    logic [W-1:0]  fa;      // x1
    logic [W-1:0]  fb;      // x2
    logic [W-1:0]  fc;      // coefficient
    logic [W-1:0]  sum;     // slices done so far
    logic [1:0]    carry;   // carry into the next slice
  } slot_t;
  localparam int unsigned SLW = $bits(slot_t);

  // ---- step 1: approximate logs and coefficient selection
  logic [KW-1:0] ka, kb;
  logic [FW-1:0] xa, xb;
  logic          za, zb;
  logic [FW:0]   coef;
  logic [3:0]    region;

  rapid_alog #(.N(N)) u_log_a (.a(a), .k(ka), .x(xa), .zero(za));
  rapid_alog #(.N(N)) u_log_b (.a(b), .k(kb), .x(xb), .zero(zb));
  rapid_coef_mul #(.NCOEF(NCOEF), .FW(FW)) u_coef (
    .xa4(xa[FW-1 -: 4]), .xb4(xb[FW-1 -: 4]), .coef(coef), .region(region));

  slot_t first;

  always_comb begin : p_first
    first       = '0;
    first.zero  = za | zb;
    first.ka    = ka;
    first.kb    = kb;
    first.fa    = W'(xa);
    first.fb    = W'(xb);
    first.fc    = W'(coef);
  end

  // One slot per step. A slot's input is the previous slot's output after
  // that step's logic; pipe_cut() decides whether the slot is registered.
  for (genvar i = 0; i < NSLOT; i++) begin : g_slot
    slot_t sd, sq;
    logic  vi, vo;
    if (i == 0) begin : g_first
      always_comb begin
        sd  = first;
        vi = in_valid;
      end
    end else begin : g_step
      always_comb vi = g_slot[i-1].vo;
      if (i == 1) begin : g_tc
        // two's-complement position of the divider: nothing to do here
        always_comb sd = g_slot[i-1].sq;
      end else begin : g_slice
        // ternary addition, slice i-2
        logic [3:0] s4;
        logic [1:0] c2;
        rapid_tadd4 u_tadd (
          .a(g_slot[i-1].sq.fa[4*(i-2) +: 4]), .b(g_slot[i-1].sq.fb[4*(i-2) +: 4]),
          .c(g_slot[i-1].sq.fc[4*(i-2) +: 4]), .cin(g_slot[i-1].sq.carry),
          .s(s4), .cout(c2));
        always_comb begin
          sd                      = g_slot[i-1].sq;
          sd.sum[4*(i-2) +: 4]    = s4;
          sd.carry                = c2;
        end
      end
    end
    rapid_pipe_reg #(.W(SLW), .EN(pipe_cut(STAGES, 1'b0, i, SEGS))) u_slot (
      .clk(clk), .rst_n(rst_n), .vi(vi), .d(sd), .vo(vo), .q(sq));
  end

  // ---- step 3: integer parts and anti-log, then the output register
  logic [2*N-1:0] p_d;
  rapid_antilog_mul #(.N(N)) u_antilog (
    .ka(g_slot[NSLOT-1].sq.ka), .kb(g_slot[NSLOT-1].sq.kb),
    .s({g_slot[NSLOT-1].sq.carry, g_slot[NSLOT-1].sq.sum}), .zero(g_slot[NSLOT-1].sq.zero), .p(p_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= g_slot[NSLOT-1].vo;
  end
  always_ff @(posedge clk) p <= p_d;

  initial begin
    assert (STAGES >= 1 && STAGES <= 4) else $error("rapid_mul: STAGES must be 1..4");
    assert (N % 4 == 0 && N >= 8) else $error("rapid_mul: N must be a multiple of 4, at least 8");
  end
endmodule
