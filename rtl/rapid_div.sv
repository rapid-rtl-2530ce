// rapid_div: RAPID approximate unsigned divider, 2N-bit dividend by N-bit
// divisor, with 1 to 4 pipeline stages.
//
// Mitchell's method turns the quotient into a difference of logarithms:
// log2(A/B) ~ (k1 + x1) - (k2 + x2). RAPID subtracts, in the same ternary
// addition, an error-reduction coefficient selected from the four MSBs of the
// two fractions, which removes most of Mitchell's over-estimate. The
// datapath, in order:
//   1. approximate log of dividend and divisor (rapid_alog) and coefficient
//      selection (rapid_coef_mul's divider twin, rapid_coef_div);
//   2. two's complement of the subtrahends: the divisor fraction (left-aligned
//      to the dividend's 2N-1 fraction bits) and the coefficient are inverted
//      and a carry of 2 enters the first slice;
//   3. ternary addition x1 + ~x2 + ~coef + 2 in 4-bit slices (rapid_tadd4);
//   4. integer-part subtraction k1 - k2 and the anti-log barrel shifter
//      (rapid_antilog_div).
// STAGES picks the pipeline cuts of the paper's 16/8 divider: P2 cuts the
// ternary addition after bit 11; P3 after the two's complement and after the
// full addition; P4 after coefficient selection, after bit 3 (which shares a
// stage with the two's complement) and after the full addition. STAGES = 1 is
// the non-pipelined unit.
//
// Interface: in_valid/a/b are sampled on every rising clk edge (one operation
// per cycle); out_valid/q follow STAGES cycles later. q has N integer bits and
// QFRAC fraction bits (QFRAC = 0 gives an integer quotient). A zero divisor or
// a dividend >= 2^N * divisor gives all ones; a zero dividend gives 0.
// rst_n is an asynchronous active-low reset of the valid bits only.
//
// The algorithm, coefficient values, slice structure and cut positions follow
// the paper. The coefficient alignment, the region boundaries (read from the
// paper's plots), the quotient format, the handshake and the output register
// are this design's choices.
//
// Lint notes: the region output of the coefficient selector is only for
// observation and is left unused here, and the last slot still carries the
// operand fractions and coefficient, which nothing reads after the final
// slice; synthesis removes both.
module rapid_div
  import rapid_pkg::*;
#(
  parameter int unsigned N      = 8,
  parameter int unsigned NCOEF  = DIV_NCOEF_DEFAULT,
  parameter int unsigned STAGES = 4,
  parameter int unsigned QFRAC  = 0,
  localparam int unsigned KAW   = $clog2(2 * N),
  localparam int unsigned KBW   = $clog2(N),
  localparam int unsigned FW    = 2 * N - 1,
  localparam int unsigned FWB   = N - 1,
  localparam int unsigned SEGS  = (2 * N) / 4,
  localparam int unsigned W     = 4 * SEGS,
  localparam int unsigned NSLOT = 2 + SEGS,
  localparam int unsigned QW    = N + QFRAC
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [2*N-1:0]  a,        // dividend
  input  logic [N-1:0]    b,        // divisor
  output logic            out_valid,
  output logic [QW-1:0]   q
);
  typedef struct packed {
    logic           za;
    logic           zb;
    logic [KAW-1:0] ka;
    logic [KBW-1:0] kb;
    logic [W-1:0]   fa;     // x1
    logic [W-1:0]   fb;     // x2, later ~x2
    logic [W-1:0]   fc;     // coefficient, later ~coefficient
    logic [W-1:0]   sum;
    logic [1:0]     carry;
  } slot_t;
  localparam int unsigned SLW = $bits(slot_t);

  // ---- step 1: approximate logs and coefficient selection
  logic [KAW-1:0] ka;
  logic [KBW-1:0] kb;
  logic [FW-1:0]  xa;
  logic [FWB-1:0] xb;
  logic [FW-1:0]  xb_al;  // divisor fraction aligned to the dividend fraction
  logic           za, zb;
  logic [FW:0]    coef;
  logic [3:0]     region;

  rapid_alog #(.N(2 * N)) u_log_a (.a(a), .k(ka), .x(xa), .zero(za));
  rapid_alog #(.N(N))     u_log_b (.a(b), .k(kb), .x(xb), .zero(zb));
  always_comb xb_al = {xb, {(FW - FWB){1'b0}}};
  rapid_coef_div #(.NCOEF(NCOEF), .FW(FW)) u_coef (
    .xa4(xa[FW-1 -: 4]), .xb4(xb_al[FW-1 -: 4]), .coef(coef), .region(region));

  slot_t first;

  always_comb begin : p_first
    first    = '0;
    first.za = za;
    first.zb = zb;
    first.ka = ka;
    first.kb = kb;
    first.fa = W'(xa);
    first.fb = W'(xb_al);
    first.fc = W'(coef);
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
        // two's complement of both subtrahends
        always_comb begin
          sd       = g_slot[i-1].sq;
          sd.fb    = ~g_slot[i-1].sq.fb;
          sd.fc    = ~g_slot[i-1].sq.fc;
          sd.carry = 2'd2;
        end
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
    rapid_pipe_reg #(.W(SLW), .EN(pipe_cut(STAGES, 1'b1, i, SEGS))) u_slot (
      .clk(clk), .rst_n(rst_n), .vi(vi), .d(sd), .vo(vo), .q(sq));
  end

  // ---- step 4: integer parts and anti-log, then the output register
  logic [QW-1:0] q_d;
  rapid_antilog_div #(.N(N), .QFRAC(QFRAC)) u_antilog (
    .ka(g_slot[NSLOT-1].sq.ka), .kb(g_slot[NSLOT-1].sq.kb),
    .s({g_slot[NSLOT-1].sq.carry, g_slot[NSLOT-1].sq.sum}),
    .za(g_slot[NSLOT-1].sq.za), .zb(g_slot[NSLOT-1].sq.zb), .q(q_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= g_slot[NSLOT-1].vo;
  end
  always_ff @(posedge clk) q <= q_d;

  initial begin
    assert (STAGES >= 1 && STAGES <= 4) else $error("rapid_div: STAGES must be 1..4");
    assert (N % 4 == 0) else $error("rapid_div: N must be a multiple of 4");
  end
endmodule
