// apfp_add -- fully pipelined arbitrary-precision floating-point adder with
// the results of MPFR's mpfr_add in round-toward-zero mode (MPFR_RNDZ).
//
// Format as in apfp_pkg: {sign, 63-bit exponent, M-bit mantissa}, value
// 0.mantissa * 2^exponent, zero = all-zero mantissa.
// Pipeline (latency apfp_pkg::fadd_latency(BITS, ADD_BASE_BITS) cycles, one
// addition per cycle, no stall):
//   1  order: x = operand of larger magnitude, y = the other; d = ex - ey.
//   2  align: shift y right by d into an M+2-bit field (two guard bits) and
//      OR every bit shifted past the guard bits into a sticky bit.
//   3  add (pipelined_add, ADD_BASE_BITS per stage): equal signs add,
//      different signs subtract. A subtraction also subtracts the sticky bit,
//      which makes the result the exact difference rounded toward zero on the
//      guard grid (with d >= 2 at most one leading bit cancels, with d <= 1
//      nothing was shifted out, so two guard bits suffice).
//   4  count the leading zeros of the difference.
//   5  normalise: shift right by one on a carry, left by the leading-zero
//      count otherwise; adjust the exponent; drop the guard bits (truncate).
// The result carries the sign of x; an exact zero is +0 (-0 only when both
// operands are -0). Aligning by the exponent difference, subtracting on
// differing signs and the leading-zero count with dynamic left shift are the
// paper's; guard/sticky handling, the stage split and zero handling are this
// design's own. Exponent overflow and underflow are not detected.
module apfp_add #(
  parameter int unsigned BITS          = apfp_pkg::APFP_BITS,
  parameter int unsigned ADD_BASE_BITS = apfp_pkg::ADD_BASE_BITS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [BITS-1:0] a,
  input  logic [BITS-1:0] b,
  output logic            out_valid,
  output logic [BITS-1:0] out
);
  localparam int unsigned E  = apfp_pkg::EXP_BITS;
  localparam int unsigned M  = apfp_pkg::mant_bits(BITS);
  localparam int unsigned G  = M + 2;   // mantissa plus two guard bits
  localparam int unsigned WS = G + 1;   // room for the carry
  localparam int unsigned LA = apfp_pkg::add_latency(WS, ADD_BASE_BITS);
  localparam int unsigned LZW = $clog2(G + 1);

  typedef struct packed {
    logic         sgn;
    logic [E-1:0] exp;
    logic [M-1:0] mant;
  } apfp_t;

  apfp_t ia, ib;
  assign ia = a;
  assign ib = b;

  // ---- Stage 1: order by magnitude -----------------------------------------
  logic a_zero, b_zero, a_ge_b;
  assign a_zero = (ia.mant == '0);
  assign b_zero = (ib.mant == '0);
  always_comb begin
    if (b_zero)                        a_ge_b = 1'b1;
    else if (a_zero)                   a_ge_b = 1'b0;
    else if ($signed(ia.exp) != $signed(ib.exp)) a_ge_b = $signed(ia.exp) > $signed(ib.exp);
    else                               a_ge_b = ia.mant >= ib.mant;
  end

  apfp_t        x1, y1;
  logic [E:0]   d1;        // exponent difference, E+1 bits, non-negative
  logic         y0_1;      // y is zero
  logic         both_neg0;
  always_ff @(posedge clk) begin
    x1        <= a_ge_b ? ia : ib;
    y1        <= a_ge_b ? ib : ia;
    d1        <= a_ge_b ? ({ia.exp[E-1], ia.exp} - {ib.exp[E-1], ib.exp})
                        : ({ib.exp[E-1], ib.exp} - {ia.exp[E-1], ia.exp});
    y0_1      <= a_ge_b ? b_zero : a_zero;
    both_neg0 <= a_zero && b_zero && ia.sgn && ib.sgn;
  end

  // ---- Stage 2: align -------------------------------------------------------
  logic [2*G-1:0] yfull;
  logic [G-1:0]   yal;
  logic           sticky;
  always_comb begin
    yfull = {y1.mant, 2'b00, {G{1'b0}}};
    if (y0_1) begin
      yal    = '0;
      sticky = 1'b0;
    end else if (d1 >= (E+1)'(G)) begin
      yal    = '0;
      sticky = 1'b1;           // non-zero y lies wholly below the guard bits
    end else begin
      yfull  = yfull >> d1;
      yal    = yfull[2*G-1 -: G];
      sticky = |yfull[G-1:0];
    end
  end

  apfp_t x2;
  logic [G-1:0] yal2;
  logic sub2, sticky2, bn2;
  always_ff @(posedge clk) begin
    x2      <= x1;
    yal2    <= yal;
    sub2    <= x1.sgn ^ y1.sgn;
    sticky2 <= sticky;
    bn2     <= both_neg0;
  end

  // ---- Stage 3: add / subtract ----------------------------------------------
  // add: X + Y; subtract: X - Y - sticky = X + ~Y + !sticky.
  logic [WS-1:0] sum3;
  logic          co3;
  pipelined_add #(.W(WS), .ADD_BASE_BITS(ADD_BASE_BITS)) u_add (
    .clk(clk),
    .a({1'b0, x2.mant, 2'b00}),
    .b(sub2 ? ~{1'b0, yal2} : {1'b0, yal2}),
    .cin(sub2 ? ~sticky2 : 1'b0),
    .sum(sum3), .cout(co3));

  logic         sgn3, bn3;
  logic [E-1:0] exp3;
  delay_line #(.W(E + 2), .DEPTH(LA)) u_dx (.clk(clk), .d({x2.sgn, bn2, x2.exp}), .q({sgn3, bn3, exp3}));

  // ---- Stage 4: leading-zero count --------------------------------------------
  logic [LZW-1:0] lz;
  always_comb begin
    lz = LZW'(G);
    for (int i = 0; i < G; i++) begin
      if (sum3[i]) lz = LZW'(G - 1 - i);
    end
  end

  logic [WS-1:0]  sum4;
  logic [LZW-1:0] lz4;
  logic           sgn4, bn4;
  logic [E-1:0]   exp4;
  always_ff @(posedge clk) begin
    sum4 <= sum3;
    lz4  <= lz;
    sgn4 <= sgn3;
    bn4  <= bn3;
    exp4 <= exp3;
  end

  // ---- Stage 5: normalise and truncate ----------------------------------------
  logic [G-1:0] shl;
  assign shl = sum4[G-1:0] << lz4;
  always_ff @(posedge clk) begin
    if (sum4 == '0) begin
      out <= {bn4, {E{1'b0}}, {M{1'b0}}};
    end else if (sum4[WS-1]) begin
      out <= {sgn4, E'(exp4 + E'(1)), sum4[WS-1 -: M]};
    end else begin
      out <= {sgn4, E'(exp4 - E'(lz4)), shl[G-1 -: M]};
    end
  end

  logic vld4;
  valid_pipe #(.DEPTH(LA + 3)) u_vld (.clk(clk), .rst_n(rst_n), .d(in_valid), .q(vld4));
  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= vld4;
  end
endmodule
