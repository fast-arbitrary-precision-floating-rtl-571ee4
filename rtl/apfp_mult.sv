// apfp_mult -- fully pipelined arbitrary-precision floating-point multiplier
// with the results of MPFR's mpfr_mul in round-toward-zero mode (MPFR_RNDZ).
//
// Operands and result use the packed format of apfp_pkg: {sign, 63-bit
// exponent, M-bit mantissa}, M = BITS - 64, value 0.mantissa * 2^exponent.
// The mantissas go through karatsuba_mult; sign (XOR) and exponent (sum)
// travel alongside in delay lines. The 2M-bit product of two normalised
// mantissas lies in [1/4, 1): if its top bit is clear it is shifted left by
// one and the exponent decremented. Keeping the top M bits truncates, which
// is exactly round-toward-zero. A zero operand gives a zero result (mantissa
// 0, exponent 0, sign XOR of the operand signs).
// The paper gives the multiplier's structure (Karatsuba on the mantissas)
// and its RNDZ semantics; the normalisation stage and the zero encoding are
// this design's own. Exponent overflow and underflow are not detected: the
// 63-bit exponent sum wraps.
//
// Timing: one multiplication per cycle; out_valid/out follow in_valid/a/b
// after apfp_pkg::mult_latency(BITS, MULT_BASE_BITS, ADD_BASE_BITS) cycles.
module apfp_mult #(
  parameter int unsigned BITS           = apfp_pkg::APFP_BITS,
  parameter int unsigned MULT_BASE_BITS = apfp_pkg::MULT_BASE_BITS,
  parameter int unsigned ADD_BASE_BITS  = apfp_pkg::ADD_BASE_BITS
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
  localparam int unsigned LK = apfp_pkg::karatsuba_latency(M, MULT_BASE_BITS, ADD_BASE_BITS);

  logic [M-1:0] ma, mb;
  logic [E-1:0] ea, eb;
  assign ma = a[M-1:0];
  assign mb = b[M-1:0];
  assign ea = a[M +: E];
  assign eb = b[M +: E];

  // Mantissa product.
  logic [2*M-1:0] prod;
  karatsuba_mult #(.BITS(M), .MULT_BASE_BITS(MULT_BASE_BITS), .ADD_BASE_BITS(ADD_BASE_BITS))
    u_kara (.clk(clk), .a(ma), .b(mb), .p(prod));

  // Sign, exponent sum and zero flag ride alongside.
  logic         sgn_d, zero_d;
  logic [E-1:0] esum_d;
  delay_line #(.W(E + 2), .DEPTH(LK)) u_side (
    .clk(clk),
    .d({a[BITS-1] ^ b[BITS-1], (ma == '0) || (mb == '0), E'(ea + eb)}),
    .q({sgn_d, zero_d, esum_d}));

  logic vld_d;
  valid_pipe #(.DEPTH(LK)) u_vld (.clk(clk), .rst_n(rst_n), .d(in_valid), .q(vld_d));

  // Normalise and truncate.
  always_ff @(posedge clk) begin
    if (zero_d) begin
      out <= {sgn_d, {E{1'b0}}, {M{1'b0}}};
    end else if (prod[2*M-1]) begin
      out <= {sgn_d, esum_d, prod[2*M-1 -: M]};
    end else begin
      out <= {sgn_d, E'(esum_d - E'(1)), prod[2*M-2 -: M]};
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= vld_d;
  end
endmodule
