// apfp_mac -- combined multiply-addition pipeline: out = (a * b) + c, with
// the product and the sum each rounded toward zero, as two consecutive MPFR
// calls mpfr_mul / mpfr_add with MPFR_RNDZ would give (not a fused
// operation). apfp_mult feeds apfp_add; c is delayed to meet the product.
// One operation per cycle, no stall; out_valid/out follow in_valid by
// apfp_pkg::mac_latency(BITS, MULT_BASE_BITS, ADD_BASE_BITS) cycles.
// Chaining the multiplier into the adder is the paper's; the delay of c is
// the obvious way to do it.
module apfp_mac #(
  parameter int unsigned BITS           = apfp_pkg::APFP_BITS,
  parameter int unsigned MULT_BASE_BITS = apfp_pkg::MULT_BASE_BITS,
  parameter int unsigned ADD_BASE_BITS  = apfp_pkg::ADD_BASE_BITS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [BITS-1:0] a,
  input  logic [BITS-1:0] b,
  input  logic [BITS-1:0] c,
  output logic            out_valid,
  output logic [BITS-1:0] out
);
  localparam int unsigned LM = apfp_pkg::mult_latency(BITS, MULT_BASE_BITS, ADD_BASE_BITS);

  logic            p_valid;
  logic [BITS-1:0] p, c_d;

  apfp_mult #(.BITS(BITS), .MULT_BASE_BITS(MULT_BASE_BITS), .ADD_BASE_BITS(ADD_BASE_BITS)) u_mul (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a(a), .b(b), .out_valid(p_valid), .out(p));

  delay_line #(.W(BITS), .DEPTH(LM)) u_dc (.clk(clk), .d(c), .q(c_d));

  apfp_add #(.BITS(BITS), .ADD_BASE_BITS(ADD_BASE_BITS)) u_add (
    .clk(clk), .rst_n(rst_n), .in_valid(p_valid), .a(p), .b(c_d), .out_valid(out_valid), .out(out));
endmodule
