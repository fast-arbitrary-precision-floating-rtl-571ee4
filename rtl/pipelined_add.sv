// pipelined_add -- wide integer adder broken into chunks of ADD_BASE_BITS.
//
// sum = a + b + cin (mod 2^W), cout = carry out of the top bit. Stage k of
// the pipeline adds chunk k of the operands together with the carry that
// stage k-1 registered, so no more than ADD_BASE_BITS bits are added in one
// cycle. Operand chunks not yet consumed and result chunks already produced
// travel along in registers, so one new addition can enter every cycle and
// each leaves ceil(W / ADD_BASE_BITS) cycles after it entered (fully
// pipelined, no stall). Subtraction a - b is done by the caller as
// a + ~b + 1.
//
// Splitting the addition into configurable chunks follows the design
// (APFP_ADD_BASE_BITS); the carry-chain-per-stage arrangement is the simplest
// structure that does it and is this design's own.
module pipelined_add #(
  parameter int unsigned W             = 128,
  parameter int unsigned ADD_BASE_BITS = apfp_pkg::ADD_BASE_BITS
) (
  input  logic         clk,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] sum,
  output logic         cout
);
  localparam int unsigned NCH = (W + ADD_BASE_BITS - 1) / ADD_BASE_BITS;
  localparam int unsigned WP  = NCH * ADD_BASE_BITS;  // padded width

  // Per stage: remaining operands, partial result, carry.
  logic [WP-1:0] a_q [NCH];
  logic [WP-1:0] b_q [NCH];
  logic [WP-1:0] s_q [NCH];
  logic          c_q [NCH];

  for (genvar k = 0; k < NCH; k++) begin : g_stage
    logic [WP-1:0]            a_in, b_in, s_in;
    logic                     c_in;
    logic [ADD_BASE_BITS:0]   chunk;
    if (k == 0) begin : g_first
      assign a_in = WP'(a);
      assign b_in = WP'(b);
      assign s_in = '0;
      assign c_in = cin;
    end else begin : g_next
      assign a_in = a_q[k-1];
      assign b_in = b_q[k-1];
      assign s_in = s_q[k-1];
      assign c_in = c_q[k-1];
    end
    assign chunk = {1'b0, a_in[k*ADD_BASE_BITS +: ADD_BASE_BITS]}
                 + {1'b0, b_in[k*ADD_BASE_BITS +: ADD_BASE_BITS]}
                 + {{ADD_BASE_BITS{1'b0}}, c_in};
    always_ff @(posedge clk) begin
      a_q[k] <= a_in;
      b_q[k] <= b_in;
      s_q[k] <= s_in;
      s_q[k][k*ADD_BASE_BITS +: ADD_BASE_BITS] <= chunk[ADD_BASE_BITS-1:0];
      c_q[k] <= chunk[ADD_BASE_BITS];
    end
  end

  assign sum = s_q[NCH-1][W-1:0];
  if (WP == W) begin : g_exact
    assign cout = c_q[NCH-1];
  end else begin : g_padded
    // Padding bits of the operands are zero, so the carry out of bit W-1
    // lands in bit W of the padded sum.
    assign cout = s_q[NCH-1][W];
  end
endmodule
