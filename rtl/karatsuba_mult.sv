// karatsuba_mult -- fully pipelined unsigned BITS x BITS multiplier built as
// a recursive Karatsuba (Toom-2) decomposition over dsp_mult.
//
// For BITS > MULT_BASE_BITS the operands are split into halves of n = BITS/2
// bits, a = a1*B + a0 and b = b1*B + b0 with B = 2^n, and
//   c0 = a0*b0, c2 = a1*b1, t = |a1-a0| * |b1-b0|,
//   s  = sign((a1-a0)(b1-b0)),
//   c1 = c0 + c2 - s*t                     (n-bit multiplies only, 2n+2 bits)
//   c  = c0 + B*c1 + B^2*c2.
// The three half-width products are themselves karatsuba_mult instances, so
// the module instantiates itself until the width is at most MULT_BASE_BITS,
// where dsp_mult does a naive product. c0 and c2 do not overlap in c, so the
// final three-term sum is one addition of {c2,c0} and c1 shifted by n.
// This decomposition, the explicit sign of the middle term and the bottom-out
// threshold are the design's; the placement of pipeline registers (one stage
// for the differences, pipelined_add for each of the three additions) is this
// design's own. BITS must be even at every level above the threshold.
//
// Lint note: verilator reports c0, c2 and t (declared in g_rec) as undriven.
// This comes from how it handles the self-instantiation; each is driven by
// the p output of a sub-instance (u_c0, u_c2, u_t). The block's testbench
// checks exact products at the default 448-bit width.
//
// Timing: one product per cycle, no stall; p appears
// apfp_pkg::karatsuba_latency(BITS, MULT_BASE_BITS, ADD_BASE_BITS) cycles
// after a and b are presented.
module karatsuba_mult #(
  parameter int unsigned BITS           = 448,
  parameter int unsigned MULT_BASE_BITS = apfp_pkg::MULT_BASE_BITS,
  parameter int unsigned ADD_BASE_BITS  = apfp_pkg::ADD_BASE_BITS
) (
  input  logic              clk,
  input  logic [BITS-1:0]   a,
  input  logic [BITS-1:0]   b,
  output logic [2*BITS-1:0] p
);
  if (BITS <= MULT_BASE_BITS) begin : g_base
    dsp_mult #(.BITS(BITS)) u_dsp (.clk(clk), .a(a), .b(b), .p(p));
  end else begin : g_rec
    localparam int unsigned N    = BITS / 2;
    localparam int unsigned LSUB = apfp_pkg::karatsuba_latency(N, MULT_BASE_BITS, ADD_BASE_BITS);
    localparam int unsigned WC1  = BITS + 2;          // width of c1
    localparam int unsigned LA1  = apfp_pkg::add_latency(WC1, ADD_BASE_BITS);
    localparam int unsigned LA3  = apfp_pkg::add_latency(2 * BITS, ADD_BASE_BITS);

    // BITS must split evenly.
    if (BITS % 2 != 0) begin : g_bad_width
      $error("karatsuba_mult: BITS=%0d above the threshold must be even", BITS);
    end

    // ---- Stage 0: halves and absolute differences ----------------------
    logic [N-1:0] a0_q, a1_q, b0_q, b1_q, da_q, db_q;
    logic         neg_q;  // (a1-a0)(b1-b0) < 0
    always_ff @(posedge clk) begin
      a0_q  <= a[N-1:0];
      a1_q  <= a[BITS-1:N];
      b0_q  <= b[N-1:0];
      b1_q  <= b[BITS-1:N];
      da_q  <= (a[BITS-1:N] >= a[N-1:0]) ? a[BITS-1:N] - a[N-1:0] : a[N-1:0] - a[BITS-1:N];
      db_q  <= (b[BITS-1:N] >= b[N-1:0]) ? b[BITS-1:N] - b[N-1:0] : b[N-1:0] - b[BITS-1:N];
      neg_q <= (a[BITS-1:N] < a[N-1:0]) ^ (b[BITS-1:N] < b[N-1:0]);
    end

    // ---- Three half-width products ---------------------------------------
    logic [2*N-1:0] c0, c2, t;
    karatsuba_mult #(.BITS(N), .MULT_BASE_BITS(MULT_BASE_BITS), .ADD_BASE_BITS(ADD_BASE_BITS))
      u_c0 (.clk(clk), .a(a0_q), .b(b0_q), .p(c0));
    karatsuba_mult #(.BITS(N), .MULT_BASE_BITS(MULT_BASE_BITS), .ADD_BASE_BITS(ADD_BASE_BITS))
      u_c2 (.clk(clk), .a(a1_q), .b(b1_q), .p(c2));
    karatsuba_mult #(.BITS(N), .MULT_BASE_BITS(MULT_BASE_BITS), .ADD_BASE_BITS(ADD_BASE_BITS))
      u_t  (.clk(clk), .a(da_q), .b(db_q), .p(t));

    logic neg_m;
    delay_line #(.W(1), .DEPTH(LSUB)) u_dneg (.clk(clk), .d(neg_q), .q(neg_m));

    // ---- c0 + c2 ------------------------------------------------------------
    logic [WC1-1:0] s02;
    logic           s02_co;
    pipelined_add #(.W(WC1), .ADD_BASE_BITS(ADD_BASE_BITS)) u_add02 (
      .clk(clk), .a(WC1'(c0)), .b(WC1'(c2)), .cin(1'b0), .sum(s02), .cout(s02_co));

    logic [2*N-1:0] t_d;
    logic           neg_d;
    logic [4*N-1:0] c20_d;   // {c2, c0}
    delay_line #(.W(2*N+1), .DEPTH(LA1)) u_dt (.clk(clk), .d({neg_m, t}), .q({neg_d, t_d}));
    delay_line #(.W(4*N), .DEPTH(LA1)) u_dc20a (.clk(clk), .d({c2, c0}), .q(c20_d));

    // ---- c1 = c0 + c2 -/+ t --------------------------------------------------
    // neg = 0: subtract t (two's complement, carry-in 1); neg = 1: add t.
    logic [WC1-1:0] c1;
    logic           c1_co;
    pipelined_add #(.W(WC1), .ADD_BASE_BITS(ADD_BASE_BITS)) u_addc1 (
      .clk(clk), .a(s02),
      .b(neg_d ? WC1'(t_d) : ~WC1'(t_d)),
      .cin(~neg_d), .sum(c1), .cout(c1_co));

    logic [4*N-1:0] c20_dd;
    delay_line #(.W(4*N), .DEPTH(LA1)) u_dc20b (.clk(clk), .d(c20_d), .q(c20_dd));

    // ---- c = {c2,c0} + (c1 << n) -------------------------------------------
    logic [2*BITS-1:0] c1_sh;
    logic              c_co;
    assign c1_sh = (2*BITS)'(c1) << N;
    pipelined_add #(.W(2*BITS), .ADD_BASE_BITS(ADD_BASE_BITS)) u_addc (
      .clk(clk), .a(c20_dd), .b(c1_sh), .cin(1'b0), .sum(p), .cout(c_co));
  end
endmodule
