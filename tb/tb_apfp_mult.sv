// tb_apfp_mult -- self-checking testbench of apfp_mult.
// Runs a 128-bit configuration (64-bit mantissa, Karatsuba 64 -> 32 -> 16).
// Random operands (normalised numbers over a small exponent range so that
// alignment shifts are both small and larger than the mantissa, zeros,
// exact and near cancellations, powers of two, all-ones mantissas) enter
// with in_valid high on about 3 cycles in 4. Every result is compared with
// apfp_ref_pkg (an independent round-toward-zero model), and must leave
// exactly the pipeline latency after it entered.
module tb_apfp_mult;
  import apfp_ref_pkg::*;
  localparam int BITS = 128, MB = 18, AB = 32;
  localparam int LAT = apfp_pkg::mult_latency(BITS, MB, AB);
  typedef apfp_ref #(BITS) R;
  localparam int NOPS = 2000;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [BITS-1:0] a, b, c;
  logic out_valid;
  logic [BITS-1:0] out;
  int checks = 0, failures = 0, cyc = 0, sent = 0;

  apfp_mult #(.BITS(BITS), .MULT_BASE_BITS(MB), .ADD_BASE_BITS(AB)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a(a), .b(b), .out_valid(out_valid), .out(out));

  typedef struct { logic [BITS-1:0] v; int t; } exp_t;
  exp_t q [$];

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (NOPS * 3 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Checker.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        e = q.pop_front();
        if (out !== e.v || cyc - e.t != LAT) begin
          failures++;
          if (failures < 8) $display("mismatch: got %h exp %h (latency %0d, expected %0d)", out, e.v, cyc - e.t, LAT);
        end
      end
    end
  end

  initial begin
    a = '0; b = '0; c = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (sent < NOPS) begin
      @(negedge clk);
      if ($urandom % 4 != 0) begin
        a = R::rnd(b, 8);
        b = R::rnd(a, 8);
        c = R::rnd(a, 8);
        in_valid = 1'b1;
        q.push_back('{v: R::mul(a, b), t: cyc});
        sent++;
      end else begin
        in_valid = 1'b0;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 5) @(posedge clk);
    if (q.size() != 0) begin
      failures++;
      $display("%0d results missing", q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
