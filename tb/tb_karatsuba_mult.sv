// tb_karatsuba_mult -- self-checking testbench of karatsuba_mult.
// Two instances: a small one (64 bits, bottom-out at 18 bits, 32-bit adder
// chunks: recursion 64 -> 32 -> 16) and one at the full 448-bit mantissa
// width with the default thresholds (448 -> 224 -> 112 -> 56). One random
// operand pair per cycle, including all-ones and halves that are equal or
// swapped in order (both signs of the middle term), is checked against the
// simulator's wide multiplication exactly karatsuba_latency cycles later.
module tb_karatsuba_mult;
  localparam int B1 = 64;
  localparam int B2 = 448;
  localparam int L1 = apfp_pkg::karatsuba_latency(B1, 18, 32);
  localparam int L2 = apfp_pkg::karatsuba_latency(B2, 72, 128);
  localparam int N  = 300;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [B1-1:0]   a1, b1;
  logic [2*B1-1:0] p1;
  logic [B2-1:0]   a2, b2;
  logic [2*B2-1:0] p2;
  int checks = 0, failures = 0;
  int cyc = 0;

  karatsuba_mult #(.BITS(B1), .MULT_BASE_BITS(18), .ADD_BASE_BITS(32)) dut1 (.clk(clk), .a(a1), .b(b1), .p(p1));
  karatsuba_mult dut2 (.clk(clk), .a(a2), .b(b2), .p(p2));

  logic [2*B1-1:0] e1 [N];
  logic [2*B2-1:0] e2 [N];

  function automatic logic [B2-1:0] rnd(int w);
    logic [B2-1:0] v;
    v = '0;
    for (int i = 0; i < w; i += 32) v = (v << 32) | B2'($urandom);
    if (w < B2) v &= (B2'(1) << w) - 1;
    case ($urandom % 6)
      0: v = (w < B2) ? (B2'(1) << w) - 1 : '1;
      1: v = (v & ((B2'(1) << (w/2)) - 1)) | ((v & ((B2'(1) << (w/2)) - 1)) << (w/2)); // equal halves
      default: ;
    endcase
    return v;
  endfunction

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    $display("latency small=%0d full=%0d", L1, L2);
    for (int i = 0; i < N + L2; i++) begin
      if (i < N) begin
        a1 = B1'(rnd(B1)); b1 = B1'(rnd(B1));
        a2 = rnd(B2);      b2 = rnd(B2);
        e1[i] = (2*B1)'(a1) * (2*B1)'(b1);
        e2[i] = (2*B2)'(a2) * (2*B2)'(b2);
      end
      @(posedge clk);
      #1;
      if (i - (L1 - 1) >= 0 && i - (L1 - 1) < N) begin
        checks++;
        if (p1 !== e1[i - (L1 - 1)]) begin
          failures++;
          if (failures < 5) $display("small mismatch at %0d", i);
        end
      end
      if (i - (L2 - 1) >= 0 && i - (L2 - 1) < N) begin
        checks++;
        if (p2 !== e2[i - (L2 - 1)]) begin
          failures++;
          if (failures < 5) $display("full mismatch at %0d", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
