// tb_dsp_mult -- self-checking testbench of dsp_mult at 18 bits: random and
// extreme operands, one per cycle, product checked one cycle later.
module tb_dsp_mult;
  localparam int B = 18;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [B-1:0] a, b;
  logic [2*B-1:0] p, e;
  int checks = 0, failures = 0;

  dsp_mult #(.BITS(B)) dut (.clk(clk), .a(a), .b(b), .p(p));

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      a = (i % 7 == 0) ? '1 : B'($urandom);
      b = (i % 5 == 0) ? '1 : B'($urandom);
      e = (2*B)'(a) * (2*B)'(b);
      @(posedge clk);
      #1;
      checks++;
      if (p !== e) begin
        failures++;
        $display("mismatch %h*%h=%h exp %h", a, b, p, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
