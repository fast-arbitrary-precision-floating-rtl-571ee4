// tb_pipelined_add -- self-checking testbench of pipelined_add.
// Feeds one random addition (and subtraction via a + ~b + 1) per cycle to
// a 100-bit adder split into 32-bit chunks (4 stages) and checks every sum
// and carry, ceil(W/ADD_BASE_BITS) cycles after its inputs, against the
// simulator's own wide addition. Carry ripple across all chunks is forced
// by all-ones operands.
module tb_pipelined_add;
  localparam int W = 100;
  localparam int AB = 32;
  localparam int LAT = (W + AB - 1) / AB;
  localparam int N = 400;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [W-1:0] a, b, sum;
  logic cin, cout;
  int checks = 0, failures = 0;

  pipelined_add #(.W(W), .ADD_BASE_BITS(AB)) dut (.clk(clk), .a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  logic [W:0] exp_q [$];

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W; i += 32) v = (v << 32) | W'($urandom);
    return v;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N + LAT; i++) begin
      if (i < N) begin
        case (i % 5)
          0: begin a = '1; b = '0; cin = 1'b1; end
          1: begin a = rnd(); b = ~rnd(); cin = 1'b1; end
          default: begin a = rnd(); b = rnd(); cin = 1'($urandom); end
        endcase
        exp_q.push_back({1'b0, a} + {1'b0, b} + (W+1)'(cin));
      end
      @(posedge clk);
      #1;
      if (i >= LAT - 1 && exp_q.size() > 0 && i - (LAT - 1) < N) begin
        logic [W:0] e;
        e = exp_q.pop_front();
        checks++;
        if ({cout, sum} !== e) begin
          failures++;
          if (failures < 5) $display("mismatch %0d: got %h exp %h", i, {cout, sum}, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
