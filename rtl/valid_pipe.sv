// valid_pipe -- 1-bit shift register of DEPTH stages with synchronous,
// active-low reset, used to carry the "operation valid" flag alongside a
// pipeline whose data registers have no reset. DEPTH = 0 is a plain wire.
module valid_pipe #(
  parameter int unsigned DEPTH = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic sr [DEPTH];
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int i = 0; i < DEPTH; i++) sr[i] <= 1'b0;
      end else begin
        sr[0] <= d;
        for (int i = 1; i < DEPTH; i++) sr[i] <= sr[i-1];
      end
    end
    assign q = sr[DEPTH-1];
  end
endmodule
