// delay_line -- W-bit shift register of DEPTH stages used to keep side
// signals aligned with the arithmetic pipelines. DEPTH = 0 is a plain wire.
// Output = input DEPTH clock cycles earlier. No reset: the contents are data
// only; control bits that need a defined start are delayed by callers that
// reset them.
module delay_line #(
  parameter int unsigned W     = 1,
  parameter int unsigned DEPTH = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] stage [DEPTH];
    always_ff @(posedge clk) begin
      stage[0] <= d;
      for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
    end
    assign q = stage[DEPTH-1];
  end
endmodule
