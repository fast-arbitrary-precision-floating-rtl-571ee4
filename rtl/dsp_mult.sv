// dsp_mult -- the naive (schoolbook) unsigned multiplier the Karatsuba
// recursion bottoms out on. On the target FPGA it maps onto hardened DSP
// slices (one for operands up to 18 bits, a small array of them for wider
// bottom-out widths). p = a * b, registered once: latency 1 cycle, one
// product per cycle. The single register stage is this design's choice.
module dsp_mult #(
  parameter int unsigned BITS = 18
) (
  input  logic              clk,
  input  logic [BITS-1:0]   a,
  input  logic [BITS-1:0]   b,
  output logic [2*BITS-1:0] p
);
  always_ff @(posedge clk) p <= (2*BITS)'(a) * (2*BITS)'(b);
endmodule
