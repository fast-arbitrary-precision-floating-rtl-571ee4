// apfp_gemm -- top level of the arbitrary-precision GEMM accelerator:
// C = A * B + C on packed APFP numbers (default 512 bits: sign, 63-bit
// exponent, 448-bit mantissa), computed by COMPUTE_UNITS replicated
// gemm_cu compute units.
//
// The rows of A and C are split evenly between the units: with
// R = ceil(n_rows / COMPUTE_UNITS), unit p computes rows p*R ... p*R+R-1
// (fewer or none for the last units). Each unit has its own memory port
// (its DDR bank), which is expected to hold that unit's rows of A and C at
// a_base / c_base and the whole of B at b_base, so every unit runs the same
// program on its own partition; laying the data out that way is the host's
// job. cu_ddr_bank[p] reports the bank the platform should connect unit p
// to: round robin over the four banks starting at bank 1, then 0, 2, 3.
//
// Control: start (one cycle, while busy is low) latches the configuration
// and starts every unit; busy stays high and done pulses once all units
// have finished. The memory ports follow gemm_cu's valid/ready handshakes.
// Splitting rows across units with B shared, and the bank order, follow the
// design; aggregating start/done this way is this design's own choice.
module apfp_gemm #(
  parameter int unsigned COMPUTE_UNITS  = apfp_pkg::COMPUTE_UNITS,
  parameter int unsigned BITS           = apfp_pkg::APFP_BITS,
  parameter int unsigned MULT_BASE_BITS = apfp_pkg::MULT_BASE_BITS,
  parameter int unsigned ADD_BASE_BITS  = apfp_pkg::ADD_BASE_BITS,
  parameter int unsigned TILE_N         = apfp_pkg::TILE_SIZE_N,
  parameter int unsigned TILE_M         = apfp_pkg::TILE_SIZE_M,
  parameter int unsigned ADDR_W         = 32,
  parameter int unsigned DIM_W          = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  input  logic [DIM_W-1:0]  n_rows,
  input  logic [DIM_W-1:0]  m_cols,
  input  logic [DIM_W-1:0]  k_depth,
  input  logic [ADDR_W-1:0] a_base,
  input  logic [ADDR_W-1:0] b_base,
  input  logic [ADDR_W-1:0] c_base,
  input  logic [DIM_W-1:0]  lda,
  input  logic [DIM_W-1:0]  ldb,
  input  logic [DIM_W-1:0]  ldc,
  // one memory port per compute unit
  output logic              rd_req_valid  [COMPUTE_UNITS],
  input  logic              rd_req_ready  [COMPUTE_UNITS],
  output logic [ADDR_W-1:0] rd_req_addr   [COMPUTE_UNITS],
  input  logic              rd_resp_valid [COMPUTE_UNITS],
  output logic              rd_resp_ready [COMPUTE_UNITS],
  input  logic [BITS-1:0]   rd_resp_data  [COMPUTE_UNITS],
  output logic              wr_valid      [COMPUTE_UNITS],
  input  logic              wr_ready      [COMPUTE_UNITS],
  output logic [ADDR_W-1:0] wr_addr       [COMPUTE_UNITS],
  output logic [BITS-1:0]   wr_data       [COMPUTE_UNITS],
  output logic [1:0]        cu_ddr_bank   [COMPUTE_UNITS]
);
  localparam int unsigned P = COMPUTE_UNITS;

  logic [DIM_W-1:0] rows_per_cu;
  assign rows_per_cu = DIM_W'((n_rows + DIM_W'(P - 1)) / DIM_W'(P));

  logic cu_start;
  logic cu_done [P];
  logic cu_busy [P];
  logic [P-1:0] finished;

  assign cu_start = start && !busy;

  for (genvar p = 0; p < P; p++) begin : g_cu
    logic [DIM_W-1:0] first_row, my_rows;
    assign first_row = DIM_W'(p) * rows_per_cu;
    assign my_rows   = (first_row >= n_rows) ? '0
                     : ((n_rows - first_row) < rows_per_cu ? n_rows - first_row : rows_per_cu);

    gemm_cu #(
      .BITS(BITS), .MULT_BASE_BITS(MULT_BASE_BITS), .ADD_BASE_BITS(ADD_BASE_BITS),
      .TILE_N(TILE_N), .TILE_M(TILE_M), .ADDR_W(ADDR_W), .DIM_W(DIM_W)
    ) u_cu (
      .clk(clk), .rst_n(rst_n),
      .start(cu_start), .busy(cu_busy[p]), .done(cu_done[p]),
      .n_rows(my_rows), .m_cols(m_cols), .k_depth(k_depth),
      .a_base(a_base), .b_base(b_base), .c_base(c_base),
      .lda(lda), .ldb(ldb), .ldc(ldc),
      .rd_req_valid(rd_req_valid[p]), .rd_req_ready(rd_req_ready[p]), .rd_req_addr(rd_req_addr[p]),
      .rd_resp_valid(rd_resp_valid[p]), .rd_resp_ready(rd_resp_ready[p]), .rd_resp_data(rd_resp_data[p]),
      .wr_valid(wr_valid[p]), .wr_ready(wr_ready[p]), .wr_addr(wr_addr[p]), .wr_data(wr_data[p]));

    assign cu_ddr_bank[p] = 2'(apfp_pkg::cu_ddr_bank(p));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      finished <= '0;
    end else begin
      done <= 1'b0;
      if (cu_start) begin
        busy     <= 1'b1;
        finished <= '0;
      end else if (busy) begin
        if (&finished) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          for (int p = 0; p < P; p++) if (cu_done[p]) finished[p] <= 1'b1;
        end
      end
    end
  end

  // A unit only works or finishes while the accelerator is busy.
  for (genvar p = 0; p < P; p++) begin : g_chk
    a_unit_in_op: assert property (@(posedge clk) disable iff (!rst_n)
        (cu_busy[p] || cu_done[p]) |-> busy)
      else $error("compute unit active outside an operation");
  end
endmodule
