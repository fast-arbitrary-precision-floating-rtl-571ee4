// ddr_model -- behavioural model of one DDR memory bank as seen by a GEMM
// compute unit (the real bank, controller and on-chip interconnect belong to
// the FPGA platform and are not part of the design). Not synthesizable.
//
// DEPTH words of BITS bits. Read requests are accepted when rd_req_ready is
// high (low at random on about STALL_PCT percent of cycles) and answered in
// order LAT cycles later or later, held until rd_resp_ready. Writes are
// accepted when wr_ready is high (also randomly withheld) and land at once.
// Testbenches fill and inspect mem[] directly.
module ddr_model #(
  parameter int BITS      = 128,
  parameter int ADDR_W    = 32,
  parameter int DEPTH     = 4096,
  parameter int LAT       = 6,
  parameter int STALL_PCT = 20
) (
  input  logic              clk,
  input  logic              rd_req_valid,
  output logic              rd_req_ready,
  input  logic [ADDR_W-1:0] rd_req_addr,
  output logic              rd_resp_valid,
  input  logic              rd_resp_ready,
  output logic [BITS-1:0]   rd_resp_data,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [BITS-1:0]   wr_data
);
  logic [BITS-1:0] mem [DEPTH];
  typedef struct { logic [BITS-1:0] d; longint t; } rsp_t;
  rsp_t   q [$];
  longint cyc = 0;
  int     rd_stalls = 0, wr_stalls = 0, oob = 0;

  initial begin
    rd_req_ready = 1'b0;
    wr_ready     = 1'b0;
  end

  always_comb begin
    rd_resp_valid = (q.size() > 0) && (q[0].t <= cyc);
    rd_resp_data  = (q.size() > 0) ? q[0].d : '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rd_req_valid && rd_req_ready) begin
      if (rd_req_addr >= ADDR_W'(DEPTH)) begin
        oob++;
        q.push_back('{d: '0, t: cyc + LAT});
      end else begin
        q.push_back('{d: mem[rd_req_addr], t: cyc + LAT});
      end
    end
    if (rd_resp_valid && rd_resp_ready) void'(q.pop_front());
    if (wr_valid && wr_ready) begin
      if (wr_addr >= ADDR_W'(DEPTH)) oob++;
      else mem[wr_addr] <= wr_data;
    end
    if (rd_req_valid && !rd_req_ready) rd_stalls++;
    if (wr_valid && !wr_ready) wr_stalls++;
    rd_req_ready <= ($urandom % 100) >= STALL_PCT;
    wr_ready     <= ($urandom % 100) >= STALL_PCT;
  end
endmodule
