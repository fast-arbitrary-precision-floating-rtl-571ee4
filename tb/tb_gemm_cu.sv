// tb_gemm_cu -- self-checking testbench of one GEMM compute unit.
// 128-bit numbers (64-bit mantissa), 2 x 3 tiles, a behavioural memory bank
// with random back-pressure. Three operations: 6 x 5 x 3 (edge tiles in both
// directions), 4 x 4 x 5 with padded leading dimensions, and 3 x 2 x 0
// (C unchanged). Every C element is compared with the reference: starting
// from C, c = RNDZ(RNDZ(a_ik * b_kj) + c) for k = 0, 1, ... in order. Elements
// outside C (guard words) must stay untouched. Also counted and required:
// hazard waits (the 6-element tile is shorter than the multiply-add
// latency), skipped out-of-range reads and memory stalls.
module tb_gemm_cu;
  import apfp_ref_pkg::*;
  localparam int BITS = 128, MB = 18, AB = 32, TN = 2, TM = 3;
  localparam int AW = 32, DW = 32;
  typedef apfp_ref #(BITS) R;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  logic start = 1'b0, busy, done;
  logic [DW-1:0] n_rows, m_cols, k_depth, lda, ldb, ldc;
  logic [AW-1:0] a_base, b_base, c_base;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, rd_resp_ready, wr_valid, wr_ready;
  logic [AW-1:0] rd_req_addr, wr_addr;
  logic [BITS-1:0] rd_resp_data, wr_data;
  int checks = 0, failures = 0;
  int haz_cycles = 0, skipped = 0;

  gemm_cu #(.BITS(BITS), .MULT_BASE_BITS(MB), .ADD_BASE_BITS(AB), .TILE_N(TN), .TILE_M(TM)) dut (.*);
  ddr_model #(.BITS(BITS), .ADDR_W(AW), .DEPTH(1024)) mem (.*);

  always @(posedge clk) begin
    if (rst_n && dut.hazard_wait) haz_cycles++;
    if (dut.loading && dut.iss < dut.len && !dut.iss_ok) skipped++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int n, int m, int k, int pad);
    logic [BITS-1:0] c_exp [];
    int la, lb, lc;
    la = k + pad; lb = m + pad; lc = m + pad;
    a_base = 16; b_base = 300; c_base = 600;
    for (int i = 0; i < 1024; i++) mem.mem[i] = R::pack(0, 63'(i), {1'b1, 63'(i)});
    for (int i = 0; i < n; i++) for (int j = 0; j < k; j++)
      mem.mem[a_base + i*la + j] = R::rnd(mem.mem[a_base + i*la + j], 6);
    for (int i = 0; i < k; i++) for (int j = 0; j < m; j++)
      mem.mem[b_base + i*lb + j] = R::rnd(mem.mem[b_base], 6);
    for (int i = 0; i < n; i++) for (int j = 0; j < m; j++)
      mem.mem[c_base + i*lc + j] = R::rnd(mem.mem[a_base], 6);
    c_exp = new[n*m];
    for (int i = 0; i < n; i++) for (int j = 0; j < m; j++) begin
      logic [BITS-1:0] acc;
      acc = mem.mem[c_base + i*lc + j];
      for (int kk = 0; kk < k; kk++)
        acc = R::add(R::mul(mem.mem[a_base + i*la + kk], mem.mem[b_base + kk*lb + j]), acc);
      c_exp[i*m + j] = acc;
    end
    n_rows = n; m_cols = m; k_depth = k; lda = la; ldb = lb; ldc = lc;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    while (!done) @(posedge clk);
    #1;
    for (int i = 0; i < n; i++) for (int j = 0; j < m; j++) begin
      checks++;
      if (mem.mem[c_base + i*lc + j] !== c_exp[i*m + j]) begin
        failures++;
        if (failures < 6) $display("C[%0d][%0d] got %h exp %h", i, j, mem.mem[c_base + i*lc + j], c_exp[i*m+j]);
      end
    end
    // guard words after each row and after C must be untouched
    for (int i = 0; i < n; i++) for (int j = m; j < lc; j++) begin
      checks++;
      if (mem.mem[c_base + i*lc + j] !== R::pack(0, 63'(c_base + i*lc + j), {1'b1, 63'(c_base + i*lc + j)})) failures++;
    end
    checks++;
    if (mem.mem[c_base + n*lc] !== R::pack(0, 63'(c_base + n*lc), {1'b1, 63'(c_base + n*lc)})) failures++;
  endtask

  initial begin
    start = 1'b0;
    {n_rows, m_cols, k_depth, lda, ldb, ldc, a_base, b_base, c_base} = '0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    run(6, 5, 3, 0);
    run(4, 4, 5, 3);
    run(3, 2, 0, 1);
    $display("hazard wait cycles=%0d skipped reads=%0d read stalls=%0d write stalls=%0d",
             haz_cycles, skipped, mem.rd_stalls, mem.wr_stalls);
    checks++; if (haz_cycles == 0) begin failures++; $display("no hazard wait seen"); end
    checks++; if (skipped == 0) begin failures++; $display("no edge padding seen"); end
    checks++; if (mem.rd_stalls == 0 || mem.wr_stalls == 0) begin failures++; $display("no memory stall seen"); end
    checks++; if (mem.oob != 0) begin failures++; $display("out-of-bounds access"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
