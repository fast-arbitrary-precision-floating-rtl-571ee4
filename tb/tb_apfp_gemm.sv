// tb_apfp_gemm -- end-to-end testbench of the apfp_gemm accelerator at reduced size.
// Five compute units (so the bank assignment wraps), 128-bit numbers
// (64-bit mantissa), 2 x 3 tiles. Three operations: 9 x 4 x 3 (rows split
// 2,2,2,2,1; edge tiles), 3 x 7 x 2 (two units get no rows) and 10 x 3 x 0.
// The host's side is modelled here: global A (N x K), B (K x M) and C (N x M)
// are generated, each unit's bank (a behavioural memory model) receives that
// unit's rows of A and C and the whole of B, the accelerator is started, and
// afterwards every C element in every bank is compared with the reference
// c = RNDZ(RNDZ(a_ik * b_kj) + c), k in order, computed by apfp_ref_pkg.
// Words around C must be untouched. The mechanisms of the design are counted
// and each must occur: read-after-write hazard waits, padded edge-tile elements, memory stalls on
// reads and writes, and units left without rows.
module tb_apfp_gemm;
  import apfp_ref_pkg::*;
  localparam int P = 5, BITS = 128, TN = 2, TM = 3;
  localparam int AW = 32, DW = 32, DEPTH = 512;
  typedef apfp_ref #(BITS) R;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  logic start = 1'b0, busy, done;
  logic [DW-1:0] n_rows, m_cols, k_depth, lda, ldb, ldc;
  logic [AW-1:0] a_base, b_base, c_base;
  logic            rd_req_valid  [P];
  logic            rd_req_ready  [P];
  logic [AW-1:0]   rd_req_addr   [P];
  logic            rd_resp_valid [P];
  logic            rd_resp_ready [P];
  logic [BITS-1:0] rd_resp_data  [P];
  logic            wr_valid      [P];
  logic            wr_ready      [P];
  logic [AW-1:0]   wr_addr       [P];
  logic [BITS-1:0] wr_data       [P];
  logic [1:0]      cu_ddr_bank   [P];
  int checks = 0, failures = 0;
  int haz_cycles = 0, skipped = 0, rd_stalls = 0, wr_stalls = 0, idle_units = 0, macs = 0, exp_macs = 0, issued = 0;
  // Bank images: written into the models on load_ev, read back on dump_ev.
  logic [BITS-1:0] img [P][DEPTH];
  event load_ev, dump_ev;
  longint t_start, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  apfp_gemm #(.COMPUTE_UNITS(P), .BITS(BITS), .MULT_BASE_BITS(18), .ADD_BASE_BITS(32), .TILE_N(TN), .TILE_M(TM)) dut (.*);

  for (genvar p = 0; p < P; p++) begin : g_mem
    ddr_model #(.BITS(BITS), .ADDR_W(AW), .DEPTH(DEPTH), .LAT(8), .STALL_PCT(15)) mem (
      .clk(clk),
      .rd_req_valid(rd_req_valid[p]), .rd_req_ready(rd_req_ready[p]), .rd_req_addr(rd_req_addr[p]),
      .rd_resp_valid(rd_resp_valid[p]), .rd_resp_ready(rd_resp_ready[p]), .rd_resp_data(rd_resp_data[p]),
      .wr_valid(wr_valid[p]), .wr_ready(wr_ready[p]), .wr_addr(wr_addr[p]), .wr_data(wr_data[p]));
    always @(posedge clk) begin
      if (rst_n && dut.g_cu[p].u_cu.hazard_wait) haz_cycles++;
      if (dut.g_cu[p].u_cu.loading && dut.g_cu[p].u_cu.iss < dut.g_cu[p].u_cu.len
          && !dut.g_cu[p].u_cu.iss_ok) skipped++;
      if (rd_req_valid[p] && !rd_req_ready[p]) rd_stalls++;
      if (wr_valid[p] && !wr_ready[p]) wr_stalls++;
      if (dut.g_cu[p].u_cu.done && !dut.g_cu[p].u_cu.busy && dut.g_cu[p].u_cu.n_q == 0) idle_units++;
      if (rst_n && dut.g_cu[p].u_cu.mac_v) macs++;
      if (rst_n && dut.g_cu[p].u_cu.iss_v) issued++;
      if (mem.oob != 0 && rst_n) begin
        failures++;
        $display("unit %0d out-of-bounds access", p);
        mem.oob = 0;
      end
    end
    initial forever begin
      @(load_ev);
      for (int w = 0; w < DEPTH; w++) mem.mem[w] = img[p][w];
    end
    initial forever begin
      @(dump_ev);
      for (int w = 0; w < DEPTH; w++) img[p][w] = mem.mem[w];
    end
  end


  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [BITS-1:0] guard(int p, int addr);
    return R::pack(0, 63'(addr), {1'b1, (R::M-1)'(addr * 7 + p)});
  endfunction

  task automatic run(int n, int m, int k);
    logic [BITS-1:0] ga [], gb [], gc [], ge [];
    int rpc, la, lb, lc;
    la = k + 1; lb = m; lc = m + 2;   // leading dimensions (row pitches)
    a_base = 4; b_base = 4 + 150; c_base = 4 + 2 * 150;
    ga = new[n*k]; gb = new[k*m]; gc = new[n*m]; ge = new[n*m];
    foreach (ga[i]) ga[i] = R::rnd(i > 0 ? ga[i-1] : '0, 6);
    foreach (gb[i]) gb[i] = R::rnd(i > 0 ? gb[i-1] : ga[0], 6);
    foreach (gc[i]) gc[i] = R::rnd(ga[i % (n*k > 0 ? n*k : 1)], 6);
    for (int i = 0; i < n; i++) for (int j = 0; j < m; j++) begin
      logic [BITS-1:0] acc;
      acc = gc[i*m + j];
      for (int kk = 0; kk < k; kk++) acc = R::add(R::mul(ga[i*k + kk], gb[kk*m + j]), acc);
      ge[i*m + j] = acc;
    end
    rpc = (n + P - 1) / P;
    for (int p = 0; p < P; p++) begin
      int r;
      r = (n - p * rpc > rpc) ? rpc : (n - p * rpc > 0 ? n - p * rpc : 0);
      if (r > 0 && m > 0) exp_macs += ((r + TN - 1) / TN) * ((m + TM - 1) / TM) * k * TN * TM;
    end
    for (int p = 0; p < P; p++) begin
      for (int w = 0; w < DEPTH; w++) img[p][w] = guard(p, w);
    end
    // host layout: unit p gets rows p*rpc.. of A and C, all of B
    for (int i = 0; i < n; i++) begin
      int p, r;
      p = i / rpc; r = i % rpc;
      for (int kk = 0; kk < k; kk++) img[p][a_base + r*la + kk] = ga[i*k + kk];
      for (int j = 0; j < m; j++) img[p][c_base + r*lc + j] = gc[i*m + j];
    end
    for (int p = 0; p < P; p++)
      for (int kk = 0; kk < k; kk++) for (int j = 0; j < m; j++)
        img[p][b_base + kk*lb + j] = gb[kk*m + j];
    -> load_ev;
    #1;
    n_rows = n; m_cols = m; k_depth = k; lda = la; ldb = lb; ldc = lc;
    @(negedge clk) start = 1'b1;
    t_start = cyc;
    @(negedge clk) start = 1'b0;
    while (!done) @(posedge clk);
    #1;
    -> dump_ev;
    #1;
    $display("GEMM %0d x %0d x %0d on %0d units: %0d cycles", n, m, k, P, cyc - t_start);
    for (int i = 0; i < n; i++) begin
      int p, r;
      p = i / rpc; r = i % rpc;
      for (int j = 0; j < lc; j++) begin
        logic [BITS-1:0] got, want;
        got  = img[p][c_base + r*lc + j];
        want = (j < m) ? ge[i*m + j] : guard(p, c_base + r*lc + j);
        checks++;
        if (got !== want) begin
          failures++;
          if (failures < 6) $display("C[%0d][%0d] (unit %0d) got %h want %h", i, j, p, got, want);
        end
      end
    end
  endtask

  initial begin
    {n_rows, m_cols, k_depth, lda, ldb, ldc, a_base, b_base, c_base} = '0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    run(9, 4, 3);
    run(3, 7, 2);
    run(10, 3, 0);
    // bank assignment: 1, 0, 2, 3, then again
    for (int p = 0; p < P; p++) begin
      int want;
      want = (p % 4 == 0) ? 1 : (p % 4 == 1) ? 0 : (p % 4 == 2) ? 2 : 3;
      checks++;
      if (int'(cu_ddr_bank[p]) != want) begin failures++; $display("unit %0d bank %0d", p, cu_ddr_bank[p]); end
    end
    $display("mechanisms: hazard waits=%0d skipped (padded) reads=%0d read stalls=%0d write stalls=%0d idle units=%0d multiply-adds=%0d (expected %0d)",
             haz_cycles, skipped, rd_stalls, wr_stalls, idle_units, macs, exp_macs);
    checks++; if (haz_cycles == 0) begin failures++; $display("no hazard wait"); end
    checks++; if (skipped == 0) begin failures++; $display("no edge padding"); end
    checks++; if (rd_stalls == 0 || wr_stalls == 0) begin failures++; $display("no memory stall"); end
    checks++; if (idle_units == 0) begin failures++; $display("no idle unit"); end
    checks++; if (macs == 0 || macs != exp_macs || issued != exp_macs) begin failures++; $display("multiply-add count differs from tiles x k x tile size"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
