// gemm_cu -- one GEMM compute unit: C = A * B + C on packed APFP numbers.
//
// A is n_rows x k_depth, B is k_depth x m_cols, C is n_rows x m_cols, all
// row-major in the unit's memory, one BITS-bit word per number, element
// (r, c) of X at x_base + r * ldx + c (word addresses).
//
// The output is computed tile by tile. For each TILE_N x TILE_M tile of C:
//   LOAD_C   the tile is read into the on-chip tile buffer;
//   for every k:
//     LOAD_AB  column k of the tile's rows of A (TILE_N numbers) and row k of
//              the tile's columns of B (TILE_M numbers) are read into two
//              small buffers;
//     COMPUTE  the TILE_N x TILE_M outer product is streamed through the
//              apfp_mac pipeline, one element per cycle, and each result is
//              written back over its tile element (accumulation in place);
//   DRAIN    the pipeline empties;
//   WRITE_C  the tile is written back.
// Tiles that stick out past the matrix edge are computed in full (the extra
// elements are zero-filled, not read, and not written back), as a tiled
// accelerator with fixed tile sizes does.
// An element is read again by the next k's COMPUTE at least
// TILE_N*TILE_M + TILE_N + TILE_M cycles later; if that is less than the
// multiply-add latency (only possible with small tiles), the unit waits in
// WAIT_HAZ until the previous results are back (read-after-write guard).
//
// Memory port (one per compute unit, the unit's DDR bank): read requests
// rd_req_valid/rd_req_ready/rd_req_addr; read data rd_resp_valid/
// rd_resp_ready/rd_resp_data, returned in request order; writes wr_valid/
// wr_ready/wr_addr/wr_data. A transfer happens when valid and ready are both
// high; a request is held stable until accepted.
// Control: the configuration inputs are sampled when start is high in IDLE;
// busy is high until done pulses for one cycle.
//
// The outer-product tiling, on-chip output tile, fixed alpha = beta = 1,
// reading A by columns and B by rows and padding edge tiles follow the
// design; the phase sequence (loads not overlapped with compute), the memory
// handshake, the hazard wait and the two-cycle-per-element write-back are
// this design's own choices.
module gemm_cu #(
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
  // control
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
  // memory port
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [ADDR_W-1:0] rd_req_addr,
  input  logic              rd_resp_valid,
  output logic              rd_resp_ready,
  input  logic [BITS-1:0]   rd_resp_data,
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [BITS-1:0]   wr_data
);
  localparam int unsigned TSZ   = TILE_N * TILE_M;
  localparam int unsigned ABLEN = TILE_N + TILE_M;
  localparam int unsigned EW    = $clog2(TSZ + ABLEN + 1);
  localparam int unsigned LMAC  = apfp_pkg::mac_latency(BITS, MULT_BASE_BITS, ADD_BASE_BITS);
  localparam int unsigned GAP   = LMAC + 2;   // issue-to-reissue distance needed
  localparam int unsigned GW    = $clog2(GAP + 2);
  localparam int unsigned IW    = (TSZ > 1) ? $clog2(TSZ) : 1;
  localparam int unsigned NW    = (TILE_N > 1) ? $clog2(TILE_N) : 1;
  localparam int unsigned MW    = (TILE_M > 1) ? $clog2(TILE_M) : 1;

  typedef enum logic [2:0] {
    S_IDLE, S_LOAD_C, S_LOAD_AB, S_WAIT_HAZ, S_COMPUTE, S_DRAIN, S_WR_RD, S_WR_WR
  } state_t;
  state_t state;
  logic   hazard_wait;   // waiting for the previous k's results (observability)
  assign hazard_wait = (state == S_WAIT_HAZ);

  // Latched configuration.
  logic [DIM_W-1:0]  n_q, m_q, k_q, lda_q, ldb_q, ldc_q;
  logic [ADDR_W-1:0] ab_q, bb_q, cb_q;
  // Tile position and k.
  logic [DIM_W-1:0]  n0, m0, kk;

  // ---- On-chip buffers ---------------------------------------------------
  logic [BITS-1:0] ctile [TSZ];
  logic [BITS-1:0] abuf  [TILE_N];
  logic [BITS-1:0] bbuf  [TILE_M];
  logic [IW-1:0]   ct_raddr;
  logic [BITS-1:0] ct_rdata;
  logic            ct_we;
  logic [IW-1:0]   ct_waddr;
  logic [BITS-1:0] ct_wdata;

  always_ff @(posedge clk) begin
    if (ct_we) ctile[ct_waddr] <= ct_wdata;
    ct_rdata <= ctile[ct_raddr];
  end

  // ---- Element geometry of the load phases -------------------------------
  // Element e of the current phase: in range?, memory address.
  function automatic logic [ADDR_W+1-1:0] elem(input state_t st, input logic [EW-1:0] e,
                                               input logic [DIM_W-1:0] n0_i, input logic [DIM_W-1:0] m0_i,
                                               input logic [DIM_W-1:0] k_i);
    logic [DIM_W-1:0]  r, c;
    logic              ok;
    logic [ADDR_W-1:0] ad;
    ok = 1'b0;
    ad = '0;
    if (st == S_LOAD_AB) begin
      if (e < EW'(TILE_N)) begin
        r  = n0_i + DIM_W'(e);
        ok = r < n_q;
        ad = ab_q + ADDR_W'(r * lda_q) + ADDR_W'(k_i);
      end else begin
        c  = m0_i + DIM_W'(e - EW'(TILE_N));
        ok = c < m_q;
        ad = bb_q + ADDR_W'(k_i * ldb_q) + ADDR_W'(c);
      end
    end else begin
      r  = n0_i + DIM_W'(e / EW'(TILE_M));
      c  = m0_i + DIM_W'(e % EW'(TILE_M));
      ok = (r < n_q) && (c < m_q);
      ad = cb_q + ADDR_W'(r * ldc_q) + ADDR_W'(c);
    end
    return {ok, ad};
  endfunction

  logic [EW-1:0] iss, rcv, len;
  logic          iss_ok, rcv_ok;
  logic [ADDR_W-1:0] iss_addr, rcv_addr_unused;
  always_comb begin
    {iss_ok, iss_addr}        = elem(state, iss, n0, m0, kk);
    {rcv_ok, rcv_addr_unused} = elem(state, rcv, n0, m0, kk);
  end
  assign len = (state == S_LOAD_AB) ? EW'(ABLEN) : EW'(TSZ);

  logic loading;
  assign loading       = (state == S_LOAD_C) || (state == S_LOAD_AB);
  assign rd_req_valid  = loading && (iss < len) && iss_ok;
  assign rd_req_addr   = iss_addr;
  assign rd_resp_ready = loading && (rcv < len) && rcv_ok;

  logic          rcv_fire;   // element rcv is filled this cycle
  logic [BITS-1:0] rcv_data;
  assign rcv_fire = loading && (rcv < len) && (!rcv_ok || rd_resp_valid);
  assign rcv_data = rcv_ok ? rd_resp_data : '0;

  // ---- Compute issue ------------------------------------------------------
  logic [EW-1:0]  ce;          // compute element counter
  logic           iss_v;       // stage R valid
  logic [IW-1:0]  iss_idx;
  logic [BITS-1:0] a_op, b_op;
  logic [GW-1:0]  since;       // cycles since the last COMPUTE started
  logic [GW-1:0]  quiet;       // cycles since the last element was issued

  assign ct_raddr = (state == S_COMPUTE) ? IW'(ce) : IW'(rcv);  // rcv doubles as write-back index

  always_ff @(posedge clk) begin
    iss_v   <= (state == S_COMPUTE);
    iss_idx <= IW'(ce);
    a_op    <= abuf[NW'(ce / EW'(TILE_M))];
    b_op    <= bbuf[MW'(ce % EW'(TILE_M))];
  end

  logic            mac_v;
  logic [BITS-1:0] mac_out;
  logic [IW-1:0]   mac_idx;
  logic            iss_vr;
  assign iss_vr = iss_v && rst_n;

  apfp_mac #(.BITS(BITS), .MULT_BASE_BITS(MULT_BASE_BITS), .ADD_BASE_BITS(ADD_BASE_BITS)) u_mac (
    .clk(clk), .rst_n(rst_n), .in_valid(iss_vr), .a(a_op), .b(b_op), .c(ct_rdata),
    .out_valid(mac_v), .out(mac_out));
  delay_line #(.W(IW), .DEPTH(LMAC)) u_didx (.clk(clk), .d(iss_idx), .q(mac_idx));

  // Tile buffer write port: loads of C, or multiply-add results.
  always_comb begin
    ct_we    = 1'b0;
    ct_waddr = IW'(rcv);
    ct_wdata = rcv_data;
    if (mac_v) begin
      ct_we    = 1'b1;
      ct_waddr = mac_idx;
      ct_wdata = mac_out;
    end else if (state == S_LOAD_C && rcv_fire) begin
      ct_we = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_LOAD_AB && rcv_fire) begin
      if (rcv < EW'(TILE_N)) abuf[NW'(rcv)] <= rcv_data;
      else                    bbuf[MW'(rcv - EW'(TILE_N))] <= rcv_data;
    end
  end

  // ---- Write-back -----------------------------------------------------------
  logic [ADDR_W-1:0] wb_addr;
  logic              wb_ok;
  always_comb begin
    {wb_ok, wb_addr} = elem(S_LOAD_C, rcv, n0, m0, kk);
  end
  assign wr_valid = (state == S_WR_WR);
  assign wr_addr  = wb_addr;
  assign wr_data  = ct_rdata;

  // ---- Control FSM -----------------------------------------------------------
  logic last_tile;
  assign last_tile = (m0 + DIM_W'(TILE_M) >= m_q) && (n0 + DIM_W'(TILE_N) >= n_q);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      busy  <= 1'b0;
      done  <= 1'b0;
      iss   <= '0;
      rcv   <= '0;
      ce    <= '0;
      n0    <= '0;
      m0    <= '0;
      kk    <= '0;
      since <= '0;
      quiet <= '0;
    end else begin
      done <= 1'b0;
      if (state == S_COMPUTE) quiet <= '0;
      else if (quiet != '1)   quiet <= quiet + GW'(1);
      if (state == S_COMPUTE && ce == '0) since <= GW'(1);
      else if (since != '1)               since <= since + GW'(1);

      if (loading) begin
        if (iss < len && (!iss_ok || rd_req_ready)) iss <= iss + EW'(1);
        if (rcv_fire) rcv <= rcv + EW'(1);
      end

      unique case (state)
        S_IDLE: begin
          if (start) begin
            n_q <= n_rows;  m_q <= m_cols;  k_q <= k_depth;
            lda_q <= lda;   ldb_q <= ldb;   ldc_q <= ldc;
            ab_q <= a_base; bb_q <= b_base; cb_q <= c_base;
            n0 <= '0; m0 <= '0; kk <= '0;
            iss <= '0; rcv <= '0;
            busy <= 1'b1;
            if (n_rows == '0 || m_cols == '0) begin
              busy <= 1'b0;
              done <= 1'b1;
            end else begin
              state <= S_LOAD_C;
            end
          end
        end
        S_LOAD_C, S_LOAD_AB: begin
          if (rcv_fire && rcv == len - EW'(1)) begin
            iss <= '0;
            rcv <= '0;
            if (state == S_LOAD_C && k_q == '0) state <= S_DRAIN;
            else if (state == S_LOAD_C)          state <= S_LOAD_AB;
            else if (kk == '0 || since >= GW'(GAP)) begin
              state <= S_COMPUTE;
              ce    <= '0;
            end else begin
              state <= S_WAIT_HAZ;
            end
          end
        end
        S_WAIT_HAZ: begin
          if (since >= GW'(GAP)) begin
            state <= S_COMPUTE;
            ce    <= '0;
          end
        end
        S_COMPUTE: begin
          ce <= ce + EW'(1);
          if (ce == EW'(TSZ - 1)) begin
            if (kk + DIM_W'(1) == k_q) begin
              state <= S_DRAIN;
            end else begin
              kk    <= kk + DIM_W'(1);
              state <= S_LOAD_AB;
            end
          end
        end
        S_DRAIN: begin
          if (quiet >= GW'(GAP)) begin
            state <= S_WR_RD;
            rcv   <= '0;
          end
        end
        S_WR_RD: begin
          if (rcv == EW'(TSZ)) begin
            // tile complete
            rcv <= '0;
            iss <= '0;
            kk  <= '0;
            if (last_tile) begin
              state <= S_IDLE;
              busy  <= 1'b0;
              done  <= 1'b1;
            end else begin
              if (m0 + DIM_W'(TILE_M) >= m_q) begin
                m0 <= '0;
                n0 <= n0 + DIM_W'(TILE_N);
              end else begin
                m0 <= m0 + DIM_W'(TILE_M);
              end
              state <= S_LOAD_C;
            end
          end else if (!wb_ok) begin
            rcv <= rcv + EW'(1);
          end else begin
            state <= S_WR_WR;
          end
        end
        S_WR_WR: begin
          if (wr_ready) begin
            rcv   <= rcv + EW'(1);
            state <= S_WR_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---- Handshake rules -----------------------------------------------------
  a_rd_hold: assert property (@(posedge clk) disable iff (!rst_n)
      rd_req_valid && !rd_req_ready |=> rd_req_valid && $stable(rd_req_addr))
    else $error("read request dropped or changed before it was accepted");
  a_wr_hold: assert property (@(posedge clk) disable iff (!rst_n)
      wr_valid && !wr_ready |=> wr_valid && $stable(wr_addr) && $stable(wr_data))
    else $error("write dropped or changed before it was accepted");
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
      !(mac_v && state == S_LOAD_C))
    else $error("multiply-add result collided with a tile load");
endmodule
