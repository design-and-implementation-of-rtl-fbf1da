// mmult_accel: tiled int8 matrix-multiply accelerator, C = A x B, with
// A (N x K) kept in on-chip memory, B (K x M) brought in BLOCK_M columns at
// a time, and a TILE_SIZE x TILE_SIZE multiply-accumulate array.
//
// Operation (one run, started through the control slave):
//   1. If update_A is set, A is read from external memory (row-major int8,
//      N*K bytes at A) into the persistent A buffer; otherwise the A of an
//      earlier run is reused.
//   2. For each column block j_block = 0, BLOCK_M, ... < M, with
//      cur_M = min(BLOCK_M, M - j_block): every row k of the block,
//      B[k][j_block .. j_block+cur_M-1], is read into the B block buffer.
//   3. For each tile row i0 (step T over N) and tile column j0 (step T over
//      cur_M): localC is cleared, then for each k0 (step T over K) the T
//      rows of localA and localB are loaded from the buffers (T+1 clocks,
//      elements outside N, K or cur_M forced to zero) and the array runs
//      min(T, K-k0) k steps at one per clock.
//   4. The valid part of localC (min(T, N-i0) rows of min(T, cur_M-j0)
//      int32 words) is written row by row to C (row-major int32 at C), and
//      the next tile starts once the last write response has arrived.
//   5. ap_done/ap_ready pulse and the control slave raises its interrupt
//      if enabled.
// Dimensions must satisfy 1 <= N <= N_MAX and 1 <= K <= K_MAX; M is any
// positive value. A run with a zero dimension finishes at once without
// touching memory. Dimensions above the maxima are not checked.
//
// Ports: ap_clk, active-low ap_rst_n, the AXI4-Lite slave s_axi_control,
// read-only AXI4 masters m_axi_gmemA and m_axi_gmemB, write-only AXI4
// master m_axi_gmemC, and interrupt, as on the IP block of the paper's
// system diagram. Latency of a run (clocks, no memory stalls, DATA_W = 32):
// about N*K (A) + per block K*(cur_M + ~4) (B) + per tile
// ceil(K/T)*(T+1) + K + (rows * (cols + ~6)) for loads, compute and writes.
//
// From the paper: the loop nest (Algorithm 1), the sizes (T = 32, BLOCK_M =
// 256, A up to 64x768), persistent A with update_A, boundary checks for
// partial tiles, one AXI4 master per matrix and an AXI4-Lite control slave.
// Own choices: element-serial buffer fills, no overlap of the load,
// compute and write phases, and all bus and register details.
module mmult_accel
  import mmult_pkg::*;
#(
  parameter int unsigned T         = TILE_SIZE,
  parameter int unsigned BM        = BLOCK_M,
  parameter int unsigned NMAX      = N_MAX,
  parameter int unsigned KMAX      = K_MAX,
  parameter int unsigned ADDR_W    = AXI_ADDR_W,
  parameter int unsigned MAX_BURST = AXI_MAX_BURST
) (
  input  logic                ap_clk,
  input  logic                ap_rst_n,
  // s_axi_control
  input  logic                s_axi_control_awvalid,
  output logic                s_axi_control_awready,
  input  logic [6:0]          s_axi_control_awaddr,
  input  logic                s_axi_control_wvalid,
  output logic                s_axi_control_wready,
  input  logic [31:0]         s_axi_control_wdata,
  input  logic [3:0]          s_axi_control_wstrb,
  output logic                s_axi_control_bvalid,
  input  logic                s_axi_control_bready,
  output logic [1:0]          s_axi_control_bresp,
  input  logic                s_axi_control_arvalid,
  output logic                s_axi_control_arready,
  input  logic [6:0]          s_axi_control_araddr,
  output logic                s_axi_control_rvalid,
  input  logic                s_axi_control_rready,
  output logic [31:0]         s_axi_control_rdata,
  output logic [1:0]          s_axi_control_rresp,
  // m_axi_gmemA (read)
  output logic                m_axi_gmemA_arvalid,
  input  logic                m_axi_gmemA_arready,
  output logic [ADDR_W-1:0]   m_axi_gmemA_araddr,
  output logic [7:0]          m_axi_gmemA_arlen,
  output logic [2:0]          m_axi_gmemA_arsize,
  output logic [1:0]          m_axi_gmemA_arburst,
  input  logic                m_axi_gmemA_rvalid,
  output logic                m_axi_gmemA_rready,
  input  logic [31:0]         m_axi_gmemA_rdata,
  input  logic [1:0]          m_axi_gmemA_rresp,
  input  logic                m_axi_gmemA_rlast,
  // m_axi_gmemB (read)
  output logic                m_axi_gmemB_arvalid,
  input  logic                m_axi_gmemB_arready,
  output logic [ADDR_W-1:0]   m_axi_gmemB_araddr,
  output logic [7:0]          m_axi_gmemB_arlen,
  output logic [2:0]          m_axi_gmemB_arsize,
  output logic [1:0]          m_axi_gmemB_arburst,
  input  logic                m_axi_gmemB_rvalid,
  output logic                m_axi_gmemB_rready,
  input  logic [31:0]         m_axi_gmemB_rdata,
  input  logic [1:0]          m_axi_gmemB_rresp,
  input  logic                m_axi_gmemB_rlast,
  // m_axi_gmemC (write)
  output logic                m_axi_gmemC_awvalid,
  input  logic                m_axi_gmemC_awready,
  output logic [ADDR_W-1:0]   m_axi_gmemC_awaddr,
  output logic [7:0]          m_axi_gmemC_awlen,
  output logic [2:0]          m_axi_gmemC_awsize,
  output logic [1:0]          m_axi_gmemC_awburst,
  output logic                m_axi_gmemC_wvalid,
  input  logic                m_axi_gmemC_wready,
  output logic [31:0]         m_axi_gmemC_wdata,
  output logic [3:0]          m_axi_gmemC_wstrb,
  output logic                m_axi_gmemC_wlast,
  input  logic                m_axi_gmemC_bvalid,
  output logic                m_axi_gmemC_bready,
  input  logic [1:0]          m_axi_gmemC_bresp,
  output logic                interrupt
);
  localparam int unsigned TW   = $clog2(T);
  localparam int unsigned NRW  = $clog2(NMAX);
  localparam int unsigned KRW  = $clog2(KMAX);
  localparam int unsigned BCW  = $clog2(BM);
  localparam int unsigned AWPR = KMAX / T;        // A-buffer words per row
  localparam int unsigned BWPR = BM / T;          // B-buffer words per row

  initial begin
    assert (NMAX % T == 0 && KMAX % T == 0 && BM % T == 0)
      else $fatal(1, "N_MAX, K_MAX and BLOCK_M must be multiples of the tile size");
  end

  typedef enum logic [3:0] {
    S_IDLE, S_A_CMD, S_A_LOAD, S_BLK, S_B_CMD, S_B_LOAD, S_TILE,
    S_KLOAD, S_COMP, S_WR_CMD, S_WR_DATA, S_WR_WAIT, S_NEXT, S_DONE
  } state_t;

  logic clk, rst_n;
  assign clk   = ap_clk;
  assign rst_n = ap_rst_n;

  // ---------------------------------------------------------------- control
  logic              ap_start, ap_done, ap_ready, ap_idle;
  logic [ADDR_W-1:0] reg_a, reg_b, reg_c;
  logic [31:0]       reg_n, reg_k, reg_m;
  logic              reg_upd;

  ctrl_regs #(.ADDR_W(ADDR_W)) u_ctrl (
    .clk, .rst_n,
    .s_axi_awvalid(s_axi_control_awvalid), .s_axi_awready(s_axi_control_awready),
    .s_axi_awaddr (s_axi_control_awaddr),
    .s_axi_wvalid (s_axi_control_wvalid),  .s_axi_wready (s_axi_control_wready),
    .s_axi_wdata  (s_axi_control_wdata),   .s_axi_wstrb  (s_axi_control_wstrb),
    .s_axi_bvalid (s_axi_control_bvalid),  .s_axi_bready (s_axi_control_bready),
    .s_axi_bresp  (s_axi_control_bresp),
    .s_axi_arvalid(s_axi_control_arvalid), .s_axi_arready(s_axi_control_arready),
    .s_axi_araddr (s_axi_control_araddr),
    .s_axi_rvalid (s_axi_control_rvalid),  .s_axi_rready (s_axi_control_rready),
    .s_axi_rdata  (s_axi_control_rdata),   .s_axi_rresp  (s_axi_control_rresp),
    .interrupt,
    .ap_start, .ap_done, .ap_ready, .ap_idle,
    .a_addr(reg_a), .b_addr(reg_b), .c_addr(reg_c),
    .dim_n(reg_n), .dim_k(reg_k), .dim_m(reg_m), .update_a(reg_upd)
  );

  // ------------------------------------------------------------ run state
  state_t            state;
  logic [ADDR_W-1:0] a_base, b_base, c_base;
  logic [31:0]       n, k, m;
  logic [31:0]       j_blk, cur_m;       // column block and its width
  logic [31:0]       i0, j0, k0;         // tile origin
  logic [31:0]       row, col;           // fill / write counters
  logic [TW:0]       ld_cnt;             // 0..T, tile-row load counter
  logic [TW:0]       step_cnt;           // k steps done in this k0 tile
  logic [TW:0]       k_len;              // min(T, K - k0)
  logic [TW:0]       rows_v, cols_v;     // valid rows/cols of the C tile

  always_comb begin
    k_len  = (k - k0 >= 32'(T)) ? (TW+1)'(T) : (TW+1)'(k - k0);
    rows_v = (n - i0 >= 32'(T)) ? (TW+1)'(T) : (TW+1)'(n - i0);
    cols_v = (cur_m - j0 >= 32'(T)) ? (TW+1)'(T) : (TW+1)'(cur_m - j0);
  end

  // ----------------------------------------------------------- AXI masters
  logic        ra_cmd_valid, ra_cmd_ready, ra_valid, ra_ready;
  logic [7:0]  ra_data;
  logic        rb_cmd_valid, rb_cmd_ready, rb_valid, rb_ready;
  logic [7:0]  rb_data;
  logic        wc_cmd_valid, wc_cmd_ready, wc_valid, wc_ready, wc_busy;
  logic [31:0] wc_data;
  logic [ADDR_W-1:0] rb_addr, wc_addr;

  axi_byte_reader #(.ADDR_W(ADDR_W), .DATA_W(AXI_DATA_W), .MAX_BURST(MAX_BURST)) u_rd_a (
    .clk, .rst_n,
    .cmd_valid(ra_cmd_valid), .cmd_ready(ra_cmd_ready), .cmd_addr(a_base), .cmd_len(n * k),
    .out_valid(ra_valid), .out_ready(ra_ready), .out_data(ra_data),
    .m_axi_arvalid(m_axi_gmemA_arvalid), .m_axi_arready(m_axi_gmemA_arready),
    .m_axi_araddr (m_axi_gmemA_araddr),  .m_axi_arlen  (m_axi_gmemA_arlen),
    .m_axi_arsize (m_axi_gmemA_arsize),  .m_axi_arburst(m_axi_gmemA_arburst),
    .m_axi_rvalid (m_axi_gmemA_rvalid),  .m_axi_rready (m_axi_gmemA_rready),
    .m_axi_rdata  (m_axi_gmemA_rdata),   .m_axi_rresp  (m_axi_gmemA_rresp),
    .m_axi_rlast  (m_axi_gmemA_rlast)
  );

  assign rb_addr = b_base + ADDR_W'(row) * ADDR_W'(m) + ADDR_W'(j_blk);

  axi_byte_reader #(.ADDR_W(ADDR_W), .DATA_W(AXI_DATA_W), .MAX_BURST(MAX_BURST)) u_rd_b (
    .clk, .rst_n,
    .cmd_valid(rb_cmd_valid), .cmd_ready(rb_cmd_ready), .cmd_addr(rb_addr), .cmd_len(cur_m),
    .out_valid(rb_valid), .out_ready(rb_ready), .out_data(rb_data),
    .m_axi_arvalid(m_axi_gmemB_arvalid), .m_axi_arready(m_axi_gmemB_arready),
    .m_axi_araddr (m_axi_gmemB_araddr),  .m_axi_arlen  (m_axi_gmemB_arlen),
    .m_axi_arsize (m_axi_gmemB_arsize),  .m_axi_arburst(m_axi_gmemB_arburst),
    .m_axi_rvalid (m_axi_gmemB_rvalid),  .m_axi_rready (m_axi_gmemB_rready),
    .m_axi_rdata  (m_axi_gmemB_rdata),   .m_axi_rresp  (m_axi_gmemB_rresp),
    .m_axi_rlast  (m_axi_gmemB_rlast)
  );

  assign wc_addr = c_base + ((ADDR_W'(i0 + row) * ADDR_W'(m) + ADDR_W'(j_blk + j0)) << 2);

  axi_word_writer #(.ADDR_W(ADDR_W), .DATA_W(AXI_DATA_W), .MAX_BURST(MAX_BURST)) u_wr_c (
    .clk, .rst_n,
    .cmd_valid(wc_cmd_valid), .cmd_ready(wc_cmd_ready), .cmd_addr(wc_addr),
    .cmd_words(32'(cols_v)),
    .in_valid(wc_valid), .in_ready(wc_ready), .in_data(wc_data), .busy(wc_busy),
    .m_axi_awvalid(m_axi_gmemC_awvalid), .m_axi_awready(m_axi_gmemC_awready),
    .m_axi_awaddr (m_axi_gmemC_awaddr),  .m_axi_awlen  (m_axi_gmemC_awlen),
    .m_axi_awsize (m_axi_gmemC_awsize),  .m_axi_awburst(m_axi_gmemC_awburst),
    .m_axi_wvalid (m_axi_gmemC_wvalid),  .m_axi_wready (m_axi_gmemC_wready),
    .m_axi_wdata  (m_axi_gmemC_wdata),   .m_axi_wstrb  (m_axi_gmemC_wstrb),
    .m_axi_wlast  (m_axi_gmemC_wlast),
    .m_axi_bvalid (m_axi_gmemC_bvalid),  .m_axi_bready (m_axi_gmemC_bready),
    .m_axi_bresp  (m_axi_gmemC_bresp)
  );

  assign ra_cmd_valid = (state == S_A_CMD);
  assign ra_ready     = (state == S_A_LOAD);
  assign rb_cmd_valid = (state == S_B_CMD);
  assign rb_ready     = (state == S_B_LOAD);
  assign wc_cmd_valid = (state == S_WR_CMD);
  assign wc_valid     = (state == S_WR_DATA);

  // -------------------------------------------------------- on-chip buffers
  logic               a_rd_en, b_rd_en;
  logic [T-1:0][7:0]  a_word, b_word;

  tile_buffer #(.ROWS(NMAX), .COLS(KMAX), .T(T)) u_a_buf (
    .clk,
    .wr_en  (ra_valid && ra_ready),
    .wr_row (NRW'(row)),
    .wr_col (KRW'(col)),
    .wr_data(ra_data),
    .rd_en  (a_rd_en),
    .rd_row (NRW'(i0 + 32'(ld_cnt))),
    .rd_word($clog2(AWPR)'(k0 >> TW)),
    .rd_data(a_word)
  );

  tile_buffer #(.ROWS(KMAX), .COLS(BM), .T(T)) u_b_buf (
    .clk,
    .wr_en  (rb_valid && rb_ready),
    .wr_row (KRW'(row)),
    .wr_col (BCW'(col)),
    .wr_data(rb_data),
    .rd_en  (b_rd_en),
    .rd_row (KRW'(k0 + 32'(ld_cnt))),
    .rd_word($clog2(BWPR)'(j0 >> TW)),
    .rd_data(b_word)
  );

  // ------------------------------------------ tile loads with boundary checks
  // Masks are computed with the read address and applied one clock later,
  // when the buffer data arrives.
  logic              ld_en_q;
  logic [TW-1:0]     ld_idx_q;
  logic [T-1:0]      a_mask, b_mask, a_mask_q, b_mask_q;
  logic [T-1:0][7:0] a_ld, b_ld;

  assign a_rd_en = (state == S_KLOAD) && (ld_cnt < (TW+1)'(T));
  assign b_rd_en = a_rd_en;

  always_comb begin
    for (int e = 0; e < T; e++) begin
      // A row i0+ld_cnt, element k0+e ; B row k0+ld_cnt, element j0+e
      a_mask[e] = (i0 + 32'(ld_cnt) < n) && (k0 + 32'(e) < k);
      b_mask[e] = (k0 + 32'(ld_cnt) < k) && (j0 + 32'(e) < cur_m);
    end
    for (int e = 0; e < T; e++) begin
      a_ld[e] = a_mask_q[e] ? a_word[e] : 8'd0;
      b_ld[e] = b_mask_q[e] ? b_word[e] : 8'd0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_en_q  <= 1'b0;
      ld_idx_q <= '0;
      a_mask_q <= '0;
      b_mask_q <= '0;
    end else begin
      ld_en_q  <= a_rd_en;
      ld_idx_q <= TW'(ld_cnt);
      a_mask_q <= a_mask;
      b_mask_q <= b_mask;
    end
  end

  // ------------------------------------------------------------ MAC array
  logic                           arr_clear, arr_step;
  logic [T-1:0][T-1:0][ACC_W-1:0] local_c;

  assign arr_clear = (state == S_TILE);
  assign arr_step  = (state == S_COMP);

  mac_array #(.T(T), .ACC_W(ACC_W)) u_array (
    .clk, .rst_n,
    .clear (arr_clear),
    .ld_en (ld_en_q),
    .ld_idx(ld_idx_q),
    .ld_a  (a_ld),
    .ld_b  (b_ld),
    .step  (arr_step),
    .c_out (local_c)
  );

  assign wc_data = local_c[TW'(row)][TW'(col)];

  // ------------------------------------------------ loop-nest controller
  assign ap_idle  = (state == S_IDLE);
  assign ap_done  = (state == S_DONE);
  assign ap_ready = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      a_base   <= '0;
      b_base   <= '0;
      c_base   <= '0;
      n        <= '0;
      k        <= '0;
      m        <= '0;
      j_blk    <= '0;
      cur_m    <= '0;
      i0       <= '0;
      j0       <= '0;
      k0       <= '0;
      row      <= '0;
      col      <= '0;
      ld_cnt   <= '0;
      step_cnt <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (ap_start) begin
          a_base <= reg_a;
          b_base <= reg_b;
          c_base <= reg_c;
          n      <= reg_n;
          k      <= reg_k;
          m      <= reg_m;
          j_blk  <= '0;
          row    <= '0;
          col    <= '0;
          if (reg_n == 0 || reg_k == 0 || reg_m == 0) state <= S_DONE;
          else state <= reg_upd ? S_A_CMD : S_BLK;
        end
        // Copy A into the persistent buffer (only when update_A is set).
        S_A_CMD: if (ra_cmd_ready) state <= S_A_LOAD;
        S_A_LOAD: if (ra_valid) begin
          if (col == k - 1) begin
            col <= '0;
            row <= row + 1;
            if (row == n - 1) state <= S_BLK;
          end else begin
            col <= col + 1;
          end
        end
        // Next column block of B.
        S_BLK: begin
          cur_m <= (m - j_blk >= 32'(BM)) ? 32'(BM) : m - j_blk;
          row   <= '0;
          col   <= '0;
          state <= S_B_CMD;
        end
        S_B_CMD: if (rb_cmd_ready) state <= S_B_LOAD;
        S_B_LOAD: if (rb_valid) begin
          if (col == cur_m - 1) begin
            col <= '0;
            row <= row + 1;
            if (row == k - 1) begin
              i0    <= '0;
              j0    <= '0;
              state <= S_TILE;
            end else begin
              state <= S_B_CMD;
            end
          end else begin
            col <= col + 1;
          end
        end
        // One output tile: clear localC, then load/compute per k0.
        S_TILE: begin
          k0     <= '0;
          ld_cnt <= '0;
          state  <= S_KLOAD;
        end
        S_KLOAD: begin
          if (ld_cnt == (TW+1)'(T)) begin
            step_cnt <= '0;
            state    <= S_COMP;
          end else begin
            ld_cnt <= ld_cnt + 1'b1;
          end
        end
        S_COMP: begin
          step_cnt <= step_cnt + 1'b1;
          if (step_cnt == k_len - 1'b1) begin
            ld_cnt <= '0;
            if (k0 + 32'(T) < k) begin
              k0    <= k0 + 32'(T);
              state <= S_KLOAD;
            end else begin
              row   <= '0;
              col   <= '0;
              state <= S_WR_CMD;
            end
          end
        end
        // Write the valid rows of localC to C, one burst command per row.
        S_WR_CMD: if (wc_cmd_ready) state <= S_WR_DATA;
        S_WR_DATA: if (wc_ready) begin
          if (col == 32'(cols_v) - 1) begin
            col   <= '0;
            state <= S_WR_WAIT;
          end else begin
            col <= col + 1;
          end
        end
        S_WR_WAIT: if (!wc_busy) begin
          if (row == 32'(rows_v) - 1) begin
            state <= S_NEXT;
          end else begin
            row   <= row + 1;
            state <= S_WR_CMD;
          end
        end
        // Advance j0, then i0, then the column block.
        S_NEXT: begin
          if (j0 + 32'(T) < cur_m) begin
            j0    <= j0 + 32'(T);
            state <= S_TILE;
          end else if (i0 + 32'(T) < n) begin
            j0    <= '0;
            i0    <= i0 + 32'(T);
            state <= S_TILE;
          end else if (j_blk + 32'(BM) < m) begin
            j_blk <= j_blk + 32'(BM);
            state <= S_BLK;
          end else begin
            state <= S_DONE;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (state == S_A_LOAD) |-> (n <= 32'(NMAX)))
    else $error("mmult_accel: N exceeds the A buffer");

endmodule
