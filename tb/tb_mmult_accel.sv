// tb_mmult_accel: end-to-end test of the accelerator at its default sizes
// (32x32 array, 256-column B blocks, A buffer 64x768) on small matrices.
// The host side drives the AXI4-Lite slave as a driver would; three memory
// models with random wait states stand for the DDR buffers of A, B and C.
// Runs: (1) N=40, K=70, M=300 with update_A set, B at an unaligned address,
// completion by interrupt: partial tiles in every dimension and two column
// blocks, the second one partial; (2) a new B with update_A clear, which
// must reuse the A already on chip without any read on the A port;
// (3) N=64, K=96, M=64, full tiles, completion by polling; (4) M=0, which
// must finish without memory traffic. Every element of C is compared with
// a product computed here. The II=1 claim is checked by counting array
// steps: each output tile must take exactly K steps. Each mechanism is
// counted and a mechanism that never occurred counts as a failure.
module tb_mmult_accel;
  localparam int unsigned A_BYTES = 16384;
  localparam int unsigned B_BYTES = 65536;
  localparam int unsigned C_BYTES = 262144;
  localparam int unsigned STALL   = 20;

  logic ap_clk = 1'b0, ap_rst_n = 1'b0;
  logic clk;
  assign clk = ap_clk;
  always #5 ap_clk = ~ap_clk;

  logic        s_axi_control_awvalid = 0, s_axi_control_awready;
  logic [6:0]  s_axi_control_awaddr = '0, s_axi_control_araddr = '0;
  logic        s_axi_control_wvalid = 0, s_axi_control_wready;
  logic [31:0] s_axi_control_wdata = '0, s_axi_control_rdata;
  logic [3:0]  s_axi_control_wstrb = '0;
  logic        s_axi_control_bvalid, s_axi_control_bready = 0;
  logic        s_axi_control_arvalid = 0, s_axi_control_arready;
  logic        s_axi_control_rvalid, s_axi_control_rready = 0;
  logic [1:0]  s_axi_control_bresp, s_axi_control_rresp;
  logic        interrupt;

  logic        m_axi_gmemA_arvalid, m_axi_gmemA_arready, m_axi_gmemA_rvalid, m_axi_gmemA_rready, m_axi_gmemA_rlast;
  logic [63:0] m_axi_gmemA_araddr;
  logic [7:0]  m_axi_gmemA_arlen;
  logic [2:0]  m_axi_gmemA_arsize;
  logic [1:0]  m_axi_gmemA_arburst, m_axi_gmemA_rresp;
  logic [31:0] m_axi_gmemA_rdata;
  logic        m_axi_gmemB_arvalid, m_axi_gmemB_arready, m_axi_gmemB_rvalid, m_axi_gmemB_rready, m_axi_gmemB_rlast;
  logic [63:0] m_axi_gmemB_araddr;
  logic [7:0]  m_axi_gmemB_arlen;
  logic [2:0]  m_axi_gmemB_arsize;
  logic [1:0]  m_axi_gmemB_arburst, m_axi_gmemB_rresp;
  logic [31:0] m_axi_gmemB_rdata;
  logic        m_axi_gmemC_awvalid, m_axi_gmemC_awready, m_axi_gmemC_wvalid, m_axi_gmemC_wready;
  logic        m_axi_gmemC_wlast, m_axi_gmemC_bvalid, m_axi_gmemC_bready;
  logic [63:0] m_axi_gmemC_awaddr;
  logic [7:0]  m_axi_gmemC_awlen;
  logic [2:0]  m_axi_gmemC_awsize;
  logic [1:0]  m_axi_gmemC_awburst, m_axi_gmemC_bresp;
  logic [31:0] m_axi_gmemC_wdata;
  logic [3:0]  m_axi_gmemC_wstrb;

  mmult_accel dut (.*);

  localparam longint unsigned A_BASE = 64'h1000_0000;
  localparam longint unsigned B_BASE = 64'h2000_0000;
  localparam longint unsigned C_BASE = 64'h3000_0000;

  axi_mem_model #(.MEM_BYTES(A_BYTES), .BASE(A_BASE), .STALL_PCT(STALL)) u_mem_a (
    .clk, .rst_n(ap_rst_n),
    .arvalid(m_axi_gmemA_arvalid), .arready(m_axi_gmemA_arready), .araddr(m_axi_gmemA_araddr),
    .arlen(m_axi_gmemA_arlen), .arsize(m_axi_gmemA_arsize), .arburst(m_axi_gmemA_arburst),
    .rvalid(m_axi_gmemA_rvalid), .rready(m_axi_gmemA_rready), .rdata(m_axi_gmemA_rdata),
    .rresp(m_axi_gmemA_rresp), .rlast(m_axi_gmemA_rlast),
    .awvalid(1'b0), .awready(), .awaddr('0), .awlen('0), .awsize('0), .awburst('0),
    .wvalid(1'b0), .wready(), .wdata('0), .wstrb('0), .wlast(1'b0),
    .bvalid(), .bready(1'b0), .bresp());

  axi_mem_model #(.MEM_BYTES(B_BYTES), .BASE(B_BASE), .STALL_PCT(STALL)) u_mem_b (
    .clk, .rst_n(ap_rst_n),
    .arvalid(m_axi_gmemB_arvalid), .arready(m_axi_gmemB_arready), .araddr(m_axi_gmemB_araddr),
    .arlen(m_axi_gmemB_arlen), .arsize(m_axi_gmemB_arsize), .arburst(m_axi_gmemB_arburst),
    .rvalid(m_axi_gmemB_rvalid), .rready(m_axi_gmemB_rready), .rdata(m_axi_gmemB_rdata),
    .rresp(m_axi_gmemB_rresp), .rlast(m_axi_gmemB_rlast),
    .awvalid(1'b0), .awready(), .awaddr('0), .awlen('0), .awsize('0), .awburst('0),
    .wvalid(1'b0), .wready(), .wdata('0), .wstrb('0), .wlast(1'b0),
    .bvalid(), .bready(1'b0), .bresp());

  axi_mem_model #(.MEM_BYTES(C_BYTES), .BASE(C_BASE), .STALL_PCT(STALL)) u_mem_c (
    .clk, .rst_n(ap_rst_n),
    .arvalid(1'b0), .arready(), .araddr('0), .arlen('0), .arsize('0), .arburst('0),
    .rvalid(), .rready(1'b0), .rdata(), .rresp(), .rlast(),
    .awvalid(m_axi_gmemC_awvalid), .awready(m_axi_gmemC_awready), .awaddr(m_axi_gmemC_awaddr),
    .awlen(m_axi_gmemC_awlen), .awsize(m_axi_gmemC_awsize), .awburst(m_axi_gmemC_awburst),
    .wvalid(m_axi_gmemC_wvalid), .wready(m_axi_gmemC_wready), .wdata(m_axi_gmemC_wdata),
    .wstrb(m_axi_gmemC_wstrb), .wlast(m_axi_gmemC_wlast),
    .bvalid(m_axi_gmemC_bvalid), .bready(m_axi_gmemC_bready), .bresp(m_axi_gmemC_bresp));

  int checks = 0, failures = 0;
  // AXI4-Lite host tasks
  task automatic axil_write(input logic [6:0] addr, input logic [31:0] data);
    s_axi_control_awvalid <= 1'b1; s_axi_control_awaddr <= addr;
    s_axi_control_wvalid  <= 1'b1; s_axi_control_wdata  <= data; s_axi_control_wstrb <= 4'hF;
    do @(posedge clk); while (!s_axi_control_awready);
    s_axi_control_awvalid <= 1'b0; s_axi_control_wvalid <= 1'b0;
    s_axi_control_bready  <= 1'b1;
    do @(posedge clk); while (!s_axi_control_bvalid);
    s_axi_control_bready  <= 1'b0;
  endtask

  task automatic axil_read(input logic [6:0] addr, output logic [31:0] data);
    s_axi_control_arvalid <= 1'b1; s_axi_control_araddr <= addr;
    do @(posedge clk); while (!s_axi_control_arready);
    s_axi_control_arvalid <= 1'b0;
    s_axi_control_rready  <= 1'b1;
    do @(posedge clk); while (!s_axi_control_rvalid);
    data = s_axi_control_rdata;
    s_axi_control_rready  <= 1'b0;
  endtask


  // Start one run and wait for done (by interrupt if enabled, else polling).
  task automatic run_kernel(input longint a_off, input longint b_off, input longint c_off,
                            input int n, input int k, input int m, input bit upd,
                            input bit use_irq, output int cycles);
    logic [31:0] d;
    axil_write(mmult_pkg::REG_A_LO, 32'(A_BASE + a_off));
    axil_write(mmult_pkg::REG_A_HI, 32'((A_BASE + a_off) >> 32));
    axil_write(mmult_pkg::REG_B_LO, 32'(B_BASE + b_off));
    axil_write(mmult_pkg::REG_B_HI, 32'((B_BASE + b_off) >> 32));
    axil_write(mmult_pkg::REG_C_LO, 32'(C_BASE + c_off));
    axil_write(mmult_pkg::REG_C_HI, 32'((C_BASE + c_off) >> 32));
    axil_write(mmult_pkg::REG_N, 32'(n));
    axil_write(mmult_pkg::REG_K, 32'(k));
    axil_write(mmult_pkg::REG_M, 32'(m));
    axil_write(mmult_pkg::REG_UPDATE_A, {31'd0, upd});
    axil_write(mmult_pkg::REG_GIE, {31'd0, use_irq});
    axil_write(mmult_pkg::REG_IER, {31'd0, use_irq});
    axil_write(mmult_pkg::REG_AP_CTRL, 32'h1);
    if (use_irq) begin
      while (!interrupt) @(posedge clk);
      axil_write(mmult_pkg::REG_ISR, 32'h1);
      axil_read(mmult_pkg::REG_AP_CTRL, d);
    end else begin
      do axil_read(mmult_pkg::REG_AP_CTRL, d); while (!d[1]);
    end
    axil_read(mmult_pkg::REG_CYCLES, d);
    cycles = int'(d);
  endtask

  // A (n x k) and B (k x m) as signed int8, row-major, at the given offsets.
  function automatic int signed a_el(input longint a_off, input int k, input int i, input int kk);
    return int'($signed(u_mem_a.mem[a_off + longint'(i) * k + kk]));
  endfunction
  function automatic int signed b_el(input longint b_off, input int m, input int kk, input int j);
    return int'($signed(u_mem_b.mem[b_off + longint'(kk) * m + j]));
  endfunction
  function automatic logic [31:0] c_el(input longint c_off, input int m, input int i, input int j);
    longint o = c_off + (longint'(i) * m + j) * 4;
    return {u_mem_c.mem[o + 3], u_mem_c.mem[o + 2], u_mem_c.mem[o + 1], u_mem_c.mem[o]};
  endfunction

  // Compare all of C with a product computed here; returns the mismatch count.
  task automatic check_c(input string what, input longint a_off, input longint b_off,
                         input longint c_off, input int n, input int k, input int m);
    int bad = 0;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < m; j++) begin
        automatic int signed acc = 0;
        for (int kk = 0; kk < k; kk++) acc += a_el(a_off, k, i, kk) * b_el(b_off, m, kk, j);
        checks++;
        if (c_el(c_off, m, i, j) != 32'(acc)) begin
          failures++;
          if (bad++ < 5) $display("%s: C[%0d][%0d] = %0d, expected %0d", what, i, j,
                                  $signed(c_el(c_off, m, i, j)), acc);
        end
      end
  endtask

  // --------------------------------------------------------- monitors
  int steps = 0, tiles = 0, blocks = 0, partial_tiles = 0, partial_blocks = 0;
  int a_bytes_loaded = 0, irq_seen = 0;
  always_ff @(posedge clk) begin
    if (dut.arr_step) steps <= steps + 1;
    if (dut.arr_clear) begin
      tiles <= tiles + 1;
      if (dut.rows_v < 32 || dut.cols_v < 32 || dut.k % 32 != 0) partial_tiles <= partial_tiles + 1;
    end
    if (int'(dut.state) == 3) begin        // column-block start
      blocks <= blocks + 1;
      if (dut.m - dut.j_blk < 256) partial_blocks <= partial_blocks + 1;
    end
    if (dut.ra_valid && dut.ra_ready) a_bytes_loaded <= a_bytes_loaded + 1;
    if (interrupt) irq_seen <= irq_seen + 1;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic int ceil_div(input int a, input int b);
    return (a + b - 1) / b;
  endfunction

  function automatic int tiles_of(input int n, input int m);
    int t = 0;
    for (int jb = 0; jb < m; jb += 256) begin
      automatic int cm = (m - jb < 256) ? m - jb : 256;
      t += ceil_div(n, 32) * ceil_div(cm, 32);
    end
    return t;
  endfunction

  initial begin
    int cyc, s0, t0, a0, rb0, wb0, reuse_runs = 0, load_runs = 0;
    for (int i = 0; i < A_BYTES; i++) u_mem_a.mem[i] = 8'($urandom);
    for (int i = 0; i < B_BYTES; i++) u_mem_b.mem[i] = 8'($urandom);
    for (int i = 0; i < C_BYTES; i++) u_mem_c.mem[i] = 8'hCD;
    repeat (3) @(posedge clk);
    ap_rst_n <= 1;
    repeat (2) @(posedge clk);

    // (1) partial tiles everywhere, two blocks, update_A, interrupt
    s0 = steps; t0 = tiles; a0 = a_bytes_loaded;
    run_kernel(0, 3, 0, 40, 70, 300, 1'b1, 1'b1, cyc);
    check_c("run1", 0, 3, 0, 40, 70, 300);
    expect_true("run1 A loaded", a_bytes_loaded - a0 == 40 * 70);
    expect_true("run1 tiles", tiles - t0 == tiles_of(40, 300));
    expect_true("run1 steps = tiles*K", steps - s0 == tiles_of(40, 300) * 70);
    expect_true("run1 timer", cyc > (steps - s0));
    load_runs++;
    $display("run1: %0d clocks", cyc);

    // (2) reuse A: new B, update_A clear
    s0 = steps; a0 = a_bytes_loaded; rb0 = u_mem_a.rd_beats;
    run_kernel(0, 30000, 100000, 40, 70, 37, 1'b0, 1'b0, cyc);
    check_c("run2", 0, 30000, 100000, 40, 70, 37);
    expect_true("run2 no A traffic", u_mem_a.rd_beats == rb0 && a_bytes_loaded == a0);
    expect_true("run2 steps", steps - s0 == tiles_of(40, 37) * 70);
    if (u_mem_a.rd_beats == rb0) reuse_runs++;
    $display("run2: %0d clocks", cyc);

    // (3) full tiles, A at an unaligned address
    s0 = steps;
    run_kernel(5, 1000, 150000, 64, 96, 64, 1'b1, 1'b0, cyc);
    check_c("run3", 5, 1000, 150000, 64, 96, 64);
    expect_true("run3 steps", steps - s0 == tiles_of(64, 64) * 96);
    load_runs++;
    $display("run3: %0d clocks", cyc);

    // (4) empty product
    rb0 = u_mem_b.rd_beats; wb0 = u_mem_c.wr_beats;
    run_kernel(0, 0, 0, 8, 8, 0, 1'b1, 1'b0, cyc);
    expect_true("run4 no traffic", u_mem_b.rd_beats == rb0 && u_mem_c.wr_beats == wb0);

    expect_true("memory protocol", u_mem_a.errors == 0 && u_mem_b.errors == 0 && u_mem_c.wr_errors == 0);

    // mechanisms
    $display("mechanisms: A loads %0d, A reuse %0d, blocks %0d, partial blocks %0d, partial tiles %0d, interrupts %0d",
             load_runs, reuse_runs, blocks, partial_blocks, partial_tiles, irq_seen);
    expect_true("A load happened", load_runs > 0);
    expect_true("A reuse happened", reuse_runs > 0);
    expect_true("several column blocks", blocks > 3);
    expect_true("partial block happened", partial_blocks > 0);
    expect_true("partial tile happened", partial_tiles > 0);
    expect_true("interrupt happened", irq_seen > 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
