// tb_mmult_accel_full: the accelerator at its default sizes on the
// DistilBERT-sized workloads:
//   Q, K and V projections: three (64 x 768) x (768 x 768) products with
//   the same activations A and three weight matrices; A is loaded by the
//   first call only (update_A set), the other two reuse it;
//   feed-forward layer (64 x 768) x (768 x 3072), 151 M multiply-adds,
//   again reusing A.
// Random int8 operands. Every element of C is compared with a
// product computed here. The memory models answer without wait states, so
// the clock counts printed are those of the accelerator itself at one
// 32-bit beat per clock on each port; they are also checked against the
// run's cycle timer and the array-step count against tiles x K.
module tb_mmult_accel_full;
  localparam int unsigned A_BYTES = 64 * 768;
  localparam int unsigned B_BYTES = 768 * 3072;
  localparam int unsigned C_BYTES = 64 * 3072 * 4;
  localparam int unsigned STALL   = 0;

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

  int steps = 0;
  always_ff @(posedge clk) if (dut.arr_step) steps <= steps + 1;

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input string name, input longint b_off, input longint c_off,
                     input int m, input bit upd);
    int cyc, s0, t0, tiles_exp;
    s0 = steps;
    t0 = int'($time / 10);
    run_kernel(0, b_off, c_off, 64, 768, m, upd, 1'b1, cyc);
    tiles_exp = 2 * (m / 32);
    check_c(name, 0, b_off, c_off, 64, 768, m);
    checks++;
    if (steps - s0 != tiles_exp * 768) begin
      failures++;
      $display("%s: %0d array steps, expected %0d", name, steps - s0, tiles_exp * 768);
    end
    checks++;
    if (cyc <= 0 || cyc > int'($time / 10) - t0) begin
      failures++;
      $display("%s: cycle timer %0d out of range", name, cyc);
    end
    $display("%s: %0d clocks (%0.2f ms at 100 MHz), %0d array steps, %0.1f MAC/clock",
             name, cyc, cyc / 1.0e5, steps - s0, 64.0 * 768 * m / cyc);
  endtask

  initial begin
    for (int i = 0; i < A_BYTES; i++) u_mem_a.mem[i] = 8'($urandom);
    for (int i = 0; i < B_BYTES; i++) u_mem_b.mem[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    ap_rst_n <= 1;
    repeat (2) @(posedge clk);
    one("Q projection 64x768x768", 0,          0,          768, 1'b1);
    one("K projection 64x768x768", 768 * 768,  64 * 768 * 4, 768, 1'b0);
    one("V projection 64x768x768", 2 * 768 * 768, 2 * 64 * 768 * 4, 768, 1'b0);
    one("FFN 64x768x3072", 0, 0, 3072, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
