// tb_ctrl_regs: self-checking test of the AXI4-Lite control slave. Checks
// that every argument register reads back what was written and drives the
// matching core output, partial-strobe writes, the start bit (set by the
// host, cleared by the core's ready pulse), done and ready being cleared by
// a read of the control register, idle reporting, interrupt enable / status
// / toggle-on-write behaviour, the busy-cycle timer and that unmapped
// addresses read zero.
module tb_ctrl_regs;
  import mmult_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        s_axi_awvalid = 0, s_axi_awready, s_axi_wvalid = 0, s_axi_wready;
  logic [6:0]  s_axi_awaddr = '0, s_axi_araddr = '0;
  logic [31:0] s_axi_wdata = '0, s_axi_rdata;
  logic [3:0]  s_axi_wstrb = '0;
  logic        s_axi_bvalid, s_axi_bready = 0, s_axi_arvalid = 0, s_axi_arready;
  logic        s_axi_rvalid, s_axi_rready = 0;
  logic [1:0]  s_axi_bresp, s_axi_rresp;
  logic        interrupt, ap_start;
  logic        ap_done = 0, ap_ready = 0, ap_idle = 1;
  logic [63:0] a_addr, b_addr, c_addr;
  logic [31:0] dim_n, dim_k, dim_m;
  logic        update_a;

  ctrl_regs #(.ADDR_W(64)) dut (.*);

  // AXI4-Lite host tasks
  task automatic axil_write(input logic [6:0] addr, input logic [31:0] data);
    s_axi_awvalid <= 1'b1; s_axi_awaddr <= addr;
    s_axi_wvalid  <= 1'b1; s_axi_wdata  <= data; s_axi_wstrb <= 4'hF;
    do @(posedge clk); while (!s_axi_awready);
    s_axi_awvalid <= 1'b0; s_axi_wvalid <= 1'b0;
    s_axi_bready  <= 1'b1;
    do @(posedge clk); while (!s_axi_bvalid);
    s_axi_bready  <= 1'b0;
  endtask

  task automatic axil_read(input logic [6:0] addr, output logic [31:0] data);
    s_axi_arvalid <= 1'b1; s_axi_araddr <= addr;
    do @(posedge clk); while (!s_axi_arready);
    s_axi_arvalid <= 1'b0;
    s_axi_rready  <= 1'b1;
    do @(posedge clk); while (!s_axi_rvalid);
    data = s_axi_rdata;
    s_axi_rready  <= 1'b0;
  endtask

  int checks = 0, failures = 0;

  task automatic expect_eq(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    axil_read(REG_AP_CTRL, d);
    expect_eq("ctrl after reset", d, 32'h4);

    axil_write(REG_A_LO, 32'h1234_5678); axil_write(REG_A_HI, 32'h0000_0008);
    axil_write(REG_B_LO, 32'h9ABC_DEF0); axil_write(REG_B_HI, 32'h0000_0009);
    axil_write(REG_C_LO, 32'h0BAD_F00D); axil_write(REG_C_HI, 32'h0000_000A);
    axil_write(REG_N, 64); axil_write(REG_K, 768); axil_write(REG_M, 3072);
    axil_write(REG_UPDATE_A, 1);
    expect_eq("a_addr", a_addr, 64'h8_1234_5678);
    expect_eq("b_addr", b_addr, 64'h9_9ABC_DEF0);
    expect_eq("c_addr", c_addr, 64'hA_0BAD_F00D);
    expect_eq("n", dim_n, 64); expect_eq("k", dim_k, 768); expect_eq("m", dim_m, 3072);
    expect_eq("update_a", update_a, 1);
    axil_read(REG_A_LO, d); expect_eq("rd A_LO", d, 32'h1234_5678);
    axil_read(REG_B_HI, d); expect_eq("rd B_HI", d, 32'h9);
    axil_read(REG_C_LO, d); expect_eq("rd C_LO", d, 32'h0BAD_F00D);
    axil_read(REG_M, d);    expect_eq("rd M", d, 3072);
    axil_read(REG_UPDATE_A, d); expect_eq("rd upd", d, 1);
    axil_read(7'h7C, d);    expect_eq("unmapped", d, 0);

    // partial strobe: only byte 1 of K
    s_axi_awvalid <= 1; s_axi_awaddr <= REG_K; s_axi_wvalid <= 1;
    s_axi_wdata <= 32'hAABB_CCDD; s_axi_wstrb <= 4'b0010;
    do @(posedge clk); while (!s_axi_awready);
    s_axi_awvalid <= 0; s_axi_wvalid <= 0; s_axi_bready <= 1;
    do @(posedge clk); while (!s_axi_bvalid);
    s_axi_bready <= 0;
    expect_eq("strobe", dim_k, 32'h0000_CC00);

    // interrupts on done
    axil_write(REG_GIE, 1);
    axil_write(REG_IER, 1);
    axil_write(REG_AP_CTRL, 1);
    @(posedge clk);
    expect_eq("ap_start", ap_start, 1);
    ap_idle <= 0;
    repeat (25) @(posedge clk);
    ap_done <= 1; ap_ready <= 1; ap_idle <= 1;
    @(posedge clk);
    ap_done <= 0; ap_ready <= 0;
    @(posedge clk);
    expect_eq("start cleared", ap_start, 0);
    expect_eq("interrupt", interrupt, 1);
    axil_read(REG_CYCLES, d);  expect_eq("timer", d, 25);
    axil_read(REG_ISR, d);     expect_eq("isr", d, 1);
    axil_read(REG_AP_CTRL, d); expect_eq("done+ready+idle", d, 32'hE);
    axil_read(REG_AP_CTRL, d); expect_eq("cleared on read", d, 32'h4);
    axil_write(REG_ISR, 1);
    expect_eq("isr toggled", interrupt, 0);
    axil_read(REG_ISR, d);     expect_eq("isr 0", d, 0);
    // ready interrupt masked by IER
    ap_ready <= 1; @(posedge clk); ap_ready <= 0; @(posedge clk);
    expect_eq("masked", interrupt, 0);
    axil_write(REG_IER, 2);
    ap_ready <= 1; @(posedge clk); ap_ready <= 0; @(posedge clk);
    expect_eq("ready irq", interrupt, 1);
    axil_write(REG_GIE, 0);
    expect_eq("gie off", interrupt, 0);
    expect_eq("bresp", s_axi_bresp, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
