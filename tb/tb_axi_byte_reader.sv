// tb_axi_byte_reader: self-checking test of the AXI4 read master. A memory
// model with a known byte pattern answers the bursts. Random commands
// (unaligned start, lengths from 1 to 3000 bytes, ranges across 4 KiB
// boundaries) are issued with random consumer back-pressure and random
// wait states on the bus; every byte delivered is compared with the
// pattern, and the number of bytes must equal the command length. The
// memory model flags bursts across 4 KiB boundaries. A final phase without
// stalls checks the rate: 4 bytes per beat at one byte per clock, so a
// 1024-byte command must finish within 1024 + 8 * 16 clocks (16 bursts of 64
// beats with a few clocks of address overhead each).
module tb_axi_byte_reader;
  localparam int unsigned MEMB = 32768;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        cmd_valid = 0, cmd_ready;
  logic [63:0] cmd_addr = '0;
  logic [31:0] cmd_len = '0;
  logic        out_valid, out_ready;
  logic [7:0]  out_data;
  logic        arvalid, arready, rvalid, rready, rlast;
  logic [63:0] araddr;
  logic [7:0]  arlen;
  logic [2:0]  arsize;
  logic [1:0]  arburst, rresp;
  logic [31:0] rdata;
  logic        bp = 1'b0;   // back-pressure enable

  axi_byte_reader #(.ADDR_W(64), .DATA_W(32), .MAX_BURST(64)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_addr, .cmd_len,
    .out_valid, .out_ready, .out_data,
    .m_axi_arvalid(arvalid), .m_axi_arready(arready), .m_axi_araddr(araddr),
    .m_axi_arlen(arlen), .m_axi_arsize(arsize), .m_axi_arburst(arburst),
    .m_axi_rvalid(rvalid), .m_axi_rready(rready), .m_axi_rdata(rdata),
    .m_axi_rresp(rresp), .m_axi_rlast(rlast));

  axi_mem_model #(.ADDR_W(64), .DATA_W(32), .MEM_BYTES(MEMB), .BASE(64'h1000_0000),
                  .STALL_PCT(30)) u_mem (
    .clk, .rst_n,
    .arvalid, .arready, .araddr, .arlen, .arsize, .arburst,
    .rvalid, .rready, .rdata, .rresp, .rlast,
    .awvalid(1'b0), .awready(), .awaddr('0), .awlen('0), .awsize('0), .awburst('0),
    .wvalid(1'b0), .wready(), .wdata('0), .wstrb('0), .wlast(1'b0),
    .bvalid(), .bready(1'b0), .bresp());

  logic rnd;
  always_ff @(posedge clk) rnd <= ($urandom_range(99) < 35);
  assign out_ready = !(bp && rnd);

  int checks = 0, failures = 0;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] pat(input longint off);
    return 8'(off ^ (off >> 8) ^ 8'h5A);
  endfunction

  // Issue one command and check the byte stream; returns clocks taken.
  task automatic run(input longint off, input int len, output int clocks);
    int got = 0;
    int t = 0;
    cmd_valid <= 1; cmd_addr <= 64'h1000_0000 + 64'(off); cmd_len <= 32'(len);
    do @(posedge clk); while (!cmd_ready);
    cmd_valid <= 0;
    while (got < len) begin
      @(posedge clk);
      t++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != pat(off + got)) begin
          failures++;
          if (failures < 6) $display("off %0d len %0d byte %0d: %h expected %h",
                                     off, len, got, out_data, pat(off + got));
        end
        got++;
      end
      if (t > 100000) break;
    end
    // no extra byte may follow, and the reader must return to idle
    repeat (3) @(posedge clk);
    checks++;
    if (out_valid || !cmd_ready) begin
      failures++;
      $display("off %0d len %0d: reader not idle after the last byte", off, len);
    end
    clocks = t;
  endtask

  initial begin
    int clk_n;
    for (int i = 0; i < MEMB; i++) u_mem.mem[i] = pat(i);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    bp = 1'b1;
    run(0, 1, clk_n);
    run(3, 1, clk_n);
    run(1, 6, clk_n);
    run(4096 - 5, 13, clk_n);        // across a 4 KiB boundary
    run(4096 - 200, 3000, clk_n);    // long, several bursts, boundary
    for (int n = 0; n < 40; n++) run(longint'($urandom_range(20000)), int'($urandom_range(1, 700)), clk_n);
    // rate, no stalls anywhere
    bp = 1'b0;
    u_mem.stall_pct = 0;
    run(8192, 1024, clk_n);
    checks++;
    if (clk_n > 1024 + 8 * 16) begin
      failures++;
      $display("rate: 1024 bytes took %0d clocks", clk_n);
    end
    checks++;
    if (u_mem.errors != 0) begin
      failures++;
      $display("memory model saw %0d protocol errors", u_mem.errors);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
