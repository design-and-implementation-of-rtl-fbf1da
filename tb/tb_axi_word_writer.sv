// tb_axi_word_writer: self-checking test of the AXI4 write master. Random
// commands (word-aligned address, 1 to 700 words, some ranges across 4 KiB
// boundaries) stream words with random producer gaps into a memory model
// with random wait states. Afterwards the memory must hold exactly the words
// sent, the words around each range must be untouched, and busy must have
// stayed high until the last write response. A final phase without stalls
// checks the rate: 256 words (4 bursts of 64) within 256 + 4 * 8 clocks.
module tb_axi_word_writer;
  localparam int unsigned MEMB = 32768;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        cmd_valid = 0, cmd_ready, in_valid = 0, in_ready, busy;
  logic [63:0] cmd_addr = '0;
  logic [31:0] cmd_words = '0, in_data = '0;
  logic        awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [63:0] awaddr;
  logic [7:0]  awlen;
  logic [2:0]  awsize;
  logic [1:0]  awburst, bresp;
  logic [31:0] wdata;
  logic [3:0]  wstrb;

  axi_word_writer #(.ADDR_W(64), .DATA_W(32), .MAX_BURST(64)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_addr, .cmd_words,
    .in_valid, .in_ready, .in_data, .busy,
    .m_axi_awvalid(awvalid), .m_axi_awready(awready), .m_axi_awaddr(awaddr),
    .m_axi_awlen(awlen), .m_axi_awsize(awsize), .m_axi_awburst(awburst),
    .m_axi_wvalid(wvalid), .m_axi_wready(wready), .m_axi_wdata(wdata),
    .m_axi_wstrb(wstrb), .m_axi_wlast(wlast),
    .m_axi_bvalid(bvalid), .m_axi_bready(bready), .m_axi_bresp(bresp));

  axi_mem_model #(.ADDR_W(64), .DATA_W(32), .MEM_BYTES(MEMB), .BASE(64'h2000_0000),
                  .STALL_PCT(30)) u_mem (
    .clk, .rst_n,
    .arvalid(1'b0), .arready(), .araddr('0), .arlen('0), .arsize('0), .arburst('0),
    .rvalid(), .rready(1'b0), .rdata(), .rresp(), .rlast(),
    .awvalid, .awready, .awaddr, .awlen, .awsize, .awburst,
    .wvalid, .wready, .wdata, .wstrb, .wlast,
    .bvalid, .bready, .bresp);

  int checks = 0, failures = 0;
  int gap_pct = 30;
  int b_seen;   // write responses seen during the current command

  always_ff @(posedge clk) if (bvalid && bready) b_seen <= b_seen + 1;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] word_of(input int seed, input int i);
    return 32'(seed * 32'h9E3779B1) ^ 32'(i * 32'h01000193);
  endfunction

  task automatic run(input int woff, input int nw, input int seed, output int clocks);
    int sent = 0, t = 0, bursts = 0;
    // expected number of bursts: split at 64 beats and at 4 KiB
    for (int a = woff; a < woff + nw; ) begin
      automatic int room = (4096 - ((a * 4) % 4096)) / 4;
      automatic int len = nw - (a - woff);
      if (len > 64) len = 64;
      if (len > room) len = room;
      a += len;
      bursts++;
    end
    // guard words
    for (int i = 0; i < 4; i++) begin
      u_mem.mem[woff * 4 - 1 - i] = 8'hEE;
      u_mem.mem[(woff + nw) * 4 + i] = 8'hEE;
    end
    b_seen = 0;
    cmd_valid <= 1; cmd_addr <= 64'h2000_0000 + 64'(woff * 4); cmd_words <= 32'(nw);
    do @(posedge clk); while (!cmd_ready);
    cmd_valid <= 0;
    while (sent < nw) begin
      in_valid <= ($urandom_range(99) >= gap_pct);
      in_data  <= word_of(seed, sent);
      @(posedge clk);
      t++;
      if (in_valid && in_ready) sent++;
      // keep a word offered until it is taken
      while (in_valid && !in_ready) begin @(posedge clk); t++; if (in_ready) sent++; end
      if (t > 100000) break;
    end
    in_valid <= 0;
    while (busy) begin @(posedge clk); t++; end
    clocks = t;
    checks++;
    if (b_seen != bursts) begin
      failures++;
      $display("woff %0d nw %0d: %0d responses before idle, expected %0d", woff, nw, b_seen, bursts);
    end
    for (int i = 0; i < nw; i++) begin
      automatic logic [31:0] got = {u_mem.mem[(woff + i) * 4 + 3], u_mem.mem[(woff + i) * 4 + 2],
                                    u_mem.mem[(woff + i) * 4 + 1], u_mem.mem[(woff + i) * 4]};
      checks++;
      if (got != word_of(seed, i)) begin
        failures++;
        if (failures < 6) $display("woff %0d word %0d: %h expected %h", woff, i, got, word_of(seed, i));
      end
    end
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (u_mem.mem[woff * 4 - 1 - i] != 8'hEE || u_mem.mem[(woff + nw) * 4 + i] != 8'hEE) begin
        failures++;
        $display("woff %0d nw %0d: write outside the range", woff, nw);
      end
    end
  endtask

  initial begin
    int clk_n;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run(16, 1, 1, clk_n);
    run(1024 - 3, 10, 2, clk_n);      // across 4 KiB
    run(2000, 700, 3, clk_n);
    for (int n = 0; n < 30; n++)
      run(int'($urandom_range(8, 7000)), int'($urandom_range(1, 300)), n + 10, clk_n);
    gap_pct = 0;
    u_mem.stall_pct = 0;
    run(4096, 256, 99, clk_n);
    checks++;
    if (clk_n > 256 + 4 * 8) begin
      failures++;
      $display("rate: 256 words took %0d clocks", clk_n);
    end
    checks++;
    if (u_mem.wr_errors != 0) begin
      failures++;
      $display("memory model saw %0d protocol errors", u_mem.wr_errors);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
