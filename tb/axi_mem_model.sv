// axi_mem_model: behavioural model of external DDR memory behind an AXI4
// slave port, for simulation only (not synthesizable). It serves INCR read
// bursts on AR/R and INCR write bursts on AW/W/B, one burst at a time per
// direction, and can insert random wait states (STALL_PCT percent of cycles
// with ready or valid held low). Byte address a maps to mem[a - BASE].
// It also checks the AXI rules the masters must keep: no burst crosses a
// 4 KiB boundary, wlast marks the last beat, and counts bursts and beats so
// that testbenches can check traffic.
module axi_mem_model #(
  parameter int unsigned ADDR_W    = 64,
  parameter int unsigned DATA_W    = 32,
  parameter int unsigned MEM_BYTES = 65536,
  parameter longint unsigned BASE  = 0,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                arvalid,
  output logic                arready,
  input  logic [ADDR_W-1:0]   araddr,
  input  logic [7:0]          arlen,
  input  logic [2:0]          arsize,
  input  logic [1:0]          arburst,
  output logic                rvalid,
  input  logic                rready,
  output logic [DATA_W-1:0]   rdata,
  output logic [1:0]          rresp,
  output logic                rlast,
  input  logic                awvalid,
  output logic                awready,
  input  logic [ADDR_W-1:0]   awaddr,
  input  logic [7:0]          awlen,
  input  logic [2:0]          awsize,
  input  logic [1:0]          awburst,
  input  logic                wvalid,
  output logic                wready,
  input  logic [DATA_W-1:0]   wdata,
  input  logic [DATA_W/8-1:0] wstrb,
  input  logic                wlast,
  output logic                bvalid,
  input  logic                bready,
  output logic [1:0]          bresp
);
  localparam int unsigned NB = DATA_W / 8;

  logic [7:0] mem [MEM_BYTES];
  int unsigned stall_pct = STALL_PCT;   // may be changed by a testbench

  int unsigned rd_bursts, rd_beats, wr_bursts, wr_beats, errors, wr_errors, split_4k;

  // read side
  logic              rd_busy;
  logic [ADDR_W-1:0] rd_addr;
  logic [8:0]        rd_left;
  logic              stall_r, stall_w, stall_a;

  function automatic logic [DATA_W-1:0] fetch(input logic [ADDR_W-1:0] a);
    logic [DATA_W-1:0] d;
    for (int i = 0; i < NB; i++) begin
      longint unsigned off = longint'(a) + i - BASE;
      d[8*i +: 8] = (off < MEM_BYTES) ? mem[off] : 8'hxx;
    end
    return d;
  endfunction

  always_ff @(posedge clk) begin
    stall_r <= ($urandom_range(99) < stall_pct);
    stall_w <= ($urandom_range(99) < stall_pct);
    stall_a <= ($urandom_range(99) < stall_pct);
  end

  assign arready = rst_n && !rd_busy && !stall_a;
  assign rvalid  = rd_busy && !stall_r;
  assign rdata   = fetch(rd_addr);
  assign rresp   = 2'b00;
  assign rlast   = (rd_left == 9'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_busy <= 1'b0;
      rd_addr <= '0;
      rd_left <= '0;
      rd_bursts <= 0; rd_beats <= 0; errors <= 0;
    end else begin
      if (arvalid && arready) begin
        if (arburst != 2'b01 || arsize != 3'($clog2(NB)) || araddr % NB != 0) begin
          errors <= errors + 1;
          $display("axi_mem_model error: unsupported AR %h len %0d size %0d", araddr, arlen, arsize);
        end
        if ((araddr & 64'hFFF) + (ADDR_W'(arlen) + 1) * NB > 64'h1000) begin
          errors <= errors + 1;
          $display("axi_mem_model error: read burst crosses 4 KiB at %h", araddr);
        end
        rd_busy <= 1'b1;
        rd_addr <= araddr;
        rd_left <= 9'(arlen) + 9'd1;
        rd_bursts <= rd_bursts + 1;
      end
      if (rvalid && rready) begin
        rd_addr  <= rd_addr + NB;
        rd_left  <= rd_left - 1'b1;
        rd_beats <= rd_beats + 1;
        if (rd_left == 9'd1) rd_busy <= 1'b0;
      end
    end
  end

  // write side
  logic              wr_busy, wr_resp;
  logic [ADDR_W-1:0] wr_addr;
  logic [8:0]        wr_left;

  assign awready = rst_n && !wr_busy && !wr_resp && !stall_a;
  assign wready  = wr_busy && !stall_w;
  assign bvalid  = wr_resp;
  assign bresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_busy <= 1'b0;
      wr_resp <= 1'b0;
      wr_addr <= '0;
      wr_left <= '0;
      wr_bursts <= 0; wr_beats <= 0; split_4k <= 0; wr_errors <= 0;
    end else begin
      if (awvalid && awready) begin
        if ((awaddr & 64'hFFF) + (ADDR_W'(awlen) + 1) * NB > 64'h1000) begin
          wr_errors <= wr_errors + 1;
          $display("axi_mem_model error: write burst crosses 4 KiB at %h", awaddr);
        end
        if (((awaddr + (ADDR_W'(awlen) + 1) * NB) & 64'hFFF) == 0) split_4k <= split_4k + 1;
        wr_busy <= 1'b1;
        wr_addr <= awaddr;
        wr_left <= 9'(awlen) + 9'd1;
        wr_bursts <= wr_bursts + 1;
      end
      if (wvalid && wready) begin
        for (int i = 0; i < NB; i++) begin
          if (wstrb[i] && (longint'(wr_addr) + i - BASE) < MEM_BYTES)
            mem[longint'(wr_addr) + i - BASE] <= wdata[8*i +: 8];
        end
        if (wlast != (wr_left == 9'd1)) begin
          wr_errors <= wr_errors + 1;
          $display("axi_mem_model error: wlast misplaced");
        end
        wr_addr  <= wr_addr + NB;
        wr_left  <= wr_left - 1'b1;
        wr_beats <= wr_beats + 1;
        if (wr_left == 9'd1) begin
          wr_busy <= 1'b0;
          wr_resp <= 1'b1;
        end
      end
      if (bvalid && bready) wr_resp <= 1'b0;
    end
  end

endmodule
