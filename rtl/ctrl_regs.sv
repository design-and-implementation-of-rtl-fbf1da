// ctrl_regs: AXI4-Lite control slave (s_axi_control) through which the host
// sets the buffer addresses, the dimensions N, K, M and the update_A flag,
// starts the kernel and polls for, or is interrupted on, completion.
//
// Register map (byte offsets, see mmult_pkg): 0x00 control (bit 0 start,
// set by the host and cleared by the core's ready pulse; bit 1 done, cleared
// when read; bit 2 idle; bit 3 ready, cleared when read), 0x04 global
// interrupt enable, 0x08 interrupt enable (bit 0 done, bit 1 ready), 0x0C
// interrupt status (bits toggle when written with 1), 0x10/0x14 A address,
// 0x1C/0x20 B address, 0x28/0x2C C address, 0x34 N, 0x3C K, 0x44 M,
// 0x4C update_A (bit 0), 0x54 busy-cycle timer (read only; counts clocks
// from start to done of the last or current run).
//
// Timing: a write is taken when AW and W are both valid (both ready in the
// same cycle), answered with OKAY one clock later; a read is answered one
// clock after AR. interrupt = GIE & |(ISR).
//
// From the paper: an AXI4-Lite slave for configuration and start, the
// argument set (A, B, C pointers, N, K, M, update_A), AP_START, an
// interrupt output and built-in timers. Own choices: the offsets and bit
// positions, which follow the usual HLS kernel register layout.
module ctrl_regs
  import mmult_pkg::*;
#(
  parameter int unsigned ADDR_W = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [6:0]        s_axi_awaddr,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  output logic [1:0]        s_axi_bresp,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  input  logic [6:0]        s_axi_araddr,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              interrupt,
  // to/from the core
  output logic              ap_start,
  input  logic              ap_done,      // one-clock pulse
  input  logic              ap_ready,     // one-clock pulse
  input  logic              ap_idle,
  output logic [ADDR_W-1:0] a_addr,
  output logic [ADDR_W-1:0] b_addr,
  output logic [ADDR_W-1:0] c_addr,
  output logic [31:0]       dim_n,
  output logic [31:0]       dim_k,
  output logic [31:0]       dim_m,
  output logic              update_a
);
  logic        done_sticky, ready_sticky, gie;
  logic [1:0]  ier, isr;
  logic [63:0] a_q, b_q, c_q;
  logic [31:0] cycles;

  logic wr_fire, rd_fire;
  assign s_axi_awready = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_wready  = s_axi_awready;
  assign wr_fire       = s_axi_awready;
  assign s_axi_bresp   = RESP_OKAY;
  assign s_axi_arready = !s_axi_rvalid;
  assign rd_fire       = s_axi_arvalid && s_axi_arready;
  assign s_axi_rresp   = RESP_OKAY;
  assign interrupt     = gie && (isr != 2'b00);

  assign a_addr = ADDR_W'(a_q);
  assign b_addr = ADDR_W'(b_q);
  assign c_addr = ADDR_W'(c_q);

  // Byte-lane merge of a write into a 32-bit register.
  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] d,
                                        input logic [3:0] strb);
    for (int i = 0; i < 4; i++) if (strb[i]) old[8*i +: 8] = d[8*i +: 8];
    return old;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ap_start     <= 1'b0;
      done_sticky  <= 1'b0;
      ready_sticky <= 1'b0;
      gie          <= 1'b0;
      ier          <= '0;
      isr          <= '0;
      a_q          <= '0;
      b_q          <= '0;
      c_q          <= '0;
      dim_n        <= '0;
      dim_k        <= '0;
      dim_m        <= '0;
      update_a     <= 1'b0;
      cycles       <= '0;
      s_axi_bvalid <= 1'b0;
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else begin
      // core events
      if (ap_ready) ap_start <= 1'b0;
      if (ap_done)  done_sticky  <= 1'b1;
      if (ap_ready) ready_sticky <= 1'b1;
      if (ap_done  && ier[0]) isr[0] <= 1'b1;
      if (ap_ready && ier[1]) isr[1] <= 1'b1;
      if (!ap_idle) cycles <= cycles + 1'b1;

      // register writes
      if (wr_fire) begin
        unique case (s_axi_awaddr)
          REG_AP_CTRL:  if (s_axi_wstrb[0] && s_axi_wdata[0]) begin
                          ap_start <= 1'b1;
                          cycles   <= '0;
                        end
          REG_GIE:      if (s_axi_wstrb[0]) gie <= s_axi_wdata[0];
          REG_IER:      if (s_axi_wstrb[0]) ier <= s_axi_wdata[1:0];
          REG_ISR:      if (s_axi_wstrb[0]) isr <= isr ^ s_axi_wdata[1:0];
          REG_A_LO:     a_q[31:0]  <= merge(a_q[31:0],  s_axi_wdata, s_axi_wstrb);
          REG_A_HI:     a_q[63:32] <= merge(a_q[63:32], s_axi_wdata, s_axi_wstrb);
          REG_B_LO:     b_q[31:0]  <= merge(b_q[31:0],  s_axi_wdata, s_axi_wstrb);
          REG_B_HI:     b_q[63:32] <= merge(b_q[63:32], s_axi_wdata, s_axi_wstrb);
          REG_C_LO:     c_q[31:0]  <= merge(c_q[31:0],  s_axi_wdata, s_axi_wstrb);
          REG_C_HI:     c_q[63:32] <= merge(c_q[63:32], s_axi_wdata, s_axi_wstrb);
          REG_N:        dim_n <= merge(dim_n, s_axi_wdata, s_axi_wstrb);
          REG_K:        dim_k <= merge(dim_k, s_axi_wdata, s_axi_wstrb);
          REG_M:        dim_m <= merge(dim_m, s_axi_wdata, s_axi_wstrb);
          REG_UPDATE_A: if (s_axi_wstrb[0]) update_a <= s_axi_wdata[0];
          default: ;
        endcase
        s_axi_bvalid <= 1'b1;
      end else if (s_axi_bready) begin
        s_axi_bvalid <= 1'b0;
      end

      // register reads
      if (rd_fire) begin
        s_axi_rvalid <= 1'b1;
        unique case (s_axi_araddr)
          REG_AP_CTRL: begin
            s_axi_rdata <= {28'd0, ready_sticky, ap_idle, done_sticky, ap_start};
            done_sticky  <= ap_done;    // clear on read, keep an event of this cycle
            ready_sticky <= ap_ready;
          end
          REG_GIE:      s_axi_rdata <= {31'd0, gie};
          REG_IER:      s_axi_rdata <= {30'd0, ier};
          REG_ISR:      s_axi_rdata <= {30'd0, isr};
          REG_A_LO:     s_axi_rdata <= a_q[31:0];
          REG_A_HI:     s_axi_rdata <= a_q[63:32];
          REG_B_LO:     s_axi_rdata <= b_q[31:0];
          REG_B_HI:     s_axi_rdata <= b_q[63:32];
          REG_C_LO:     s_axi_rdata <= c_q[31:0];
          REG_C_HI:     s_axi_rdata <= c_q[63:32];
          REG_N:        s_axi_rdata <= dim_n;
          REG_K:        s_axi_rdata <= dim_k;
          REG_M:        s_axi_rdata <= dim_m;
          REG_UPDATE_A: s_axi_rdata <= {31'd0, update_a};
          REG_CYCLES:   s_axi_rdata <= cycles;
          default:      s_axi_rdata <= '0;
        endcase
      end else if (s_axi_rready) begin
        s_axi_rvalid <= 1'b0;
      end
    end
  end

endmodule
