// axi_byte_reader: AXI4 read master that fetches a byte range from external
// memory and hands it on as a stream of int8 elements, one per clock.
//
// A command (cmd_addr, cmd_len bytes) is split into INCR bursts of at most
// MAX_BURST beats that never cross a 4 KiB boundary; the first beat is read
// from the aligned address below cmd_addr and its leading bytes are dropped.
// One burst is outstanding at a time. Beats are held in a one-beat buffer and
// unpacked lowest byte first; the buffer is refilled in the cycle its last
// byte leaves, so a DATA_W-bit beat costs DATA_W/8 clocks when the consumer
// is always ready. The accelerator uses one instance per operand port
// (gmemA for A, gmemB for B).
//
// Interface: cmd_valid/cmd_ready (cmd_ready only while idle), out_valid/
// out_ready/out_data byte stream that ends after exactly cmd_len bytes,
// and the AR/R channels of an AXI4 master (read-only port).
//
// From the paper: one AXI4 master per input matrix and burst transfers.
// Own choices: the bus width, burst length, element-serial output and a
// single outstanding burst. Read responses other than OKAY are not checked.
module axi_byte_reader #(
  parameter int unsigned ADDR_W    = 64,
  parameter int unsigned DATA_W    = 32,
  parameter int unsigned MAX_BURST = 64,
  parameter int unsigned LEN_W     = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  // command
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  logic [ADDR_W-1:0]   cmd_addr,
  input  logic [LEN_W-1:0]    cmd_len,
  // element stream
  output logic                out_valid,
  input  logic                out_ready,
  output logic [7:0]          out_data,
  // AXI4 read address channel
  output logic                m_axi_arvalid,
  input  logic                m_axi_arready,
  output logic [ADDR_W-1:0]   m_axi_araddr,
  output logic [7:0]          m_axi_arlen,
  output logic [2:0]          m_axi_arsize,
  output logic [1:0]          m_axi_arburst,
  // AXI4 read data channel
  input  logic                m_axi_rvalid,
  output logic                m_axi_rready,
  input  logic [DATA_W-1:0]   m_axi_rdata,
  input  logic [1:0]          m_axi_rresp,
  input  logic                m_axi_rlast
);
  localparam int unsigned NB  = DATA_W / 8;          // bytes per beat
  localparam int unsigned OFW = $clog2(NB);          // byte-offset bits

  // Request side: beats still to be requested, next beat address.
  logic [LEN_W-1:0]  beats_left;
  logic [ADDR_W-1:0] next_addr;
  logic              burst_open;                     // AR sent, rlast not yet seen
  // Data side: bytes still to deliver, beat buffer.
  logic [LEN_W-1:0]  bytes_left;
  logic [DATA_W-1:0] beat;
  logic              beat_valid;
  logic [OFW-1:0]    lane;
  logic [OFW-1:0]    first_lane;
  logic              first_beat;

  logic [LEN_W-1:0]  burst_beats;
  logic [12:0]       to_4k;

  // Beats of the next burst: limited by MAX_BURST and the 4 KiB boundary.
  always_comb begin
    to_4k       = 13'(13'h1000 - {1'b0, next_addr[11:0]}) >> OFW;
    burst_beats = beats_left;
    if (burst_beats > LEN_W'(MAX_BURST)) burst_beats = LEN_W'(MAX_BURST);
    if (burst_beats > LEN_W'(to_4k))     burst_beats = LEN_W'(to_4k);
  end

  assign cmd_ready     = (bytes_left == '0) && !burst_open && (beats_left == '0);
  assign m_axi_arvalid = (beats_left != '0) && !burst_open;
  assign m_axi_araddr  = next_addr;
  assign m_axi_arlen   = 8'(burst_beats - 1);
  assign m_axi_arsize  = 3'(OFW);
  assign m_axi_arburst = mmult_pkg::BURST_INCR;

  logic out_fire, beat_done;
  assign out_valid = beat_valid;
  assign out_data  = beat[8*lane +: 8];
  assign out_fire  = out_valid && out_ready;
  // The buffered beat is used up with this byte (end of beat or of command).
  assign beat_done = out_fire && ((lane == OFW'(NB - 1)) || (bytes_left == LEN_W'(1)));
  assign m_axi_rready = !beat_valid || beat_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beats_left <= '0;
      next_addr  <= '0;
      burst_open <= 1'b0;
      bytes_left <= '0;
      beat       <= '0;
      beat_valid <= 1'b0;
      lane       <= '0;
      first_lane <= '0;
      first_beat <= 1'b0;
    end else begin
      if (cmd_valid && cmd_ready) begin
        next_addr  <= {cmd_addr[ADDR_W-1:OFW], OFW'(0)};
        beats_left <= LEN_W'((LEN_W'(cmd_addr[OFW-1:0]) + cmd_len + LEN_W'(NB - 1)) >> OFW);
        bytes_left <= cmd_len;
        first_lane <= cmd_addr[OFW-1:0];
        first_beat <= 1'b1;
      end
      if (m_axi_arvalid && m_axi_arready) begin
        burst_open <= 1'b1;
        beats_left <= beats_left - burst_beats;
        next_addr  <= next_addr + ADDR_W'(burst_beats << OFW);
      end
      if (m_axi_rvalid && m_axi_rready && m_axi_rlast) burst_open <= 1'b0;

      if (out_fire) begin
        bytes_left <= bytes_left - 1'b1;
        lane       <= lane + 1'b1;
      end
      if (m_axi_rvalid && m_axi_rready) begin
        beat       <= m_axi_rdata;
        beat_valid <= 1'b1;
        lane       <= first_beat ? first_lane : '0;
        first_beat <= 1'b0;
      end else if (beat_done) begin
        beat_valid <= 1'b0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   m_axi_arvalid && !m_axi_arready |=> $stable(m_axi_araddr) && $stable(m_axi_arlen))
    else $error("axi_byte_reader: AR changed while waiting for arready");

endmodule
