// axi_word_writer: AXI4 write master that stores a stream of int32 result
// words at consecutive addresses in external memory (the gmemC port).
//
// A command (cmd_addr, word-aligned; cmd_words) is split into INCR bursts of
// at most MAX_BURST beats that never cross a 4 KiB boundary. For each burst
// the writer sends AW, then passes cmd_words data words from the in_ stream
// to the W channel (one word per beat, all byte strobes set, wlast on the
// last beat of the burst), then waits for the B response before the next
// burst. busy stays high from the command until the final response, so a
// caller that waits for !busy knows the data has reached memory.
//
// Interface: cmd_valid/cmd_ready (ready only while idle), in_valid/in_ready/
// in_data word stream, busy, and the AW/W/B channels of an AXI4 master
// (write-only port).
//
// From the paper: a dedicated AXI4 master for C and burst transfers. Own
// choices: DATA_W = 32 (one int32 per beat), burst length, one burst in
// flight. Write responses other than OKAY are not checked.
module axi_word_writer #(
  parameter int unsigned ADDR_W    = 64,
  parameter int unsigned DATA_W    = 32,
  parameter int unsigned MAX_BURST = 64,
  parameter int unsigned LEN_W     = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  logic [ADDR_W-1:0]     cmd_addr,
  input  logic [LEN_W-1:0]      cmd_words,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [DATA_W-1:0]     in_data,
  output logic                  busy,
  // AXI4 write address channel
  output logic                  m_axi_awvalid,
  input  logic                  m_axi_awready,
  output logic [ADDR_W-1:0]     m_axi_awaddr,
  output logic [7:0]            m_axi_awlen,
  output logic [2:0]            m_axi_awsize,
  output logic [1:0]            m_axi_awburst,
  // AXI4 write data channel
  output logic                  m_axi_wvalid,
  input  logic                  m_axi_wready,
  output logic [DATA_W-1:0]     m_axi_wdata,
  output logic [DATA_W/8-1:0]   m_axi_wstrb,
  output logic                  m_axi_wlast,
  // AXI4 write response channel
  input  logic                  m_axi_bvalid,
  output logic                  m_axi_bready,
  input  logic [1:0]            m_axi_bresp
);
  localparam int unsigned NB  = DATA_W / 8;
  localparam int unsigned OFW = $clog2(NB);

  typedef enum logic [1:0] {W_IDLE, W_ADDR, W_DATA, W_RESP} wstate_t;
  wstate_t state;

  logic [LEN_W-1:0]  words_left;      // words not yet covered by an AW
  logic [ADDR_W-1:0] next_addr;
  logic [8:0]        beats_left;      // beats left in the current burst
  logic [LEN_W-1:0]  burst_beats;
  logic [12:0]       to_4k;

  always_comb begin
    to_4k       = 13'(13'h1000 - {1'b0, next_addr[11:0]}) >> OFW;
    burst_beats = words_left;
    if (burst_beats > LEN_W'(MAX_BURST)) burst_beats = LEN_W'(MAX_BURST);
    if (burst_beats > LEN_W'(to_4k))     burst_beats = LEN_W'(to_4k);
  end

  assign cmd_ready     = (state == W_IDLE);
  assign busy          = (state != W_IDLE);
  assign m_axi_awvalid = (state == W_ADDR);
  assign m_axi_awaddr  = next_addr;
  assign m_axi_awlen   = 8'(burst_beats - 1);
  assign m_axi_awsize  = 3'(OFW);
  assign m_axi_awburst = mmult_pkg::BURST_INCR;
  assign m_axi_wvalid  = (state == W_DATA) && in_valid;
  assign m_axi_wdata   = in_data;
  assign m_axi_wstrb   = '1;
  assign m_axi_wlast   = (beats_left == 9'd1);
  assign in_ready      = (state == W_DATA) && m_axi_wready;
  assign m_axi_bready  = (state == W_RESP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= W_IDLE;
      words_left <= '0;
      next_addr  <= '0;
      beats_left <= '0;
    end else begin
      unique case (state)
        W_IDLE: if (cmd_valid && cmd_words != '0) begin
          next_addr  <= cmd_addr;
          words_left <= cmd_words;
          state      <= W_ADDR;
        end
        W_ADDR: if (m_axi_awready) begin
          beats_left <= 9'(burst_beats);
          words_left <= words_left - burst_beats;
          next_addr  <= next_addr + ADDR_W'(burst_beats << OFW);
          state      <= W_DATA;
        end
        W_DATA: if (m_axi_wvalid && m_axi_wready) begin
          beats_left <= beats_left - 1'b1;
          if (beats_left == 9'd1) state <= W_RESP;
        end
        W_RESP: if (m_axi_bvalid) state <= (words_left == '0) ? W_IDLE : W_ADDR;
        default: state <= W_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   m_axi_wvalid && !m_axi_wready |=> m_axi_wvalid && $stable(m_axi_wdata))
    else $error("axi_word_writer: W beat withdrawn before wready");

endmodule
