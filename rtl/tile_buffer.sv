// tile_buffer: on-chip block RAM for one operand matrix, written one int8
// element per cycle and read one tile row (T elements) per cycle.
//
// The accelerator keeps two of these: the persistent A buffer (ROWS = N_MAX
// rows of COLS = K_MAX elements, kept between calls so that A can be reused)
// and the B block buffer (ROWS = K_MAX rows of COLS = BLOCK_M elements,
// refilled for every column block). Element (row, col) lives in word
// row*(COLS/T) + col/T, byte lane col%T, so one read returns the T
// consecutive elements of a row that a register tile needs.
//
// Interface: write port wr_en/wr_row/wr_col/wr_data (one byte, byte-lane
// enable); read port rd_en/rd_row/rd_word with rd_data valid one clock
// after rd_en (registered block-RAM read). Contents are not reset.
//
// From the paper: the two buffers, their sizes and their role (A persistent,
// B per block). Own choices: the word organisation, byte-wide writes and the
// one-cycle read latency.
module tile_buffer #(
  parameter int unsigned ROWS = 768,
  parameter int unsigned COLS = 256,
  parameter int unsigned T    = 32
) (
  input  logic                         clk,
  input  logic                         wr_en,
  input  logic [$clog2(ROWS)-1:0]      wr_row,
  input  logic [$clog2(COLS)-1:0]      wr_col,
  input  logic [7:0]                   wr_data,
  input  logic                         rd_en,
  input  logic [$clog2(ROWS)-1:0]      rd_row,
  input  logic [$clog2(COLS/T)-1:0]    rd_word,
  output logic [T-1:0][7:0]            rd_data
);
  localparam int unsigned WPR   = COLS / T;           // words per row
  localparam int unsigned DEPTH = ROWS * WPR;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned LW    = $clog2(T);           // lane bits

  initial begin
    assert (COLS % T == 0) else $fatal(1, "COLS must be a multiple of T");
    assert ((1 << LW) == T) else $fatal(1, "T must be a power of two");
  end

  logic [T-1:0][7:0] mem [DEPTH];

  logic [AW-1:0] wr_addr, rd_addr;
  logic [LW-1:0] wr_lane;

  always_comb begin
    wr_addr = AW'(wr_row) * AW'(WPR) + AW'(wr_col >> LW);
    wr_lane = wr_col[LW-1:0];
    rd_addr = AW'(rd_row) * AW'(WPR) + AW'(rd_word);
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr][wr_lane] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
