// mmult_pkg: constants shared by the tiled matrix-multiply accelerator.
//
// The array and buffer sizes follow the published configuration: 32x32
// register tiles, 256-column blocks of B, and an on-chip A of up to 64x768
// int8 elements. The register map of the control slave is this design's
// own choice; it follows the layout conventionally produced for an HLS
// kernel with three 64-bit pointer arguments and four scalar arguments.
package mmult_pkg;

  // Tiling (paper: TILE_SIZE T = 32, BLOCK_M = 256, A up to 64x768).
  localparam int unsigned TILE_SIZE = 32;
  localparam int unsigned BLOCK_M   = 256;
  localparam int unsigned N_MAX     = 64;
  localparam int unsigned K_MAX     = 768;

  // Result format: int32 (operands are int8).
  localparam int unsigned ACC_W  = 32;

  // AXI4 master sizes (own choice).
  localparam int unsigned AXI_ADDR_W    = 64;
  localparam int unsigned AXI_DATA_W    = 32;   // one int32 result per beat; fixed
  localparam int unsigned AXI_MAX_BURST = 64;  // beats per burst

  // AXI4-Lite control register map (byte offsets).
  localparam logic [6:0] REG_AP_CTRL  = 7'h00;  // 0 start, 1 done(COR), 2 idle, 3 ready(COR)
  localparam logic [6:0] REG_GIE      = 7'h04;  // global interrupt enable
  localparam logic [6:0] REG_IER      = 7'h08;  // 0 done, 1 ready
  localparam logic [6:0] REG_ISR      = 7'h0C;  // toggle on write
  localparam logic [6:0] REG_A_LO     = 7'h10;
  localparam logic [6:0] REG_A_HI     = 7'h14;
  localparam logic [6:0] REG_B_LO     = 7'h1C;
  localparam logic [6:0] REG_B_HI     = 7'h20;
  localparam logic [6:0] REG_C_LO     = 7'h28;
  localparam logic [6:0] REG_C_HI     = 7'h2C;
  localparam logic [6:0] REG_N        = 7'h34;
  localparam logic [6:0] REG_K        = 7'h3C;
  localparam logic [6:0] REG_M        = 7'h44;
  localparam logic [6:0] REG_UPDATE_A = 7'h4C;
  localparam logic [6:0] REG_CYCLES   = 7'h54;  // busy-cycle timer, read only

  // AXI response codes.
  localparam logic [1:0] RESP_OKAY = 2'b00;
  localparam logic [1:0] BURST_INCR = 2'b01;

endpackage
