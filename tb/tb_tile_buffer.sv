// tb_tile_buffer: self-checking test of the operand buffer in both of its
// configurations: A (64 rows x 768 elements) and B block (768 rows x 256
// elements), tile width 32. Each buffer is filled one element per clock with
// values derived from (row, col); then random (row, word) reads are checked,
// including the one-clock read latency and that a word holds 32 consecutive
// elements of one row, lowest column in lane 0. A second partial overwrite
// checks that byte writes leave the other lanes alone.
module tb_tile_buffer;
  localparam int unsigned T = 32;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // A configuration
  logic        a_wr_en = 0, a_rd_en = 0;
  logic [5:0]  a_wr_row = '0, a_rd_row = '0;
  logic [9:0]  a_wr_col = '0;
  logic [4:0]  a_rd_word = '0;
  logic [7:0]  a_wr_data = '0;
  logic [T-1:0][7:0] a_rd_data;

  tile_buffer #(.ROWS(64), .COLS(768), .T(T)) u_a (
    .clk, .wr_en(a_wr_en), .wr_row(a_wr_row), .wr_col(a_wr_col), .wr_data(a_wr_data),
    .rd_en(a_rd_en), .rd_row(a_rd_row), .rd_word(a_rd_word), .rd_data(a_rd_data));

  // B configuration
  logic        b_wr_en = 0, b_rd_en = 0;
  logic [9:0]  b_wr_row = '0, b_rd_row = '0;
  logic [7:0]  b_wr_col = '0;
  logic [2:0]  b_rd_word = '0;
  logic [7:0]  b_wr_data = '0;
  logic [T-1:0][7:0] b_rd_data;

  tile_buffer #(.ROWS(768), .COLS(256), .T(T)) u_b (
    .clk, .wr_en(b_wr_en), .wr_row(b_wr_row), .wr_col(b_wr_col), .wr_data(b_wr_data),
    .rd_en(b_rd_en), .rd_row(b_rd_row), .rd_word(b_rd_word), .rd_data(b_rd_data));

  function automatic logic [7:0] pat(input int r, input int c, input int salt);
    return 8'((r * 131) ^ (c * 7) ^ (c >> 3) ^ salt);
  endfunction

  initial begin
    int r, w;
    logic [T-1:0][7:0] held;
    // fill A
    for (int i = 0; i < 64; i++)
      for (int j = 0; j < 768; j++) begin
        a_wr_en <= 1; a_wr_row <= 6'(i); a_wr_col <= 10'(j); a_wr_data <= pat(i, j, 0);
        @(posedge clk);
      end
    a_wr_en <= 0;
    // fill B (B rows cycle through 256 columns)
    for (int i = 0; i < 768; i++)
      for (int j = 0; j < 256; j++) begin
        b_wr_en <= 1; b_wr_row <= 10'(i); b_wr_col <= 8'(j); b_wr_data <= pat(i, j, 85);
        @(posedge clk);
      end
    b_wr_en <= 0;
    // overwrite every 5th element of A row 17
    for (int j = 0; j < 768; j += 5) begin
      a_wr_en <= 1; a_wr_row <= 6'd17; a_wr_col <= 10'(j); a_wr_data <= pat(17, j, 200);
      @(posedge clk);
    end
    a_wr_en <= 0;

    // random reads
    for (int n = 0; n < 600; n++) begin
      r = (n < 24) ? 17 : int'($urandom_range(63));
      w = (n < 24) ? n : int'($urandom_range(23));
      a_rd_en <= 1; a_rd_row <= 6'(r); a_rd_word <= 5'(w);
      @(posedge clk);
      a_rd_en <= 0;
      #1;
      held = a_rd_data;
      @(posedge clk);  // rd_en low: data must hold
      #1;
      for (int e = 0; e < T; e++) begin
        automatic int c = w * T + e;
        automatic logic [7:0] exp = (r == 17 && c % 5 == 0) ? pat(r, c, 200) : pat(r, c, 0);
        checks++;
        if (held[e] != exp || a_rd_data[e] != exp) begin
          failures++;
          if (failures < 6) $display("A[%0d][%0d] = %h, expected %h", r, c, held[e], exp);
        end
      end
    end
    for (int n = 0; n < 600; n++) begin
      r = int'($urandom_range(767));
      w = int'($urandom_range(7));
      b_rd_en <= 1; b_rd_row <= 10'(r); b_rd_word <= 3'(w);
      @(posedge clk);
      b_rd_en <= 0;
      #1;
      for (int e = 0; e < T; e++) begin
        automatic int c = w * T + e;
        checks++;
        if (b_rd_data[e] != pat(r, c, 85)) begin
          failures++;
          if (failures < 6) $display("B[%0d][%0d] = %h, expected %h", r, c, b_rd_data[e], pat(r, c, 85));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
