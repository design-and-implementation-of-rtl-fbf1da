// tb_mac_array: self-checking test of the 32x32 multiply-accumulate array.
// Random signed int8 tiles are loaded row by row, the array is stepped T
// times per tile pair, and localC is compared with a product computed here
// in plain integer arithmetic. Covers accumulation over several tile pairs,
// a partial k length, clear, clear together with a step, and extreme values
// (-128 * -128). The rate check requires one k step per clock: the result
// must be complete exactly T clocks after the first step.
module tb_mac_array;
  localparam int unsigned T = 32;
  localparam int unsigned ACC_W = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  logic clear = 1'b0, ld_en = 1'b0, step = 1'b0;
  logic [$clog2(T)-1:0] ld_idx = '0;
  logic [T-1:0][7:0] ld_a = '0, ld_b = '0;
  logic [T-1:0][T-1:0][ACC_W-1:0] c_out;

  mac_array #(.T(T), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int signed ta [T][T];   // A tile  [ii][kk]
  int signed tb [T][T];   // B tile  [kk][jj]
  int signed ref_c [T][T];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic make_tiles(input int mode);
    for (int i = 0; i < T; i++)
      for (int j = 0; j < T; j++) begin
        if (mode == 1) begin
          ta[i][j] = -128; tb[i][j] = -128;
        end else begin
          ta[i][j] = $signed(8'($urandom));
          tb[i][j] = $signed(8'($urandom));
        end
      end
  endtask

  task automatic load_tiles();
    for (int r = 0; r < T; r++) begin
      ld_en  <= 1'b1;
      ld_idx <= r[$clog2(T)-1:0];
      for (int e = 0; e < T; e++) begin
        ld_a[e] <= 8'(ta[r][e]);
        ld_b[e] <= 8'(tb[r][e]);
      end
      @(posedge clk);
    end
    ld_en <= 1'b0;
  endtask

  // Run nk steps; first_clear merges a clear into the first step.
  task automatic run_steps(input int nk, input bit first_clear);
    for (int s = 0; s < nk; s++) begin
      step  <= 1'b1;
      clear <= first_clear && (s == 0);
      @(posedge clk);
    end
    step  <= 1'b0;
    clear <= 1'b0;
    for (int i = 0; i < T; i++)
      for (int j = 0; j < T; j++) begin
        if (first_clear) ref_c[i][j] = 0;
        for (int kk = 0; kk < nk; kk++) ref_c[i][j] += ta[i][kk] * tb[kk][j];
      end
  endtask

  task automatic compare(input string what);
    int bad = 0;
    for (int i = 0; i < T; i++)
      for (int j = 0; j < T; j++) begin
        checks++;
        if ($signed(c_out[i][j]) != ref_c[i][j]) begin
          failures++;
          if (bad++ < 4) $display("%s: C[%0d][%0d] = %0d, expected %0d", what, i, j,
                                  $signed(c_out[i][j]), ref_c[i][j]);
        end
      end
  endtask

  initial begin
    int t_start;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // reset state
    for (int i = 0; i < T; i++) for (int j = 0; j < T; j++) ref_c[i][j] = 0;
    compare("after reset");

    // three tile pairs accumulated, with an explicit clear first
    clear <= 1'b1; @(posedge clk); clear <= 1'b0;
    for (int t = 0; t < 3; t++) begin
      make_tiles(0);
      load_tiles();
      t_start = $time;
      run_steps(T, 1'b0);
      @(negedge clk);
      checks++;
      if (($time - t_start) / 10 != T) begin
        failures++;
        $display("rate: %0d clocks for %0d k steps", ($time - t_start) / 10, T);
      end
      compare("accumulate");
      @(posedge clk);
    end

    // partial k length (7 steps), starting with clear merged into step 0
    make_tiles(0);
    load_tiles();
    run_steps(7, 1'b1);
    @(negedge clk);
    compare("partial k");
    @(posedge clk);

    // extreme values, full length
    make_tiles(1);
    load_tiles();
    run_steps(T, 1'b1);
    @(negedge clk);
    compare("-128*-128");
    @(posedge clk);

    // clear alone
    clear <= 1'b1; @(posedge clk); clear <= 1'b0;
    @(negedge clk);
    for (int i = 0; i < T; i++) for (int j = 0; j < T; j++) ref_c[i][j] = 0;
    compare("clear");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
