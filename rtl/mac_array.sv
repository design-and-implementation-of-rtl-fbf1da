// mac_array: the 32x32 int8 multiply-accumulate engine with its register
// tiles localA, localB and localC.
//
// A k0-step of the tiled product runs in two phases. Load: T cycles each
// write one row of localA (A[i0+r][k0 .. k0+T-1]) and one row of localB
// (B[k0+r][j0 .. j0+T-1]); out-of-range elements arrive already zeroed.
// Compute: each `step` cycle performs one k iteration of the fully unrolled
// ii/jj loops, i.e. T*T multiply-adds in parallel:
//     localC[ii][jj] += localA[ii][0] * localB[0][jj]
// after which localA shifts one column left and localB one row up, so the
// next k element is again at index 0 (a systolic-like shift instead of a
// T-way read multiplexer). One k per clock is the pipelined k loop with an
// initiation interval of one; T steps consume a loaded tile pair.
//
// Interface: clear zeroes localC (a clear in the same cycle as a step
// starts the sums from that step's products); ld_en/ld_idx/ld_a/ld_b load
// row ld_idx of both tiles; step does one k iteration; c_out shows localC
// at all times. Loading and stepping in the same cycle is not allowed.
//
// From the paper: the 32x32 unrolled array, int8 x int8 products, the
// register-partitioned local tiles and II = 1 over k. Own choices: signed
// operands, 32-bit wrap-around accumulators, the shifting tiles.
module mac_array #(
  parameter int unsigned T     = 32,
  parameter int unsigned ACC_W = 32
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              clear,
  input  logic                              ld_en,
  input  logic [$clog2(T)-1:0]              ld_idx,
  input  logic [T-1:0][7:0]                 ld_a,
  input  logic [T-1:0][7:0]                 ld_b,
  input  logic                              step,
  output logic [T-1:0][T-1:0][ACC_W-1:0]    c_out
);
  // local_a[ii][kk] and local_b[kk][jj] are register arrays; each
  // accumulator local_c[ii][jj] is a register of its own processing element.
  logic [T-1:0][T-1:0][7:0] local_a, local_b;

  assert property (@(posedge clk) disable iff (!rst_n) !(ld_en && step))
    else $error("mac_array: load and step in the same cycle");

  // Tile registers: load a row, or shift by one k position on a step.
  always_ff @(posedge clk) begin
    if (ld_en) begin
      local_a[ld_idx] <= ld_a;
      local_b[ld_idx] <= ld_b;
    end else if (step) begin
      for (int ii = 0; ii < T; ii++) local_a[ii] <= local_a[ii] >> 8;  // next k of A row ii
      local_b <= local_b >> (8 * T);                                   // next k row of B
    end
  end

  // The T x T multiplier-adders.
  for (genvar ii = 0; ii < T; ii++) begin : g_row
    for (genvar jj = 0; jj < T; jj++) begin : g_pe
      logic signed [15:0] prod;
      logic [ACC_W-1:0]   acc;       // local_c[ii][jj]

      assign prod = $signed(local_a[ii][0]) * $signed(local_b[0][jj]);

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)
          acc <= '0;
        else if (step)
          acc <= (clear ? '0 : acc) + {{(ACC_W-16){prod[15]}}, prod};
        else if (clear)
          acc <= '0;
      end

      assign c_out[ii][jj] = acc;
    end
  end

endmodule
