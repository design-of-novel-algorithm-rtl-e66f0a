// gaussian_conv: 5x5 2D Gaussian convolution processor for one colour channel.
//
// Computes conv_out = round( sum_rc W_rc * G_rc / KERNEL_SUM ), Eqn. (4) of the
// published algorithm: the 25 window pixels (8-bit pixels zero-extended to
// 16 bits, as the published interface has them) are multiplied by the 25
// 16-bit coefficients, added in a pipelined binary adder tree and divided by
// the weight sum. The coefficient inputs are meant to be tied to constants
// (gie_pkg::GAUSS_5X5), so synthesis reduces each multiplier to a constant-
// coefficient multiplier. The division is a multiplication by
// RECIP = round(2^24 / KERNEL_SUM) followed by a rounding shift; for
// KERNEL_SUM = 273 this equals round(sum/273) exactly for every sum an 8-bit
// window can produce. Results above 255 saturate.
//
// Pipeline (7 cycles, one window per cycle, no stall): products | adder tree
// 25->13->7->4->2->1 (5 stages) | normalise. conv_valid is window_valid
// delayed by 7 cycles. Port names follow the published signal diagram
// (W11..W55, G11..G55 as arrays w/g, conv_out, conv_valid); the stage split
// and the reciprocal divider are this design's choices.
module gaussian_conv
  import gie_pkg::*;
#(
  parameter int unsigned KERNEL_SUM_P = KERNEL_SUM
) (
  input  logic      clk,
  input  logic      reset_n,
  input  coef_win_t w,
  input  coef_win_t g,
  input  logic      window_valid,
  output pix_t      conv_out,
  output logic      conv_valid
);
  localparam int unsigned N_IN   = WIN * WIN;            // 25 products
  localparam int unsigned LEVELS = 5;                    // ceil(log2(25))
  localparam int unsigned SUM_W  = 2 * COEF_W + LEVELS;  // 37 bits, never overflows
  localparam int unsigned SHIFT  = 24;
  localparam longint unsigned RECIP =
      ((64'd1 << SHIFT) + 64'(KERNEL_SUM_P / 2)) / 64'(KERNEL_SUM_P);
  localparam int unsigned LATENCY = LEVELS + 2;

  // nodes of the tree: lvl[0] holds the products, lvl[k] the k-th sums
  logic [SUM_W-1:0] lvl [LEVELS+1][N_IN];
  logic [LATENCY-1:0] vld;

  function automatic int unsigned width_at(int unsigned k);
    int unsigned n = N_IN;
    for (int unsigned i = 0; i < k; i++) n = (n + 1) / 2;
    return n;
  endfunction

  // stage 1: products
  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) begin
      for (int i = 0; i < N_IN; i++) lvl[0][i] <= '0;
    end else begin
      for (int r = 0; r < WIN; r++)
        for (int c = 0; c < WIN; c++)
          lvl[0][r*WIN + c] <= SUM_W'(w[r][c] * g[r][c]);
    end
  end

  // stages 2..6: adder tree
  for (genvar k = 1; k <= LEVELS; k++) begin : g_lvl
    localparam int unsigned NPREV = width_at(k - 1);
    localparam int unsigned NCUR  = width_at(k);
    always_ff @(posedge clk or negedge reset_n) begin
      if (!reset_n) begin
        for (int i = 0; i < N_IN; i++) lvl[k][i] <= '0;
      end else begin
        for (int i = 0; i < NCUR; i++) begin
          if (2*i + 1 < NPREV) lvl[k][i] <= lvl[k-1][2*i] + lvl[k-1][2*i+1];
          else                 lvl[k][i] <= lvl[k-1][2*i];
        end
        for (int i = NCUR; i < N_IN; i++) lvl[k][i] <= '0;
      end
    end
  end

  // stage 7: divide by the weight sum, round, saturate
  logic [SUM_W+SHIFT:0] scaled;
  logic [SUM_W+SHIFT:0] quot;
  always_comb begin
    scaled = (SUM_W+SHIFT+1)'(lvl[LEVELS][0]) * (SUM_W+SHIFT+1)'(RECIP);
    quot   = (scaled + (SUM_W+SHIFT+1)'(64'd1 << (SHIFT - 1))) >> SHIFT;
  end

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) begin
      conv_out <= '0;
      vld      <= '0;
    end else begin
      conv_out <= (quot > (SUM_W+SHIFT+1)'(D_MAX)) ? pix_t'(D_MAX) : pix_t'(quot);
      vld      <= {vld[LATENCY-2:0], window_valid};
    end
  end
  assign conv_valid = vld[LATENCY-1];
endmodule
