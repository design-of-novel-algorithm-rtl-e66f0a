// serpentine_memory: 5x5 sliding window (serpentine memory) over a raster-scan
// pixel stream, one pixel per clock.
//
// Structure (as in the published schematic): the incoming pixel runs through
// five 8-bit registers that are window row 5 (W51..W55); the last one feeds
// row FIFO 4, whose output runs through the five registers of row 4
// (W41..W45), and so on up to row 1, whose last register is `pixel_out`.
// With FIFO depth IMG_WIDTH-5 each row is exactly one image line older than
// the row below it, so w[r][c] (= W(r+1)(c+1)) is the pixel at line offset
// r-4 and column offset -c relative to the newest pixel W51. The window
// centre W33 therefore lags the newest pixel by 2*IMG_WIDTH+2 pixels.
//
// Timing: everything advances only in cycles with `pixel_en` high (taken from
// the top-level din_valid). `window_valid` is registered with the window: it
// is high in the cycle after a pixel was accepted once at least
// 2*IMG_WIDTH+2 pixels had been accepted before it, i.e. once W33 holds a real
// pixel. From then on there is one window per accepted pixel, so every input
// pixel becomes the centre exactly once (after 2*IMG_WIDTH+2 further pixels).
// Image borders are not treated: the window wraps across line ends and frame
// ends, and all registers reset to 0, so the first frame's top lines see
// zeros. The enable input, the valid rule and the border behaviour are this
// design's choices; the register/FIFO chain follows the published schematic.
module serpentine_memory
  import gie_pkg::*;
#(
  parameter int unsigned IMG_WIDTH = 256
) (
  input  logic     clk,
  input  logic     reset_n,
  input  pix_t     pixel_in,
  input  logic     pixel_en,
  output pix_win_t w,
  output logic     window_valid,
  output pix_t     pixel_out
);
  localparam int unsigned FIFO_DEPTH = IMG_WIDTH - WIN;
  localparam int unsigned FILL       = 2 * IMG_WIDTH + 2;
  localparam int unsigned CW         = $clog2(FILL + 1);

  // row_in[r] is what enters window row r (index 0 = row 1 of the figure)
  pix_t row_in [WIN];
  pix_t taps   [WIN][WIN];
  logic [CW-1:0] filled;

  assign row_in[WIN-1] = pixel_in;

  for (genvar r = 0; r < WIN; r++) begin : g_row
    always_ff @(posedge clk or negedge reset_n) begin
      if (!reset_n) begin
        for (int c = 0; c < WIN; c++) taps[r][c] <= '0;
      end else if (pixel_en) begin
        taps[r][0] <= row_in[r];
        for (int c = 1; c < WIN; c++) taps[r][c] <= taps[r][c-1];
      end
    end
    if (r > 0) begin : g_fifo
      row_fifo #(.DEPTH(FIFO_DEPTH), .DW(PIX_W)) u_fifo (
        .clk    (clk),
        .reset_n(reset_n),
        .en     (pixel_en),
        .din    (taps[r][WIN-1]),
        .dout   (row_in[r-1])
      );
    end
  end

  assign w         = taps;
  assign pixel_out = taps[0][WIN-1];

  // count accepted pixels until the centre of the window is filled
  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) begin
      filled       <= '0;
      window_valid <= 1'b0;
    end else begin
      window_valid <= pixel_en && (filled == CW'(FILL));
      if (pixel_en && filled != CW'(FILL)) filled <= filled + 1'b1;
    end
  end
endmodule
