// CNN Matrix Processing Engine (MPE).
//
// Performs a 3x3 convolution at all P x P = 14 x 14 pixel locations of a tile
// in one clock cycle and accumulates the result over input channels. The MAC
// array has MAC_ROWS = 42 rows of MAC_COLS = 42 multipliers, 42 x 42 =
// 14 x 14 x 9: the MAC in row 3*y+ky, column 3*x+kx multiplies filter tap
// (ky,kx) with the input pixel (y+ky-1, x+kx-1) of the tile. Every row takes
// the coefficients of its kernel row ky = row mod 3 from the shared filter
// word; every column takes the input pixels of its tile column. Pixels that
// fall outside the tile are zero (zero padding at the tile edge), so the
// output keeps the P x P size.
//
// Interface: 'tile' is the input-channel tile ([row][col]), 'coef' the 3x3
// filter. Timing: at a clock edge with mac_en=1 every accumulator adds its
// pixel's nine products; with clr=1 the accumulators restart (from the new
// sum if mac_en is also 1, otherwise from zero). 'acc' is the registered
// state. Grid size and the 42 x 42 row layout follow the engine's
// description; the row/column mapping, the padding at tile edges and the
// 32-bit accumulators are this design's choices.
module mpe
  import mram_cnn_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      clr,
  input  logic      mac_en,
  input  act_tile_t tile,
  input  filt_t     coef,
  output acc_tile_t acc
);

  prod_t     prod [MAC_ROWS][MAC_COLS];
  acc_tile_t wsum;

  for (genvar r = 0; r < MAC_ROWS; r++) begin : g_row
    for (genvar c = 0; c < MAC_COLS; c++) begin : g_col
      localparam int Y  = r / K;
      localparam int KY = r % K;
      localparam int X  = c / K;
      localparam int KX = c % K;
      localparam int IY = Y + KY - 1;
      localparam int IX = X + KX - 1;
      act_t a;
      if (IY >= 0 && IY < P && IX >= 0 && IX < P) begin : g_in
        assign a = tile[IY][IX];
      end else begin : g_pad
        assign a = '0;
      end
      mac_unit u_mac (.act(a), .coef(coef[KY][KX]), .prod(prod[r][c]));
    end
  end

  // Weighted sum of each pixel: its nine products.
  always_comb begin
    for (int y = 0; y < P; y++)
      for (int x = 0; x < P; x++) begin
        wsum[y][x] = '0;
        for (int ky = 0; ky < K; ky++)
          for (int kx = 0; kx < K; kx++)
            wsum[y][x] += acc_t'(prod[y*K+ky][x*K+kx]);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int y = 0; y < P; y++)
        for (int x = 0; x < P; x++) acc[y][x] <= '0;
    end else if (clr) begin
      for (int y = 0; y < P; y++)
        for (int x = 0; x < P; x++) acc[y][x] <= mac_en ? wsum[y][x] : '0;
    end else if (mac_en) begin
      for (int y = 0; y < P; y++)
        for (int x = 0; x < P; x++) acc[y][x] <= acc[y][x] + wsum[y][x];
    end
  end

endmodule
