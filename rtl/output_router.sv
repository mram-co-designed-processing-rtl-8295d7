// Output router: writes a finished tile from post-processing to the SRAM.
//
// Without pooling it writes the P rows of the tile to base .. base+P-1, all
// lanes. With pooling only the (P/2) x (P/2) result exists; it is written as
// P/2 rows into quadrant 'quad' = {qy,qx} of the destination tile: rows
// base + qy*P/2 + r, lanes qx*P/2 .. qx*P/2+P/2-1, other lanes masked. Four
// pooled tiles thus fill one full tile of the next layer's input.
//
// Timing: on 'start' the tile, base, pool and quad are taken; one row is
// written per cycle, starting the cycle after start (P or P/2 cycles);
// 'done' pulses for one cycle after the last write. The block is named in
// the engine's diagram; its behaviour, including quadrant placement, is this
// design's choice.
module output_router
  import mram_cnn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [SRAM_AW-1:0] base,
  input  logic               pool,
  input  logic [1:0]         quad,
  input  act_tile_t          tile,
  output logic               sram_en,
  output logic [SRAM_AW-1:0] sram_addr,
  output logic [P-1:0]       sram_wmask,
  output row_bits_t          sram_wdata,
  output logic               done
);

  localparam int unsigned H  = P / 2;
  localparam int unsigned RW = $clog2(P + 1);

  logic               busy;
  logic [RW-1:0]      row;
  logic               pool_q;
  logic [1:0]         quad_q;
  logic [SRAM_AW-1:0] base_q;
  act_tile_t          tile_q;
  act_row_t           lane;

  assign sram_en = busy;

  always_comb begin
    if (!pool_q) begin
      sram_addr  = base_q + SRAM_AW'(row);
      sram_wmask = '1;
      lane       = tile_q[row];
    end else begin
      sram_addr  = base_q + SRAM_AW'(quad_q[1] ? H : 0) + SRAM_AW'(row);
      sram_wmask = quad_q[0] ? {{(P-H){1'b1}}, {H{1'b0}}} : {{(P-H){1'b0}}, {H{1'b1}}};
      for (int i = 0; i < P; i++) lane[i] = '0;
      for (int j = 0; j < H; j++) lane[(quad_q[0] ? H : 0) + j] = tile_q[row][j];
    end
    sram_wdata = pack_row(lane);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      row    <= '0;
      pool_q <= 1'b0;
      quad_q <= '0;
      base_q <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy   <= 1'b1;
        row    <= '0;
        pool_q <= pool;
        quad_q <= quad;
        base_q <= base;
      end else if (busy) begin
        row <= row + 1'b1;
        if (row == (pool_q ? RW'(H - 1) : RW'(P - 1))) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (start && !busy) tile_q <= tile;
  end

endmodule
