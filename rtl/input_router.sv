// Input router: fills the MAC array's tile register from the SRAM.
//
// On 'start' it reads the P rows of one input-channel tile, base .. base+P-1,
// one SRAM row per cycle, and writes each returned row into the tile
// register that feeds the MAC columns. Timing: sram_en is high for P cycles
// starting the cycle after start; data returns one cycle after each read;
// 'done' pulses for one cycle when the last row has been stored, P+1 cycles
// after start, and 'tile' is then stable until the next start. The block is
// named in the engine's diagram; its one-row-per-cycle behaviour is this
// design's choice.
module input_router
  import mram_cnn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [SRAM_AW-1:0] base,
  output logic               sram_en,
  output logic [SRAM_AW-1:0] sram_addr,
  input  row_bits_t          sram_rdata,
  output act_tile_t          tile,
  output logic               done
);

  localparam int unsigned RW = $clog2(P + 1);

  logic               busy;
  logic [RW-1:0]      rd_cnt;     // rows requested
  logic               rd_vld;     // a read was issued last cycle
  logic [RW-1:0]      wr_row;     // row that the returning data belongs to
  logic [SRAM_AW-1:0] base_q;

  assign sram_en   = busy;
  assign sram_addr = base_q + SRAM_AW'(rd_cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      rd_cnt <= '0;
      rd_vld <= 1'b0;
      wr_row <= '0;
      base_q <= '0;
      done   <= 1'b0;
    end else begin
      done   <= 1'b0;
      rd_vld <= busy;
      wr_row <= rd_cnt;
      if (start && !busy) begin
        busy   <= 1'b1;
        rd_cnt <= '0;
        base_q <= base;
      end else if (busy) begin
        if (rd_cnt == RW'(P - 1)) busy <= 1'b0;
        rd_cnt <= rd_cnt + 1'b1;
      end
      if (rd_vld && wr_row == RW'(P - 1)) done <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_vld) tile[wr_row] <= unpack_row(sram_rdata);
  end

endmodule
