// Activation SRAM: holds input images and intermediate feature maps.
//
// One word is one row of a P x P tile: P activations of 9 bits, lane i at
// bits [i*9 +: 9]. A channel of a tile occupies P consecutive rows. A write
// has a per-lane mask so that a pooled 7x7 result can be placed in one
// quadrant of a tile without disturbing the others.
//
// Interface: single port. en=1, we=1 writes the lanes set in wmask; en=1,
// we=0 reads, with the row on rdata one cycle later (held until the next
// read). The capacity, the single port, the mask and the latency are this
// design's choices; the default of 2^18 rows (about 4 MB) fits a 224x224
// image with 64 channels plus a 3-channel input.
module act_sram
  import mram_cnn_pkg::*;
#(
  parameter int unsigned DEPTH = 262144
) (
  input  logic               clk,
  input  logic               en,
  input  logic               we,
  input  logic [P-1:0]       wmask,
  input  logic [SRAM_AW-1:0] addr,
  input  row_bits_t          wdata,
  output row_bits_t          rdata
);

  row_bits_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en && we && 32'(addr) < DEPTH) begin
      for (int i = 0; i < P; i++)
        if (wmask[i]) mem[addr][i*ACT_W +: ACT_W] <= wdata[i*ACT_W +: ACT_W];
    end
  end

  always_ff @(posedge clk) begin
    if (en && !we) rdata <= (32'(addr) < DEPTH) ? mem[addr] : '0;
  end

endmodule
