// Coefficient memory: array model of the on-chip STT-MRAM.
//
// Holds the 3x3 filters and biases of several CNN models at different
// addresses. One word is one filter, nine 15-bit coefficients, tap (ky,kx)
// at bits [(ky*3+kx)*15 +: 15]; a bias occupies the low 15 bits of a word of
// its own. The default depth gives a little over 40 MB (2,485,514 words of
// 135 bits), the MRAM capacity of the chip.
//
// Interface: a write port used by the host to load models, and a read port
// used by the MAC array. Timing: a write takes effect at the clock edge; read
// data appears on rdata one cycle after re and holds until the next read.
// The array is never reset, standing in for the non-volatility of MRAM: a
// reset of the logic leaves the loaded models in place. The magnetic bit cell,
// sense amplifiers and write drivers of the real macro are not modelled, and
// the one-cycle latency is this design's choice.
module coef_mram
  import mram_cnn_pkg::*;
#(
  parameter int unsigned DEPTH = 2485514
) (
  input  logic               clk,
  input  logic               we,
  input  logic [MRAM_AW-1:0] waddr,
  input  coef_word_t         wdata,
  input  logic               re,
  input  logic [MRAM_AW-1:0] raddr,
  output coef_word_t         rdata
);

  coef_word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end

endmodule
