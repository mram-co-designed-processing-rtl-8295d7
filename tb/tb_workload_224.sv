// Workload test: the first convolution layer of a VGG-style classifier on a
// full 3 x 224 x 224 image, on mram_cnn_top at its default sizes.
//
// The image is cut into 16 x 16 tiles of 14 x 14 pixels. The host loads all
// 3 channels of every tile into the SRAM (rows 0 .. 10,751) and one 3 -> 64
// channel layer into the MRAM. It then runs the layer once per tile, writing
// 64 output channels per tile after the input (rows 10,752 .. 240,127), so
// input and complete output are resident together. Every output row is read
// back and compared with a reference convolution computed here (zero padding
// at tile edges, as the engine does). The layer's total cycle count is
// checked against 256 * (1 + 64*(3*(P+3) + P + 5)) and printed together with
// the frame time it implies at a 12.5 MHz clock.
module tb_workload_224;
  import mram_cnn_pkg::*;

  localparam int IMG = 224;
  localparam int NT  = IMG / P;          // 16 tiles per side
  localparam int CIN = 3, COUT = 64;
  localparam int IN_ROWS = NT * NT * CIN * P;   // 10,752
  localparam int SHIFT = 8;

  logic clk = 0, rst_n = 0;
  logic host_mram_we = 0;
  logic [MRAM_AW-1:0] host_mram_addr = '0;
  coef_word_t host_mram_wdata = '0;
  logic host_model_we = 0;
  logic [MODEL_W-1:0] host_model_id = '0;
  logic [MRAM_AW-1:0] host_model_base = '0;
  logic host_sram_en = 0, host_sram_we = 0;
  logic [P-1:0] host_sram_wmask = '0;
  logic [SRAM_AW-1:0] host_sram_addr = '0;
  row_bits_t host_sram_wdata = '0, host_sram_rdata;
  logic layer_start = 0;
  layer_desc_t layer_desc = '0;
  logic busy, layer_done;

  mram_cnn_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int img [CIN][IMG][IMG];
  int w [COUT][CIN][K][K];
  int b [COUT];
  longint layer_cycles = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic int in_row(int ty, int tx, int c, int r);
    return ((ty * NT + tx) * CIN + c) * P + r;
  endfunction

  function automatic int out_row(int ty, int tx, int oc, int r);
    return IN_ROWS + ((ty * NT + tx) * COUT + oc) * P + r;
  endfunction

  function automatic int ref_px(int ty, int tx, int oc, int y, int x);
    longint s = b[oc];
    for (int c = 0; c < CIN; c++)
      for (int ky = 0; ky < K; ky++)
        for (int kx = 0; kx < K; kx++) begin
          int iy = y + ky - 1, ix = x + kx - 1;
          if (iy >= 0 && iy < P && ix >= 0 && ix < P)
            s += longint'(img[c][ty*P + iy][tx*P + ix]) * longint'(w[oc][c][ky][kx]);
        end
    s = (s + (longint'(1) << (SHIFT - 1))) >>> SHIFT;
    if (s > 255) s = 255;
    if (s < 0) s = 0;                       // ReLU (also covers the lower clamp)
    return int'(s);
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // model 0 at MRAM address 0: layer of 64 output channels x (3 filters + bias)
    host_model_we = 1; host_model_id = 0; host_model_base = '0;
    @(negedge clk);
    host_model_we = 0;
    for (int oc = 0; oc < COUT; oc++) begin
      for (int c = 0; c <= CIN; c++) begin
        coef_word_t word = '0;
        if (c < CIN) begin
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++) begin
              w[oc][c][ky][kx] = int'($urandom_range(0, 400)) - 200;
              word[(ky*K+kx)*COEF_W +: COEF_W] = COEF_W'(w[oc][c][ky][kx]);
            end
        end else begin
          b[oc] = int'($urandom_range(0, 2000)) - 1000;
          word[COEF_W-1:0] = COEF_W'(b[oc]);
        end
        host_mram_we = 1; host_mram_addr = MRAM_AW'(oc * (CIN + 1) + c); host_mram_wdata = word;
        @(negedge clk);
      end
    end
    host_mram_we = 0;
    // image: values 0..255 as after input normalisation
    for (int c = 0; c < CIN; c++)
      for (int y = 0; y < IMG; y++)
        for (int x = 0; x < IMG; x++) img[c][y][x] = $urandom_range(0, 255);
    for (int ty = 0; ty < NT; ty++)
      for (int tx = 0; tx < NT; tx++)
        for (int c = 0; c < CIN; c++)
          for (int r = 0; r < P; r++) begin
            act_row_t a;
            for (int i = 0; i < P; i++) a[i] = act_t'(img[c][ty*P + r][tx*P + i]);
            host_sram_en = 1; host_sram_we = 1; host_sram_wmask = '1;
            host_sram_addr = SRAM_AW'(in_row(ty, tx, c, r)); host_sram_wdata = pack_row(a);
            @(negedge clk);
          end
    host_sram_en = 0; host_sram_we = 0;
    // run the layer tile by tile
    for (int ty = 0; ty < NT; ty++)
      for (int tx = 0; tx < NT; tx++) begin
        layer_desc_t d = '0;
        d.model = 0; d.coef_off = '0;
        d.in_base = SRAM_AW'(in_row(ty, tx, 0, 0));
        d.out_base = SRAM_AW'(out_row(ty, tx, 0, 0));
        d.cin = CH_W'(CIN); d.cout = CH_W'(COUT); d.shift = SHIFT; d.relu_en = 1; d.pool_en = 0;
        layer_desc = d; layer_start = 1;
        @(negedge clk);
        layer_start = 0;
        layer_cycles++;
        while (!layer_done) begin @(negedge clk); layer_cycles++; end
      end
    chk(layer_cycles == longint'(NT*NT) * (1 + COUT * (CIN * (P + 3) + P + 5)),
        $sformatf("layer took %0d cycles", layer_cycles));
    $display("3x224x224 -> 64 channels: %0d cycles, %0.1f ms at 12.5 MHz",
             layer_cycles, real'(layer_cycles) / 12.5e3);
    // read back and compare every output row
    for (int ty = 0; ty < NT; ty++)
      for (int tx = 0; tx < NT; tx++)
        for (int oc = 0; oc < COUT; oc++)
          for (int r = 0; r < P; r++) begin
            act_row_t a;
            host_sram_en = 1; host_sram_we = 0;
            host_sram_addr = SRAM_AW'(out_row(ty, tx, oc, r));
            @(negedge clk);
            host_sram_en = 0;
            a = unpack_row(host_sram_rdata);
            for (int i = 0; i < P; i++)
              chk(int'(a[i]) == ref_px(ty, tx, oc, r, i),
                  $sformatf("tile (%0d,%0d) oc %0d pixel (%0d,%0d): got %0d expected %0d",
                            ty, tx, oc, r, i, a[i], ref_px(ty, tx, oc, r, i)));
          end
    // the input must still be intact below the output
    for (int r = 0; r < P; r++) begin
      act_row_t a;
      host_sram_en = 1; host_sram_we = 0; host_sram_addr = SRAM_AW'(in_row(NT-1, NT-1, CIN-1, r));
      @(negedge clk);
      host_sram_en = 0;
      a = unpack_row(host_sram_rdata);
      for (int i = 0; i < P; i++)
        chk(int'(a[i]) == img[CIN-1][(NT-1)*P + r][(NT-1)*P + i], "input kept");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
