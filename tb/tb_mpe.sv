// Self-checking test of the MPE: random tiles and 3x3 filters, a reference
// zero-padded convolution computed in the testbench, accumulation over
// several input channels, clear with and without a MAC, and the rule of one
// full tile per cycle (each accumulate is checked one clock after it).
module tb_mpe;
  import mram_cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic clr = 0, mac_en = 0;
  act_tile_t tile;
  filt_t     coef;
  acc_tile_t acc;
  longint    ref_acc [P][P];
  int checks = 0, failures = 0;

  mpe dut (.clk, .rst_n, .clr, .mac_en, .tile, .coef, .acc);

  always #5 clk = ~clk;

  task automatic randomize_inputs(int amax);
    for (int y = 0; y < P; y++)
      for (int x = 0; x < P; x++)
        tile[y][x] = act_t'(int'($urandom_range(0, 2*amax)) - amax);
    for (int ky = 0; ky < K; ky++)
      for (int kx = 0; kx < K; kx++)
        coef[ky][kx] = coef_t'(int'($urandom_range(0, 32767)) - 16384);
  endtask

  function automatic longint conv_at(int y, int x);
    longint s = 0;
    for (int ky = 0; ky < K; ky++)
      for (int kx = 0; kx < K; kx++) begin
        int iy = y + ky - 1, ix = x + kx - 1;
        if (iy >= 0 && iy < P && ix >= 0 && ix < P)
          s += longint'(tile[iy][ix]) * longint'(coef[ky][kx]);
      end
    return s;
  endfunction

  task automatic compare(string what);
    for (int y = 0; y < P; y++)
      for (int x = 0; x < P; x++) begin
        checks++;
        if (longint'(acc[y][x]) != ref_acc[y][x]) begin
          failures++;
          if (failures < 10)
            $display("FAIL %s pixel (%0d,%0d): got %0d expected %0d", what, y, x, acc[y][x], ref_acc[y][x]);
        end
      end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    randomize_inputs(255);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int y = 0; y < P; y++) for (int x = 0; x < P; x++) ref_acc[y][x] = 0;
    compare("reset");
    for (int layer = 0; layer < 20; layer++) begin
      automatic int nch = $urandom_range(1, 6);
      for (int ch = 0; ch < nch; ch++) begin
        randomize_inputs(ch == 0 ? 255 : 60);
        clr = (ch == 0); mac_en = 1;
        for (int y = 0; y < P; y++)
          for (int x = 0; x < P; x++)
            ref_acc[y][x] = (ch == 0 ? 0 : ref_acc[y][x]) + conv_at(y, x);
        @(negedge clk);
        clr = 0; mac_en = 0;
        compare("accumulate");
      end
      // idle cycle with new inputs: nothing may change
      randomize_inputs(255);
      @(negedge clk);
      compare("hold");
    end
    // clear without MAC
    clr = 1; mac_en = 0;
    @(negedge clk);
    clr = 0;
    for (int y = 0; y < P; y++) for (int x = 0; x < P; x++) ref_acc[y][x] = 0;
    compare("clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
