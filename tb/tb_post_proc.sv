// Self-checking test of post_proc: random weighted sums and biases under all
// combinations of shift, ReLU and pooling, compared with a reference that
// adds the bias, rounds, saturates to 9 bits, applies ReLU and 2x2 max
// pooling; also checks that the register only loads when en=1.
module tb_post_proc;
  import mram_cnn_pkg::*;
  logic clk = 0, en = 0;
  acc_tile_t acc;
  coef_t bias;
  logic [SHIFT_W-1:0] shift;
  logic relu_en, pool_en;
  act_tile_t result;
  int exp_t [P][P];
  int checks = 0, failures = 0;

  post_proc dut (.clk, .en, .acc, .bias, .shift, .relu_en, .pool_en, .result);

  always #5 clk = ~clk;

  function automatic int ref_act(longint a, int b, int sh, bit relu);
    longint v = a + b;
    if (sh > 0) v = v + (longint'(1) << (sh - 1));
    v = v >>> sh;
    if (v > 255) v = 255;
    if (v < -256) v = -256;
    if (relu && v < 0) v = 0;
    return int'(v);
  endfunction

  task automatic build_ref();
    int a [P][P];
    for (int y = 0; y < P; y++)
      for (int x = 0; x < P; x++)
        a[y][x] = ref_act(longint'(acc[y][x]), int'(bias), int'(shift), relu_en);
    for (int y = 0; y < P; y++)
      for (int x = 0; x < P; x++) begin
        if (!pool_en) exp_t[y][x] = a[y][x];
        else if (y < P/2 && x < P/2) begin
          int m = a[2*y][2*x];
          if (a[2*y][2*x+1] > m) m = a[2*y][2*x+1];
          if (a[2*y+1][2*x] > m) m = a[2*y+1][2*x];
          if (a[2*y+1][2*x+1] > m) m = a[2*y+1][2*x+1];
          exp_t[y][x] = m;
        end else exp_t[y][x] = 0;
      end
  endtask

  task automatic compare(string what);
    for (int y = 0; y < P; y++)
      for (int x = 0; x < P; x++) begin
        checks++;
        if (int'(result[y][x]) != exp_t[y][x]) begin
          failures++;
          if (failures < 10)
            $display("FAIL %s (%0d,%0d) got %0d expected %0d (sh=%0d relu=%0b pool=%0b)",
                     what, y, x, result[y][x], exp_t[y][x], shift, relu_en, pool_en);
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
    for (int n = 0; n < 200; n++) begin
      automatic int range_sel = $urandom_range(0, 2);
      for (int y = 0; y < P; y++)
        for (int x = 0; x < P; x++)
          acc[y][x] = (range_sel == 0) ? acc_t'(int'($urandom_range(0, 600)) - 300)
                    : (range_sel == 1) ? acc_t'(int'($urandom_range(0, 2000000)) - 1000000)
                    : acc_t'($urandom);
      bias    = coef_t'(int'($urandom_range(0, 32767)) - 16384);
      shift   = SHIFT_W'((range_sel == 0) ? $urandom_range(0, 2) : $urandom_range(0, 31));
      relu_en = 1'($urandom);
      pool_en = 1'($urandom);
      en = 1;
      @(negedge clk);
      en = 0;
      build_ref();
      compare("result");
      // with en=0 new inputs must not reach the output
      for (int y = 0; y < P; y++) for (int x = 0; x < P; x++) acc[y][x] = acc_t'($urandom);
      @(negedge clk);
      compare("hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
