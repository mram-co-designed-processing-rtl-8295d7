// Self-checking test of output_router against a masked memory model in the
// testbench: full tiles land in P rows at base; pooled tiles land in the
// requested quadrant and leave the other lanes untouched; 'done' comes one
// cycle after the last of P (or P/2) writes.
module tb_output_router;
  import mram_cnn_pkg::*;
  localparam int unsigned DEPTH = 256;
  localparam int unsigned H = P / 2;
  logic clk = 0, rst_n = 0;
  logic start = 0, pool = 0;
  logic [1:0] quad = '0;
  logic [SRAM_AW-1:0] base = '0;
  act_tile_t tile;
  logic sram_en;
  logic [SRAM_AW-1:0] sram_addr;
  logic [P-1:0] sram_wmask;
  row_bits_t sram_wdata;
  logic done;
  act_t mem [DEPTH][P];
  act_t expm [DEPTH][P];
  int writes;
  int checks = 0, failures = 0;

  output_router dut (.clk, .rst_n, .start, .base, .pool, .quad, .tile,
                     .sram_en, .sram_addr, .sram_wmask, .sram_wdata, .done);

  always #5 clk = ~clk;
  always_ff @(posedge clk) if (sram_en) begin
    automatic act_row_t r = unpack_row(sram_wdata);
    for (int i = 0; i < P; i++) if (sram_wmask[i]) mem[sram_addr % DEPTH][i] <= r[i];
    writes <= writes + 1;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++)
      for (int i = 0; i < P; i++) begin
        mem[a][i] = act_t'($urandom);
        expm[a][i] = mem[a][i];
      end
    writes = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 120; n++) begin
      automatic int b = $urandom_range(0, DEPTH - P);
      automatic int cyc = 0;
      automatic bit pl = 1'($urandom);
      automatic logic [1:0] q = 2'($urandom);
      for (int y = 0; y < P; y++) for (int x = 0; x < P; x++) tile[y][x] = act_t'($urandom);
      if (!pl) begin
        for (int y = 0; y < P; y++) for (int x = 0; x < P; x++) expm[b + y][x] = tile[y][x];
      end else begin
        for (int y = 0; y < H; y++)
          for (int x = 0; x < H; x++) expm[b + q[1]*H + y][q[0]*H + x] = tile[y][x];
      end
      writes = 0;
      start = 1; base = SRAM_AW'(b); pool = pl; quad = q;
      @(negedge clk);
      start = 0; base = '0; pool = 0; quad = '0;
      // the tile may change once started
      for (int y = 0; y < P; y++) for (int x = 0; x < P; x++) tile[y][x] = act_t'($urandom);
      while (!done && cyc < 100) begin @(negedge clk); cyc++; end
      chk(cyc == (pl ? H : P), $sformatf("done after %0d cycles (pool=%0b)", cyc + 1, pl));
      chk(writes == (pl ? H : P), $sformatf("%0d writes (pool=%0b)", writes, pl));
      for (int a = 0; a < DEPTH; a++)
        for (int i = 0; i < P; i++)
          chk(mem[a][i] == expm[a][i], $sformatf("row %0d lane %0d pool=%0b quad=%0d", a, i, pl, q));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
