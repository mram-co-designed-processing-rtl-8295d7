// Self-checking test of input_router against a one-cycle-latency memory
// model in the testbench: the assembled tile must equal the P rows at the
// requested base, and 'done' must come P+1 cycles after start.
module tb_input_router;
  import mram_cnn_pkg::*;
  localparam int unsigned DEPTH = 256;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [SRAM_AW-1:0] base = '0;
  logic sram_en;
  logic [SRAM_AW-1:0] sram_addr;
  row_bits_t sram_rdata = '0;
  act_tile_t tile;
  logic done;
  row_bits_t mem [DEPTH];
  int checks = 0, failures = 0;
  int reads;

  input_router dut (.clk, .rst_n, .start, .base, .sram_en, .sram_addr, .sram_rdata, .tile, .done);

  always #5 clk = ~clk;
  always_ff @(posedge clk) if (sram_en) begin
    sram_rdata <= mem[sram_addr % DEPTH];
    reads <= reads + 1;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++)
      for (int i = 0; i < ROW_BITS; i += 32) mem[a][i +: 32] = ROW_BITS'($urandom);
    reads = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 100; n++) begin
      automatic int b = $urandom_range(0, DEPTH - P);
      automatic int cyc = 0;
      reads = 0;
      start = 1; base = SRAM_AW'(b);
      @(negedge clk);
      start = 0; base = '0;
      while (!done && cyc < 100) begin @(negedge clk); cyc++; end
      chk(cyc == P + 1, $sformatf("done %0d clock edges after the start edge, expected %0d", cyc, P + 1));
      chk(reads == P, $sformatf("%0d SRAM reads, expected %0d", reads, P));
      for (int y = 0; y < P; y++) begin
        automatic act_row_t r = unpack_row(mem[b + y]);
        for (int x = 0; x < P; x++)
          chk(tile[y][x] == r[x], $sformatf("tile (%0d,%0d) base %0d", y, x, b));
      end
      @(negedge clk);
      chk(!done, "done is a single-cycle pulse");
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
