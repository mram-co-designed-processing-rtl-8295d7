// Self-checking test of act_sram at a reduced depth: full-row and masked
// writes against a lane-by-lane reference, one-cycle read latency.
module tb_act_sram;
  import mram_cnn_pkg::*;
  localparam int unsigned DEPTH = 512;
  logic clk = 0;
  logic en = 0, we = 0;
  logic [P-1:0] wmask = '0;
  logic [SRAM_AW-1:0] addr = '0;
  row_bits_t wdata = '0, rdata;
  row_bits_t model [DEPTH];
  int checks = 0, failures = 0;

  act_sram #(.DEPTH(DEPTH)) dut (.clk, .en, .we, .wmask, .addr, .wdata, .rdata);

  always #5 clk = ~clk;

  function automatic row_bits_t rnd_row();
    row_bits_t w;
    for (int i = 0; i < ROW_BITS; i += 32) w[i +: 32] = ROW_BITS'($urandom);
    return w;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = rnd_row();
      en = 1; we = 1; wmask = '1; addr = SRAM_AW'(a); wdata = model[a];
      @(negedge clk);
    end
    for (int n = 0; n < 4000; n++) begin
      automatic int a = $urandom_range(0, DEPTH - 1);
      if ($urandom_range(0, 1) == 1) begin
        en = 1; we = 1; wmask = P'($urandom); addr = SRAM_AW'(a); wdata = rnd_row();
        for (int i = 0; i < P; i++)
          if (wmask[i]) model[a][i*ACT_W +: ACT_W] = wdata[i*ACT_W +: ACT_W];
        @(negedge clk);
      end else begin
        en = 1; we = 0; addr = SRAM_AW'(a);
        @(negedge clk);
        en = 0;
        checks++;
        if (rdata !== model[a]) begin
          failures++;
          $display("FAIL row %0d: got %h expected %h", a, rdata, model[a]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
