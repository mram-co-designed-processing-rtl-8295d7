// Self-checking test of coef_mram at a reduced depth: random words written
// and read back, one-cycle read latency, data held between reads, content
// kept across an idle period, out-of-range reads return zero.
module tb_coef_mram;
  import mram_cnn_pkg::*;
  localparam int unsigned DEPTH = 1000;
  logic clk = 0;
  logic we = 0, re = 0;
  logic [MRAM_AW-1:0] waddr = '0, raddr = '0;
  coef_word_t wdata = '0, rdata;
  coef_word_t model [DEPTH];
  int checks = 0, failures = 0;

  coef_mram #(.DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  function automatic coef_word_t rnd_word();
    coef_word_t w;
    for (int i = 0; i < WORD_BITS; i += 32) w[i +: 32] = WORD_BITS'($urandom);
    return w;
  endfunction

  task automatic chk(coef_word_t got, coef_word_t exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = rnd_word();
      we = 1; waddr = MRAM_AW'(a); wdata = model[a];
      @(negedge clk);
    end
    we = 0;
    repeat (20) @(negedge clk);
    for (int n = 0; n < 3000; n++) begin
      automatic int a = $urandom_range(0, DEPTH - 1);
      re = 1; raddr = MRAM_AW'(a);
      @(negedge clk);
      re = 0; raddr = MRAM_AW'($urandom_range(0, DEPTH - 1));
      chk(rdata, model[a], "read");
      @(negedge clk);
      chk(rdata, model[a], "hold");
    end
    // overwrite one word, then read it
    we = 1; waddr = 22'd7; wdata = rnd_word(); model[7] = wdata;
    @(negedge clk); we = 0;
    re = 1; raddr = 22'd7; @(negedge clk); re = 0;
    chk(rdata, model[7], "rewrite");
    re = 1; raddr = MRAM_AW'(DEPTH + 5); @(negedge clk); re = 0;
    chk(rdata, '0, "out of range");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
