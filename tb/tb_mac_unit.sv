// Self-checking test of mac_unit: corner operands and random ones, product
// compared with integer multiplication done in the testbench.
module tb_mac_unit;
  import mram_cnn_pkg::*;
  act_t  act;
  coef_t coef;
  prod_t prod;
  int checks = 0, failures = 0;

  mac_unit dut (.act, .coef, .prod);

  task automatic check(int a, int c);
    int exp;
    act  = act_t'(a);
    coef = coef_t'(c);
    #1;
    exp = int'(act) * int'(coef);
    checks++;
    if (int'(prod) != exp) begin
      failures++;
      $display("FAIL %0d * %0d = %0d, expected %0d", a, c, int'(prod), exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0, 0); check(1, 1); check(-1, 1); check(-256, -16384);
    check(255, 16383); check(-256, 16383); check(255, -16384); check(-1, -1);
    repeat (2000) check(int'($urandom_range(0, 511)) - 256, int'($urandom_range(0, 32767)) - 16384);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
