// Self-checking test of control_unit with router models in the testbench
// (input router: done P+1 cycles after start, output router: done R+1
// cycles after start, R = P or P/2). For random layers and models it checks
// the order of MRAM reads (filters, then bias, per output channel), the
// input-tile and output-tile addresses, when the MPE clears and accumulates,
// the post-processing pulse, and the layer's cycle count
// 1 + cout*(cin*(P+3) + R + 5).
module tb_control_unit;
  import mram_cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic model_we = 0;
  logic [MODEL_W-1:0] model_id_w = '0;
  logic [MRAM_AW-1:0] model_base_w = '0;
  logic start = 0;
  layer_desc_t desc;
  logic busy, done;
  logic mram_re;
  logic [MRAM_AW-1:0] mram_raddr;
  logic ir_start, ir_done;
  logic [SRAM_AW-1:0] ir_base;
  logic mpe_clr, mpe_mac_en;
  logic pp_en, pp_relu, pp_pool;
  logic [SHIFT_W-1:0] pp_shift;
  logic or_start, or_done;
  logic [SRAM_AW-1:0] or_base;
  logic [1:0] or_quad;
  int checks = 0, failures = 0;
  int base_tab [8];

  control_unit dut (.*);

  always #5 clk = ~clk;

  // router models
  int ir_cnt = 0, or_cnt = 0;
  assign ir_done = (ir_cnt == 1);
  assign or_done = (or_cnt == 1);
  always_ff @(posedge clk) begin
    if (ir_start) ir_cnt <= P + 2;
    else if (ir_cnt > 0) ir_cnt <= ir_cnt - 1;
    if (or_start) or_cnt <= (pp_pool ? P/2 : P) + 1;
    else if (or_cnt > 0) or_cnt <= or_cnt - 1;
  end

  // event log
  typedef struct { int kind; longint a; int b; } ev_t;  // kind: 0 mram,1 ir,2 mac,3 pp,4 or
  ev_t got [$];
  always @(negedge clk) if (rst_n) begin
    if (mram_re)    got.push_back('{0, longint'(mram_raddr), 0});
    if (ir_start)   got.push_back('{1, longint'(ir_base), 0});
    if (mpe_mac_en) got.push_back('{2, 0, int'(mpe_clr)});
    else if (mpe_clr) got.push_back('{9, 0, 0});
    if (pp_en)      got.push_back('{3, 0, int'({pp_shift, pp_relu, pp_pool})});
    if (or_start)   got.push_back('{4, longint'(or_base), int'(or_quad)});
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    desc = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 8; m++) begin
      base_tab[m] = $urandom_range(0, 1000000);
      model_we = 1; model_id_w = MODEL_W'(m); model_base_w = MRAM_AW'(base_tab[m]);
      @(negedge clk);
    end
    model_we = 0;
    for (int n = 0; n < 40; n++) begin
      automatic ev_t e [$];
      automatic int cyc = 0, r = 0, expc = 0;
      automatic longint cp = 0;
      desc          = '0;
      desc.model    = MODEL_W'($urandom_range(0, 7));
      desc.coef_off = MRAM_AW'($urandom_range(0, 100000));
      desc.in_base  = SRAM_AW'($urandom_range(0, 100000));
      desc.out_base = SRAM_AW'($urandom_range(0, 100000));
      desc.cin      = CH_W'($urandom_range(1, 5));
      desc.cout     = CH_W'($urandom_range(1, 4));
      desc.shift    = SHIFT_W'($urandom);
      desc.relu_en  = 1'($urandom);
      desc.pool_en  = 1'($urandom);
      desc.quad     = 2'($urandom);
      r = desc.pool_en ? P/2 : P;
      // expected events
      cp = longint'(base_tab[desc.model]) + longint'(desc.coef_off);
      for (int oc = 0; oc < desc.cout; oc++) begin
        for (int ic = 0; ic < desc.cin; ic++) begin
          e.push_back('{0, cp, 0}); cp++;
          e.push_back('{1, longint'(desc.in_base) + ic*P, 0});
          e.push_back('{2, 0, int'(ic == 0)});
        end
        e.push_back('{0, cp, 0}); cp++;
        e.push_back('{3, 0, int'({desc.shift, desc.relu_en, desc.pool_en})});
        e.push_back('{4, longint'(desc.out_base) + oc*P, int'(desc.quad)});
      end
      expc = 1 + desc.cout * (desc.cin * (P + 3) + r + 5);
      got.delete();
      start = 1;
      @(negedge clk);
      start = 0;
      desc = '0;  // descriptor must have been captured
      cyc = 1;
      chk(busy, "busy after start");
      while (!done && cyc < 10000) begin @(negedge clk); cyc++; end
      chk(cyc == expc, $sformatf("layer took %0d cycles, expected %0d", cyc, expc));
      chk(!busy, "idle at done");
      chk(got.size() == e.size(), $sformatf("%0d events, expected %0d", got.size(), e.size()));
      for (int i = 0; i < e.size() && i < got.size(); i++)
        chk(got[i].kind == e[i].kind && got[i].a == e[i].a && got[i].b == e[i].b,
            $sformatf("event %0d: got (%0d,%0d,%0d) expected (%0d,%0d,%0d)", i,
                      got[i].kind, got[i].a, got[i].b, e[i].kind, e[i].a, e[i].b));
      repeat (2) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
