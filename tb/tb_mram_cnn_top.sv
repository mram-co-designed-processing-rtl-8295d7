// End-to-end test of mram_cnn_top at its default sizes (40 MB MRAM, 2^18-row
// SRAM, 14x14 tile). Follows the chip's working order: load two models'
// coefficients into the MRAM (the second while a layer of the first runs),
// load a 3-channel 14x14 image into the SRAM, run layers, read the results
// back and compare them with a reference computed in the testbench
// (zero-padded 3x3 convolution, bias, rounding shift, 9-bit saturation,
// ReLU, 2x2 max pooling). It also checks each layer's cycle count,
// 1 + cout*(cin*(P+3) + R + 5), and that the models survive a logic reset.
// Each mechanism is counted and must occur at least once: accumulation
// over several input channels, pooling and its absence, ReLU on and off,
// saturation, a model switch, pooled quadrant placement, MRAM loading
// during a layer, host SRAM access blocked while busy, and content kept
// over reset.
module tb_mram_cnn_top;
  import mram_cnn_pkg::*;

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
  // mechanism counters
  int n_accum = 0, n_pool = 0, n_nopool = 0, n_relu = 0, n_norelu = 0, n_sat = 0;
  int n_model_switch = 0, n_quad = 0, n_load_while_busy = 0, n_host_blocked = 0, n_persist = 0;

  localparam int MODEL0_BASE = 1000;
  localparam int MODEL1_BASE = 2400000;   // near the top of the 40 MB array
  localparam int MAXCH = 4;
  int base_of [2] = '{MODEL0_BASE, MODEL1_BASE};

  // Reference copy of the coefficients: [model][layer][oc][ic] (ic = cin is the bias)
  int coefs [2][2][MAXCH][MAXCH+1][K][K];
  int biasv [2][2][MAXCH];
  // Reference copy of the SRAM rows used
  int sram_ref [int][P];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ---- host port tasks
  task automatic mram_write(int addr, coef_word_t w);
    host_mram_we = 1; host_mram_addr = MRAM_AW'(addr); host_mram_wdata = w;
    @(negedge clk);
    host_mram_we = 0;
  endtask

  task automatic sram_write(int addr, int r [P]);
    act_row_t a;
    for (int i = 0; i < P; i++) a[i] = act_t'(r[i]);
    host_sram_en = 1; host_sram_we = 1; host_sram_wmask = '1;
    host_sram_addr = SRAM_AW'(addr); host_sram_wdata = pack_row(a);
    @(negedge clk);
    host_sram_en = 0; host_sram_we = 0;
  endtask

  task automatic sram_read(int addr, output int r [P]);
    act_row_t a;
    host_sram_en = 1; host_sram_we = 0; host_sram_addr = SRAM_AW'(addr);
    @(negedge clk);
    host_sram_en = 0;
    a = unpack_row(host_sram_rdata);
    for (int i = 0; i < P; i++) r[i] = int'(a[i]);
  endtask

  // Offset of layer l inside a model: layer 0 at 0, layer 1 after it.
  function automatic int layer_off(int l);
    return (l == 0) ? 0 : MAXCH * (MAXCH + 1);
  endfunction

  // Fill the reference coefficients of (model, layer) and write them into the MRAM.
  task automatic load_layer(int m, int l, int cin, int cout);
    for (int oc = 0; oc < cout; oc++) begin
      for (int ic = 0; ic <= cin; ic++) begin
        coef_word_t w = '0;
        for (int ky = 0; ky < K; ky++)
          for (int kx = 0; kx < K; kx++) begin
            int c = (ic == cin) ? 0 : int'($urandom_range(0, 1200)) - 600;
            coefs[m][l][oc][ic][ky][kx] = c;
            w[(ky*K+kx)*COEF_W +: COEF_W] = COEF_W'(c);
          end
        if (ic == cin) begin
          biasv[m][l][oc] = int'($urandom_range(0, 4000)) - 2000;
          w[COEF_W-1:0] = COEF_W'(biasv[m][l][oc]);
        end
        mram_write(base_of[m] + layer_off(l) + oc * (cin + 1) + ic, w);
      end
    end
  endtask

  // Reference for one layer; updates sram_ref with the expected output.
  task automatic ref_layer(int m, int l, layer_desc_t d);
    for (int oc = 0; oc < int'(d.cout); oc++) begin
      longint acc [P][P];
      int a [P][P];
      for (int y = 0; y < P; y++) for (int x = 0; x < P; x++) acc[y][x] = 0;
      for (int ic = 0; ic < int'(d.cin); ic++)
        for (int y = 0; y < P; y++)
          for (int x = 0; x < P; x++)
            for (int ky = 0; ky < K; ky++)
              for (int kx = 0; kx < K; kx++) begin
                int iy = y + ky - 1, ix = x + kx - 1;
                if (iy >= 0 && iy < P && ix >= 0 && ix < P)
                  acc[y][x] += longint'(sram_ref[int'(d.in_base) + ic*P + iy][ix])
                             * longint'(coefs[m][l][oc][ic][ky][kx]);
              end
      for (int y = 0; y < P; y++)
        for (int x = 0; x < P; x++) begin
          longint v = acc[y][x] + biasv[m][l][oc];
          if (d.shift > 0) v += longint'(1) << (d.shift - 1);
          v = v >>> d.shift;
          if (v > 255 || v < -256) n_sat++;
          if (v > 255) v = 255;
          if (v < -256) v = -256;
          if (d.relu_en && v < 0) v = 0;
          a[y][x] = int'(v);
        end
      if (!d.pool_en) begin
        for (int y = 0; y < P; y++)
          for (int x = 0; x < P; x++) sram_ref[int'(d.out_base) + oc*P + y][x] = a[y][x];
      end else begin
        for (int y = 0; y < P/2; y++)
          for (int x = 0; x < P/2; x++) begin
            int mx = a[2*y][2*x];
            if (a[2*y][2*x+1] > mx) mx = a[2*y][2*x+1];
            if (a[2*y+1][2*x] > mx) mx = a[2*y+1][2*x];
            if (a[2*y+1][2*x+1] > mx) mx = a[2*y+1][2*x+1];
            sram_ref[int'(d.out_base) + oc*P + d.quad[1]*(P/2) + y][d.quad[0]*(P/2) + x] = mx;
          end
      end
    end
  endtask

  // Start a layer, optionally do host work while it runs, wait, check timing.
  task automatic run_layer(layer_desc_t d, bit load_model1, bit try_sram);
    int cyc = 0;
    int expc = 1 + int'(d.cout) * (int'(d.cin) * (P + 3) + (d.pool_en ? P/2 : P) + 5);
    layer_desc = d; layer_start = 1;
    @(negedge clk);
    layer_start = 0; layer_desc = '0;
    cyc = 1;
    if (load_model1) begin
      load_layer(1, 0, 3, 2);
      cyc += (3 + 1) * 2;
      if (busy) n_load_while_busy++;
    end
    if (try_sram && busy) begin
      // a host write while busy must be ignored
      int junk [P];
      for (int i = 0; i < P; i++) junk[i] = 77;
      sram_write(200000, junk);
      cyc++;
      n_host_blocked++;
    end
    while (!layer_done && cyc < 100000) begin @(negedge clk); cyc++; end
    chk(cyc == expc, $sformatf("layer took %0d cycles, expected %0d", cyc, expc));
    @(negedge clk);
    if (d.cin > 1) n_accum++;
    if (d.pool_en) n_pool++; else n_nopool++;
    if (d.relu_en) n_relu++; else n_norelu++;
    if (d.pool_en && d.quad != 0) n_quad++;
  endtask

  task automatic compare_rows(int base, int n, string what);
    for (int r = 0; r < n; r++) begin
      int got [P];
      sram_read(base + r, got);
      for (int i = 0; i < P; i++)
        chk(got[i] == sram_ref[base + r][i],
            $sformatf("%s row %0d lane %0d: got %0d expected %0d", what, base + r, i, got[i], sram_ref[base + r][i]));
    end
  endtask

  task automatic set_models();
    host_model_we = 1; host_model_id = 0; host_model_base = MRAM_AW'(MODEL0_BASE);
    @(negedge clk);
    host_model_id = 1; host_model_base = MRAM_AW'(MODEL1_BASE);
    @(negedge clk);
    host_model_we = 0;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    layer_desc_t d;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // 1. models into MRAM
    set_models();
    load_layer(0, 0, 3, 4);
    load_layer(0, 1, 4, 2);
    // 2. image into SRAM (3 channels at rows 0..41); clear the pooled destination
    for (int r = 0; r < 3 * P; r++) begin
      int row [P];
      for (int i = 0; i < P; i++) row[i] = int'($urandom_range(0, 511)) - 256;
      sram_write(r, row);
      for (int i = 0; i < P; i++) sram_ref[r][i] = row[i];
    end
    for (int r = 0; r < 2 * P; r++) begin
      int row [P];
      for (int i = 0; i < P; i++) row[i] = 0;
      sram_write(500 + r, row);
      for (int i = 0; i < P; i++) sram_ref[500 + r][i] = 0;
    end
    begin
      int row [P];
      for (int i = 0; i < P; i++) begin row[i] = 0; sram_ref[200000][i] = 0; end
      sram_write(200000, row);
    end
    // 3. layer 0 of model 0: 3 -> 4 channels, ReLU, no pooling; model 1 loaded meanwhile
    d = '0; d.model = 0; d.coef_off = MRAM_AW'(layer_off(0)); d.in_base = 0; d.out_base = 100;
    d.cin = 3; d.cout = 4; d.shift = 9; d.relu_en = 1; d.pool_en = 0;
    ref_layer(0, 0, d);
    run_layer(d, 1, 1);
    compare_rows(100, 4 * P, "model0 layer0");
    compare_rows(200000, 1, "host write while busy");
    // 4. layer 1 of model 0: 4 -> 2 channels, no ReLU, pooled into quadrant {1,1}
    d = '0; d.model = 0; d.coef_off = MRAM_AW'(layer_off(1)); d.in_base = 100; d.out_base = 500;
    d.cin = 4; d.cout = 2; d.shift = 8; d.relu_en = 0; d.pool_en = 1; d.quad = 2'b11;
    ref_layer(0, 1, d);
    run_layer(d, 0, 0);
    compare_rows(500, 2 * P, "model0 layer1");
    // 5. switch to model 1 on the same image, pooled into quadrant {0,1} of the same tiles
    d = '0; d.model = 1; d.coef_off = 0; d.in_base = 0; d.out_base = 500;
    d.cin = 3; d.cout = 2; d.shift = 7; d.relu_en = 1; d.pool_en = 1; d.quad = 2'b01;
    ref_layer(1, 0, d);
    run_layer(d, 0, 0);
    n_model_switch++;
    compare_rows(500, 2 * P, "model1 layer0 + model0 layer1");
    // 6. reset the logic: the MRAM keeps both models; rerun model 0 layer 0
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    set_models();
    d = '0; d.model = 0; d.coef_off = MRAM_AW'(layer_off(0)); d.in_base = 0; d.out_base = 300;
    d.cin = 3; d.cout = 4; d.shift = 9; d.relu_en = 1; d.pool_en = 0;
    ref_layer(0, 0, d);
    run_layer(d, 0, 0);
    compare_rows(300, 4 * P, "after reset");
    n_persist++;

    chk(n_accum > 0, "accumulation over input channels never happened");
    chk(n_pool > 0 && n_nopool > 0, "pooling on/off not both exercised");
    chk(n_relu > 0 && n_norelu > 0, "ReLU on/off not both exercised");
    chk(n_sat > 0, "saturation never happened");
    chk(n_model_switch > 0, "model switch never happened");
    chk(n_quad > 0, "quadrant placement never happened");
    chk(n_load_while_busy > 0, "MRAM load during a layer never happened");
    chk(n_host_blocked > 0, "blocked host access never happened");
    chk(n_persist > 0, "reset persistence never exercised");
    $display("mechanisms: accum=%0d pool=%0d nopool=%0d relu=%0d norelu=%0d sat=%0d switch=%0d quad=%0d mram_load_busy=%0d host_blocked=%0d persist=%0d",
             n_accum, n_pool, n_nopool, n_relu, n_norelu, n_sat, n_model_switch, n_quad,
             n_load_while_busy, n_host_blocked, n_persist);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
