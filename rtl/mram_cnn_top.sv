// MRAM-based processing-in-memory CNN accelerator, top level.
//
// Four parts: a non-volatile coefficient MRAM that keeps several CNN models
// resident, an activation SRAM for images and intermediate feature maps, a
// MAC array (the MPE, fed by an input router and drained through
// post-processing and an output router) and a control unit. Work follows
// four steps: the host loads model coefficients into the MRAM (once; they
// survive power-off on the real chip), loads an image tile into the SRAM,
// starts one layer at a time, and reads the results back from the SRAM.
//
// Host port:
//   host_mram_*   write one 135-bit filter or bias word into the MRAM
//                 (allowed at any time, also while a layer runs);
//   host_model_*  set the MRAM base address of model 0..7;
//   host_sram_*   read or write one SRAM row (P activations) while busy=0;
//                 read data is on host_sram_rdata one cycle after the read;
//   layer_start / layer_desc start a layer (see mram_cnn_pkg::layer_desc_t)
//                 while busy=0; layer_done pulses when it has finished.
// Host SRAM accesses while busy=1 are ignored. The SRAM has one port; the
// control unit never lets the two routers use it in the same cycle.
// Timing: a layer takes 1 + cout*(cin*(P+3) + R + 5) cycles from layer_start
// to layer_done, R = P rows written, or P/2 when pooling.
// The four parts and the four-step flow follow the original chip; the host
// port, the single SRAM port with its arbitration, and the memory sizes other
// than the 40 MB MRAM are this design's choices. The engine has one MPE: how
// several engines would be linked is not described, so it is not built.
module mram_cnn_top
  import mram_cnn_pkg::*;
#(
  parameter int unsigned MRAM_DEPTH = 2485514,
  parameter int unsigned SRAM_DEPTH = 262144,
  parameter int unsigned N_MODELS   = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               host_mram_we,
  input  logic [MRAM_AW-1:0] host_mram_addr,
  input  coef_word_t         host_mram_wdata,
  input  logic               host_model_we,
  input  logic [MODEL_W-1:0] host_model_id,
  input  logic [MRAM_AW-1:0] host_model_base,
  input  logic               host_sram_en,
  input  logic               host_sram_we,
  input  logic [P-1:0]       host_sram_wmask,
  input  logic [SRAM_AW-1:0] host_sram_addr,
  input  row_bits_t          host_sram_wdata,
  output row_bits_t          host_sram_rdata,
  input  logic               layer_start,
  input  layer_desc_t        layer_desc,
  output logic               busy,
  output logic               layer_done
);

  // control
  logic               mram_re;
  logic [MRAM_AW-1:0] mram_raddr;
  coef_word_t         mram_rdata;
  logic               ir_start, ir_done, ir_en;
  logic [SRAM_AW-1:0] ir_base, ir_addr;
  logic               mpe_clr, mpe_mac_en;
  logic               pp_en, pp_relu, pp_pool;
  logic [SHIFT_W-1:0] pp_shift;
  logic               or_start, or_done, or_en;
  logic [SRAM_AW-1:0] or_base, or_addr;
  logic [1:0]         or_quad;
  logic [P-1:0]       or_wmask;
  row_bits_t          or_wdata;
  // SRAM port
  logic               s_en, s_we;
  logic [P-1:0]       s_wmask;
  logic [SRAM_AW-1:0] s_addr;
  row_bits_t          s_wdata, s_rdata;
  // datapath
  act_tile_t          in_tile, out_tile;
  acc_tile_t          acc;

  control_unit #(.N_MODELS(N_MODELS)) u_ctrl (
    .clk, .rst_n,
    .model_we(host_model_we), .model_id_w(host_model_id), .model_base_w(host_model_base),
    .start(layer_start), .desc(layer_desc), .busy, .done(layer_done),
    .mram_re, .mram_raddr,
    .ir_start, .ir_base, .ir_done,
    .mpe_clr, .mpe_mac_en,
    .pp_en, .pp_shift, .pp_relu, .pp_pool,
    .or_start, .or_base, .or_quad, .or_done
  );

  coef_mram #(.DEPTH(MRAM_DEPTH)) u_mram (
    .clk,
    .we(host_mram_we), .waddr(host_mram_addr), .wdata(host_mram_wdata),
    .re(mram_re), .raddr(mram_raddr), .rdata(mram_rdata)
  );

  // SRAM port: input router, output router, or the host while idle.
  always_comb begin
    if (ir_en) begin
      s_en = 1'b1; s_we = 1'b0; s_wmask = '0; s_addr = ir_addr; s_wdata = '0;
    end else if (or_en) begin
      s_en = 1'b1; s_we = 1'b1; s_wmask = or_wmask; s_addr = or_addr; s_wdata = or_wdata;
    end else begin
      s_en    = host_sram_en && !busy;
      s_we    = host_sram_we;
      s_wmask = host_sram_wmask;
      s_addr  = host_sram_addr;
      s_wdata = host_sram_wdata;
    end
  end

  act_sram #(.DEPTH(SRAM_DEPTH)) u_sram (
    .clk, .en(s_en), .we(s_we), .wmask(s_wmask), .addr(s_addr),
    .wdata(s_wdata), .rdata(s_rdata)
  );
  assign host_sram_rdata = s_rdata;

  input_router u_ir (
    .clk, .rst_n, .start(ir_start), .base(ir_base),
    .sram_en(ir_en), .sram_addr(ir_addr), .sram_rdata(s_rdata),
    .tile(in_tile), .done(ir_done)
  );

  mpe u_mpe (
    .clk, .rst_n, .clr(mpe_clr), .mac_en(mpe_mac_en),
    .tile(in_tile), .coef(unpack_filt(mram_rdata)), .acc
  );

  post_proc u_pp (
    .clk, .en(pp_en), .acc, .bias(coef_t'(mram_rdata[COEF_W-1:0])),
    .shift(pp_shift), .relu_en(pp_relu), .pool_en(pp_pool), .result(out_tile)
  );

  output_router u_or (
    .clk, .rst_n, .start(or_start), .base(or_base), .pool(pp_pool), .quad(or_quad),
    .tile(out_tile), .sram_en(or_en), .sram_addr(or_addr), .sram_wmask(or_wmask),
    .sram_wdata(or_wdata), .done(or_done)
  );

`ifndef SYNTHESIS
  // The two routers never share the SRAM port.
  a_one_owner: assert property (@(posedge clk) disable iff (!rst_n) !(ir_en && or_en));
`endif

endmodule
