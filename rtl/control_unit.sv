// Control unit: runs one 3x3 convolution layer on one tile.
//
// The host describes a layer with a layer_desc_t and pulses 'start'. The
// unit then, for every output channel oc = 0 .. cout-1:
//   1. for every input channel ic = 0 .. cin-1: starts the input router on
//      SRAM rows in_base + ic*P, reads the filter of (oc, ic) from the MRAM,
//      and when the tile is in place fires one MPE cycle (clearing the
//      accumulators at ic = 0);
//   2. reads the bias word of oc from the MRAM;
//   3. lets post-processing add the bias, rescale, activate and pool;
//   4. starts the output router on SRAM rows out_base + oc*P.
// and then pulses 'done'. The MRAM holds up to N_MODELS models; a small
// table, written by the host, gives each model's base address. Within a
// model a layer starts at coef_off, and output channel oc uses cin filter
// words followed by one bias word: word base + coef_off + oc*(cin+1) + ic,
// bias at ic = cin.
//
// Timing: each input channel takes P+3 cycles (start, P-row load, MAC in
// the cycle the load completes), each output channel cin*(P+3) + R + 5
// cycles where R = P rows written (P/2 when pooling). busy is high from the
// cycle after start; 'done' pulses in the first idle cycle after the last
// output channel, 1 + cout*(cin*(P+3) + R + 5) cycles after start. The order of work (coefficients in MRAM, data in
// SRAM, MAC array, results out) is the engine's; the loop order, the
// descriptor, the coefficient layout and the timing are this design's.
module control_unit
  import mram_cnn_pkg::*;
#(
  parameter int unsigned N_MODELS = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  // model table
  input  logic               model_we,
  input  logic [MODEL_W-1:0] model_id_w,
  input  logic [MRAM_AW-1:0] model_base_w,
  // layer command
  input  logic               start,
  input  layer_desc_t        desc,
  output logic               busy,
  output logic               done,
  // coefficient MRAM read port
  output logic               mram_re,
  output logic [MRAM_AW-1:0] mram_raddr,
  // input router
  output logic               ir_start,
  output logic [SRAM_AW-1:0] ir_base,
  input  logic               ir_done,
  // MPE
  output logic               mpe_clr,
  output logic               mpe_mac_en,
  // post-processing
  output logic               pp_en,
  output logic [SHIFT_W-1:0] pp_shift,
  output logic               pp_relu,
  output logic               pp_pool,
  // output router
  output logic               or_start,
  output logic [SRAM_AW-1:0] or_base,
  output logic [1:0]         or_quad,
  input  logic               or_done
);

  typedef enum logic [2:0] {
    S_IDLE, S_TILE, S_LOAD, S_BIAS, S_BIASW, S_POST, S_OUT, S_OWAIT
  } state_t;

  state_t             state;
  layer_desc_t        d;
  logic [MRAM_AW-1:0] model_base [N_MODELS];
  logic [MRAM_AW-1:0] coef_ptr;
  logic [SRAM_AW-1:0] in_ptr;
  logic [SRAM_AW-1:0] out_ptr;
  logic [CH_W-1:0]    ic, oc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_MODELS; i++) model_base[i] <= '0;
    end else if (model_we && 32'(model_id_w) < N_MODELS) begin
      model_base[model_id_w] <= model_base_w;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      d        <= '0;
      coef_ptr <= '0;
      in_ptr   <= '0;
      out_ptr  <= '0;
      ic       <= '0;
      oc       <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          d        <= desc;
          coef_ptr <= ((32'(desc.model) < N_MODELS) ? model_base[desc.model] : '0)
                      + desc.coef_off;
          in_ptr   <= desc.in_base;
          out_ptr  <= desc.out_base;
          ic       <= '0;
          oc       <= '0;
          state    <= S_TILE;
        end
        S_TILE: begin
          coef_ptr <= coef_ptr + 1'b1;
          state    <= S_LOAD;
        end
        S_LOAD: if (ir_done) begin
          if (ic == d.cin - 1'b1) begin
            ic     <= '0;
            in_ptr <= d.in_base;
            state  <= S_BIAS;
          end else begin
            ic     <= ic + 1'b1;
            in_ptr <= in_ptr + SRAM_AW'(P);
            state  <= S_TILE;
          end
        end
        S_BIAS: begin
          coef_ptr <= coef_ptr + 1'b1;
          state    <= S_BIASW;
        end
        S_BIASW: state <= S_POST;
        S_POST:  state <= S_OUT;
        S_OUT:   state <= S_OWAIT;
        S_OWAIT: if (or_done) begin
          out_ptr <= out_ptr + SRAM_AW'(P);
          if (oc == d.cout - 1'b1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            oc    <= oc + 1'b1;
            state <= S_TILE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy       = (state != S_IDLE);
    mram_re    = (state == S_TILE) || (state == S_BIAS);
    mram_raddr = coef_ptr;
    ir_start   = (state == S_TILE);
    ir_base    = in_ptr;
    mpe_mac_en = (state == S_LOAD) && ir_done;
    mpe_clr    = mpe_mac_en && (ic == '0);
    pp_en      = (state == S_POST);
    pp_shift   = d.shift;
    pp_relu    = d.relu_en;
    pp_pool    = d.pool_en;
    or_start   = (state == S_OUT);
    or_base    = out_ptr;
    or_quad    = d.quad;
  end

endmodule
