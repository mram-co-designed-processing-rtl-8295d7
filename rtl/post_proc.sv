// Post-processing of a finished tile: bias, rescale, activation, pooling.
//
// For each of the P x P weighted sums: add the bias (sign-extended), shift
// right arithmetically by 'shift' with rounding (half up), saturate to the
// 9-bit activation range [-256, 255], and, if relu_en, clamp negatives to 0.
// If pool_en, a 2x2 max pooling with stride 2 follows and shrinks the tile
// by four: the (P/2) x (P/2) result sits in rows and columns 0..P/2-1 of
// 'result' and the rest is zero.
//
// Timing: one register stage; at a clock edge with en=1 the result of the
// current inputs is stored and appears on 'result' after that edge. The
// bias, activation and pooling steps are those of the engine; ReLU as the
// activation, the shift-and-saturate rescaling and pooling being optional
// per layer are this design's choices.
module post_proc
  import mram_cnn_pkg::*;
(
  input  logic               clk,
  input  logic               en,
  input  acc_tile_t          acc,
  input  coef_t              bias,
  input  logic [SHIFT_W-1:0] shift,
  input  logic               relu_en,
  input  logic               pool_en,
  output act_tile_t          result
);

  localparam logic signed [ACC_W:0] ACT_MAX = (ACC_W+1)'((1 <<< (ACT_W - 1)) - 1);
  localparam logic signed [ACC_W:0] ACT_MIN = -(ACC_W+1)'(1 <<< (ACT_W - 1));
  localparam int unsigned H = P / 2;

  act_tile_t act;
  act_tile_t nxt;

  function automatic act_t rescale(acc_t a, coef_t b, logic [SHIFT_W-1:0] sh, logic relu);
    logic signed [ACC_W:0] v;
    logic signed [ACC_W:0] rnd;
    v   = (ACC_W+1)'(a) + (ACC_W+1)'(b);
    rnd = (sh == '0) ? '0 : ((ACC_W+1)'(1) <<< (sh - 1'b1));
    v   = (v + rnd) >>> sh;
    if (v > ACT_MAX) v = ACT_MAX;
    if (v < ACT_MIN) v = ACT_MIN;
    if (relu && v < 0) v = '0;
    return act_t'(v);
  endfunction

  function automatic act_t max2(act_t a, act_t b);
    return (a > b) ? a : b;
  endfunction

  always_comb begin
    for (int y = 0; y < P; y++)
      for (int x = 0; x < P; x++)
        act[y][x] = rescale(acc[y][x], bias, shift, relu_en);
    for (int y = 0; y < P; y++)
      for (int x = 0; x < P; x++) begin
        if (!pool_en)
          nxt[y][x] = act[y][x];
        else if (y < H && x < H)
          nxt[y][x] = max2(max2(act[2*y][2*x],   act[2*y][2*x+1]),
                           max2(act[2*y+1][2*x], act[2*y+1][2*x+1]));
        else
          nxt[y][x] = '0;
      end
  end

  always_ff @(posedge clk) begin
    if (en) result <= nxt;
  end

endmodule
