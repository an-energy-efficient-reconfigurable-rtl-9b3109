// conv_lane: one channel of the encoding & decoding module
// (Conv -> Activ -> Pooling / Up-sampling).
//
// A lane takes one 3x3 window from its FIFO and produces one output pixel.
//  * Convolution: f = bias + sum k[a][b] * x[r+a][c+b] over the 2x2 kernel
//    (four multipliers, one 2x2 convolution per cycle).
//  * Activation: ReLU max(0,f), then an arithmetic right shift by cfg.shift
//    and saturation to the 8-bit pixel range (the shift turns the fixed-point
//    weights back into pixel scale).
//  * Pooling (cfg.post == OP_POOL): the four convolutions at offsets (0,0),
//    (0,1), (1,0), (1,1) of the window are computed in four cycles and the
//    maximum is kept (2x2 max pooling). Otherwise one convolution at (0,0) is
//    computed in one cycle; up-sampling (2x2 replication) is done downstream by
//    the output controller, which knows the output grid.
// Timing: window accepted in IDLE, then 1 (no pool) or 4 (pool) compute
// cycles, then the result waits in DONE until out_ready. A lane therefore
// delivers a pooled pixel every 6 cycles at best, an unpooled one every 3.
// Conv, ReLU, max pooling and the 2x2 window follow the published design; the
// fixed-point format and the cycle schedule are this design's choices.
module conv_lane
  import ae_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  layer_cfg_t cfg,        // stable during a pass
  input  logic       in_valid,
  output logic       in_ready,
  input  patch_t     in_patch,
  output logic       out_valid,
  input  logic       out_ready,
  output result_t    out_res
);
  typedef enum logic [1:0] {S_IDLE, S_CONV, S_DONE} state_e;

  state_e     state;
  patch_t     win;
  logic [1:0] k;          // which of the four convolutions
  pix_t       best;
  pix_t       act;

  // The 2x2 sub-window at offset (k[1], k[0]) of the held 3x3 window.
  pix_t x00, x01, x10, x11;
  always_comb begin
    unique case (k)
      2'd0:    begin x00 = win.px[0]; x01 = win.px[1]; x10 = win.px[3]; x11 = win.px[4]; end
      2'd1:    begin x00 = win.px[1]; x01 = win.px[2]; x10 = win.px[4]; x11 = win.px[5]; end
      2'd2:    begin x00 = win.px[3]; x01 = win.px[4]; x10 = win.px[6]; x11 = win.px[7]; end
      default: begin x00 = win.px[4]; x01 = win.px[5]; x10 = win.px[7]; x11 = win.px[8]; end
    endcase
  end

  // Convolution, ReLU and requantisation of that sub-window.
  logic signed [ACC_W-1:0] acc, acc_relu, acc_sh;
  assign acc = ACC_W'(cfg.bias)
             + ACC_W'(cfg.w00 * $signed({1'b0, x00}))
             + ACC_W'(cfg.w01 * $signed({1'b0, x01}))
             + ACC_W'(cfg.w10 * $signed({1'b0, x10}))
             + ACC_W'(cfg.w11 * $signed({1'b0, x11}));
  assign acc_relu = (acc < 0) ? '0 : acc;            // ReLU
  assign acc_sh   = acc_relu >>> cfg.shift;
  assign act      = (acc_sh > ACC_W'(2**PIX_W - 1)) ? '1 : pix_t'(acc_sh);

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_DONE);
  assign out_res.val = best;
  assign out_res.row = win.row;
  assign out_res.col = win.col;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      win   <= '0;
      k     <= '0;
      best  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          win   <= in_patch;
          k     <= '0;
          best  <= '0;
          state <= S_CONV;
        end
        S_CONV: begin
          if (k == 2'd0 || act > best) best <= act;
          if (cfg.post != OP_POOL || k == 2'd3) state <= S_DONE;
          else                                  k <= k + 2'd1;
        end
        S_DONE: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
