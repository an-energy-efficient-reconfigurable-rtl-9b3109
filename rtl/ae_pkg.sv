// ae_pkg: types, constants and geometry helpers shared by the convolutional
// autoencoder accelerator.
//
// The accelerator runs the 13-layer autoencoder (conv / 2x2 max-pool three
// times, conv / 2x2 up-sample three times, a final conv) as seven passes of
// one reconfigurable engine. Each pass is described by a layer_cfg_t: its
// padding, what follows the convolution (pool, up-sample or nothing), the
// pool stride, the requantisation shift and the 2x2 kernel with its bias.
// The 2x2 window ("window size 4"), the layer order and the 28x28x1 image
// follow the published design; every bit width here is this design's choice.
package ae_pkg;

  localparam int unsigned PIX_W   = 8;   // unsigned pixel
  localparam int unsigned W_W     = 8;   // signed weight
  localparam int unsigned B_W     = 16;  // signed bias
  localparam int unsigned ACC_W   = 20;  // signed accumulator
  localparam int unsigned COORD_W = 5;   // row / column index (dims up to 31)
  localparam int unsigned DIM_W   = 6;   // dimension arithmetic (values up to 63)
  localparam int unsigned NPASS   = 7;   // 7 convolution passes = 13 layers

  typedef logic [PIX_W-1:0]   pix_t;
  typedef logic [COORD_W-1:0] coord_t;
  typedef logic [DIM_W-1:0]   dim_t;

  // Zero padding around the feature map for the 2x2 convolution.
  //  PAD_VALID: none, conv output is (H-1)x(W-1)
  //  PAD_SAME : one zero row/column at bottom and right, output HxW
  //  PAD_FULL : one-pixel zero ring on all four sides, output (H+1)x(W+1)
  typedef enum logic [1:0] {PAD_VALID = 2'd0, PAD_SAME = 2'd1, PAD_FULL = 2'd2} pad_e;

  // Operation after convolution + ReLU.
  typedef enum logic [1:0] {OP_NONE = 2'd0, OP_POOL = 2'd1, OP_UP = 2'd2} post_e;

  typedef struct packed {
    pad_e                    pad;
    post_e                   post;
    logic [1:0]              pool_stride;  // 1 or 2
    logic [3:0]              shift;        // requantisation right shift
    logic signed [W_W-1:0]   w00, w01, w10, w11;  // kernel k[row][col]
    logic signed [B_W-1:0]   bias;
  } layer_cfg_t;

  // A 3x3 window of the padded feature map; px[r*3+c]. It produces the
  // output pixel at (row, col) of the current pass (before up-sampling).
  typedef struct packed {
    logic [8:0][PIX_W-1:0] px;
    coord_t                row;
    coord_t                col;
  } patch_t;

  // One output pixel of a lane, tagged with its coordinate.
  typedef struct packed {
    pix_t   val;
    coord_t row;
    coord_t col;
  } result_t;

  // Geometry of one pass, worked out from the input size and layer_cfg_t.
  typedef struct packed {
    dim_t in_h, in_w;       // feature map read by the pass
    dim_t scan_h, scan_w;   // number of windows (results) per row / column
    dim_t out_h, out_w;     // feature map written by the pass
    logic [1:0] stride;     // window step in input pixels (1 for no pool)
    logic       pad_tl;     // 1: window origin shifted up/left by one (PAD_FULL)
  } geom_t;

  function automatic dim_t conv_dim(dim_t d, pad_e pad);
    unique case (pad)
      PAD_VALID: return d - dim_t'(1);
      PAD_FULL:  return d + dim_t'(1);
      default:   return d;
    endcase
  endfunction

  function automatic geom_t make_geom(dim_t h, dim_t w, layer_cfg_t c);
    geom_t g;
    dim_t ch, cw;
    ch = conv_dim(h, c.pad);
    cw = conv_dim(w, c.pad);
    g.in_h   = h;
    g.in_w   = w;
    g.pad_tl = (c.pad == PAD_FULL);
    if (c.post == OP_POOL) begin
      g.stride = c.pool_stride;
      if (c.pool_stride == 2'd2) begin
        g.scan_h = (ch - dim_t'(2)) / dim_t'(2) + dim_t'(1);
        g.scan_w = (cw - dim_t'(2)) / dim_t'(2) + dim_t'(1);
      end else begin
        g.scan_h = ch - dim_t'(1);
        g.scan_w = cw - dim_t'(1);
      end
      g.out_h = g.scan_h;
      g.out_w = g.scan_w;
    end else begin
      g.stride = 2'd1;
      g.scan_h = ch;
      g.scan_w = cw;
      g.out_h  = (c.post == OP_UP) ? dim_t'(ch << 1) : ch;
      g.out_w  = (c.post == OP_UP) ? dim_t'(cw << 1) : cw;
    end
    return g;
  endfunction

  // Default pass settings: identity kernel (64 with shift 6).
  // 28 -> 14 -> 7 -> 4 (bottleneck) -> 8 -> 14 -> 28 -> 28.
  function automatic layer_cfg_t default_cfg(int p);
    layer_cfg_t c;
    c = '0;
    c.pool_stride = 2'd2;
    c.shift = 4'd6;
    c.w00   = 8'sd64;
    case (p)
      0, 1:    begin c.pad = PAD_SAME;  c.post = OP_POOL; end
      2:       begin c.pad = PAD_FULL;  c.post = OP_POOL; end
      3, 5:    begin c.pad = PAD_SAME;  c.post = OP_UP;   end
      4:       begin c.pad = PAD_VALID; c.post = OP_UP;   end
      default: begin c.pad = PAD_SAME;  c.post = OP_NONE; end
    endcase
    return c;
  endfunction

endpackage
