// matrix_unit: the "Matrix" stage. It stores the feature map of the current
// layer and reads it out as zero-padded 3x3 windows, one per cycle.
//
// Two banks of MAX_DIM x MAX_DIM pixels form a ping-pong pair. The input image
// is loaded in raster order into bank 0 through in_valid/in_ready; loaded
// pulses after the last of IMG_DIM*IMG_DIM pixels. A pulse on start begins a
// pass: the window scanner walks the output grid of the pass (geom.scan_h by
// geom.scan_w, row-major) and offers, for output (r,c), the 3x3 window whose
// top-left corner is input pixel (r*stride - pad_tl, c*stride - pad_tl) of bank
// rd_bank. Pixels outside the in_h x in_w map read as zero, which implements
// the zero border of the convolution without storing it. patch_valid stays
// high until the last window is accepted (patch_ready), then scan_busy drops.
// The output controller writes the next layer into the other bank through
// fb_we/fb_addr/fb_data (address = row*MAX_DIM + col) while the scan runs.
//
// Keeping the map in flops so that nine pixels can be read at once, and doing
// the padding on the fly, are this design's choices; the published design
// describes this stage only as the boundary handling of the 28x28x1 image.
// in_ready is load_en itself: the image port takes a pixel every cycle while
// the engine is idle.
module matrix_unit
  import ae_pkg::*;
#(
  parameter int unsigned MAX_DIM = 28,
  parameter int unsigned IMG_DIM = 28,
  localparam int unsigned AW = $clog2(MAX_DIM * MAX_DIM)
) (
  input  logic    clk,
  input  logic    rst_n,
  // image load (bank 0)
  input  logic    in_valid,
  output logic    in_ready,
  input  pix_t    in_pixel,
  input  logic    load_en,     // image loading allowed (engine idle)
  output logic    loaded,
  // pass control
  input  logic    start,
  input  logic    rd_bank,
  input  geom_t   geom,
  output logic    scan_busy,
  // window stream
  output logic    patch_valid,
  input  logic    patch_ready,
  output patch_t  patch,
  // feedback write into bank !rd_bank
  input  logic    fb_we,
  input  logic [AW-1:0] fb_addr,
  input  pix_t    fb_data
);
  localparam int unsigned NPIX = IMG_DIM * IMG_DIM;

  pix_t mem [2][MAX_DIM*MAX_DIM];

  // ---------------- image load ----------------
  logic [AW-1:0] load_addr;
  logic          load_fire;

  assign in_ready  = load_en;
  assign load_fire = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      load_addr <= '0;
      loaded    <= 1'b0;
    end else begin
      loaded <= 1'b0;
      if (load_fire) begin
        if (load_addr == AW'(NPIX-1)) begin
          load_addr <= '0;
          loaded    <= 1'b1;
        end else begin
          load_addr <= load_addr + AW'(1);
        end
      end
    end
  end

  // raster load address -> (row, col) on the MAX_DIM pitch
  logic [AW-1:0] load_row, load_col;
  assign load_row = load_addr / AW'(IMG_DIM);
  assign load_col = load_addr % AW'(IMG_DIM);

  always_ff @(posedge clk) begin
    if (load_fire)
      mem[0][load_row * AW'(MAX_DIM) + load_col] <= in_pixel;
    if (fb_we)
      mem[!rd_bank][fb_addr] <= fb_data;
  end

  // ---------------- window scanner ----------------
  coord_t r, c;
  logic   active;

  assign scan_busy   = active;
  assign patch_valid = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      r      <= '0;
      c      <= '0;
    end else if (start && !active) begin
      active <= (geom.scan_h != '0) && (geom.scan_w != '0);
      r      <= '0;
      c      <= '0;
    end else if (active && patch_ready) begin
      if (dim_t'(c) == geom.scan_w - dim_t'(1)) begin
        c <= '0;
        if (dim_t'(r) == geom.scan_h - dim_t'(1)) begin
          active <= 1'b0;
          r      <= '0;
        end else begin
          r <= r + coord_t'(1);
        end
      end else begin
        c <= c + coord_t'(1);
      end
    end
  end

  // window gather with zero padding
  always_comb begin
    logic signed [DIM_W+1:0] rb, cb, ri, ci;
    rb = $signed({2'b00, dim_t'(r)} * {{DIM_W{1'b0}}, geom.stride}) - (DIM_W+2)'(geom.pad_tl);
    cb = $signed({2'b00, dim_t'(c)} * {{DIM_W{1'b0}}, geom.stride}) - (DIM_W+2)'(geom.pad_tl);
    patch.row = r;
    patch.col = c;
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < 3; j++) begin
        ri = rb + (DIM_W+2)'(i);
        ci = cb + (DIM_W+2)'(j);
        if (ri >= 0 && ci >= 0 &&
            ri < $signed({2'b00, geom.in_h}) && ci < $signed({2'b00, geom.in_w}))
          patch.px[i*3+j] = mem[rd_bank][AW'(ri) * AW'(MAX_DIM) + AW'(ci)];
        else
          patch.px[i*3+j] = '0;
      end
    end
  end

  a_fb_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                                  fb_we |-> fb_addr < AW'(MAX_DIM*MAX_DIM));
endmodule
