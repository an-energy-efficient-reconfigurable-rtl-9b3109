// tb_matrix_unit: loads a random 28x28 image, then scans it with several pass
// geometries (same / full / valid padding, pool stride 2 and 1, no pool) under
// random back-pressure. Every window is compared with a reference gathered
// from the image with explicit zero padding, the window count and row-major
// order are checked, and the rate of one window per cycle without
// back-pressure is checked. A second part writes a map into the other bank
// through the feedback port and scans that bank.
module tb_matrix_unit;
  import ae_pkg::*;
  localparam int D = 28;
  localparam int AW = $clog2(D * D);
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, load_en, loaded, start, rd_bank, scan_busy;
  logic patch_valid, patch_ready, fb_we;
  pix_t in_pixel, fb_data;
  logic [AW-1:0] fb_addr;
  geom_t geom;
  patch_t patch;
  int checks = 0, failures = 0;
  int img [2][D][D];

  matrix_unit #(.MAX_DIM(D), .IMG_DIM(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pix(int b, int r, int c, int h, int w);
    if (r < 0 || c < 0 || r >= h || c >= w) return 0;
    return img[b][r][c];
  endfunction

  task automatic scan(int bank, int h, int w, int sh, int sw, int stride, int ptl, bit bp);
    int n, cyc;
    geom = '0;
    geom.in_h = dim_t'(h); geom.in_w = dim_t'(w);
    geom.scan_h = dim_t'(sh); geom.scan_w = dim_t'(sw);
    geom.stride = 2'(stride); geom.pad_tl = ptl[0];
    rd_bank = bank[0];
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    n = 0; cyc = 0;
    while (n < sh * sw && cyc < 20000) begin
      patch_ready = bp ? (($urandom % 3) != 0) : 1'b1;
      #1;
      if (patch_valid && patch_ready) begin
        int r, c;
        r = n / sw; c = n % sw;
        checks++;
        if (patch.row != coord_t'(r) || patch.col != coord_t'(c)) begin
          failures++; $display("order: got (%0d,%0d) exp (%0d,%0d)", patch.row, patch.col, r, c);
        end
        for (int i = 0; i < 3; i++)
          for (int j = 0; j < 3; j++) begin
            int e;
            e = pix(bank, r * stride - ptl + i, c * stride - ptl + j, h, w);
            checks++;
            if (int'(patch.px[i*3+j]) != e) begin
              failures++;
              if (failures < 10) $display("win (%0d,%0d)[%0d,%0d] got %0d exp %0d", r, c, i, j, patch.px[i*3+j], e);
            end
          end
        n++;
      end
      @(negedge clk);
      cyc++;
    end
    patch_ready = 0;
    checks++;
    if (patch_valid || scan_busy) begin failures++; $display("scan did not stop after %0d windows", n); end
    if (!bp) begin
      checks++;
      if (cyc != sh * sw) begin failures++; $display("rate: %0d cycles for %0d windows", cyc, sh * sw); end
    end
  endtask

  initial begin
    in_valid = 0; load_en = 1; start = 0; rd_bank = 0; patch_ready = 0;
    fb_we = 0; fb_addr = 0; fb_data = 0; in_pixel = 0; geom = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load image with random gaps
    for (int k = 0; k < D * D; ) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      in_pixel = 8'($urandom);
      if (in_valid) begin img[0][k / D][k % D] = int'(in_pixel); k++; end
      @(posedge clk); #1;
      if (k == D * D) begin
        checks++;
        if (!loaded) begin failures++; $display("loaded not pulsed"); end
      end
    end
    @(negedge clk); in_valid = 0; load_en = 0;
    scan(0, 28, 28, 14, 14, 2, 0, 0);   // same pad, pool stride 2
    scan(0, 28, 28, 14, 14, 2, 1, 1);   // full pad, pool stride 2
    scan(0, 28, 28, 28, 28, 1, 1, 1);   // full pad, pool stride 1
    scan(0, 28, 28, 27, 27, 1, 0, 0);   // valid pad, no pool
    scan(0, 7, 9, 4, 5, 2, 1, 1);       // smaller map
    // feedback writes into bank 1 while bank 0 is the read bank
    rd_bank = 0;
    for (int r = 0; r < 14; r++)
      for (int c = 0; c < 14; c++) begin
        @(negedge clk);
        fb_we = 1; fb_addr = AW'(r * D + c); fb_data = 8'($urandom);
        img[1][r][c] = int'(fb_data);
      end
    @(negedge clk); fb_we = 0;
    scan(1, 14, 14, 14, 14, 1, 0, 1);   // same pad, no pool on bank 1
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
