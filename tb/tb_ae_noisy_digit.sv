// tb_ae_noisy_digit: the denoising workload at full size. Synthetic 28x28
// digits ("0" and "1") with added, roughly Gaussian noise are run through the
// seven-pass network with 2x2 box-filter kernels in every layer (no trained
// weights are available). Every output pixel is compared with the integer
// reference model, the image must finish within 291,000 cycles (2.91 ms at
// 100 MHz), and the mean error against the clean digit is printed before and
// after, for information only: box filters are not a trained denoiser.
module tb_ae_noisy_digit;
  import ae_pkg::*;
  localparam int D = 28;
  localparam int LAT_LIMIT = 291000;

  logic clk = 0, rst_n = 0;
  logic cfg_we;
  logic [$clog2(NPASS)-1:0] cfg_pass, pass_idx;
  layer_cfg_t cfg_data;
  logic in_valid, in_ready, out_valid, out_ready, out_last, busy, done;
  pix_t in_pixel, out_pixel;
  coord_t out_row, out_col;

  ae_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_pool = 0, n_up = 0, n_none = 0, n_s1 = 0, n_s2 = 0;
  int n_valid_pad = 0, n_same_pad = 0, n_full_pad = 0;
  int n_fb = 0, n_stall = 0, n_contend = 0, n_bp = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  always @(posedge clk) if (rst_n) begin
    if (dut.u_out.fb_we) n_fb++;
    if (dut.patch_valid && !dut.patch_ready) n_stall++;
    if ($countones(dut.u_pack.full) > 1) n_contend++;
    if (out_valid && !out_ready) n_bp++;
    if (dut.start) begin
      unique case (dut.cur_cfg.post)
        OP_POOL: begin n_pool++; if (dut.cur_cfg.pool_stride == 2'd1) n_s1++; else n_s2++; end
        OP_UP:   n_up++;
        default: n_none++;
      endcase
      unique case (dut.cur_cfg.pad)
        PAD_VALID: n_valid_pad++;
        PAD_FULL:  n_full_pad++;
        default:   n_same_pad++;
      endcase
    end
  end

  // ---------------- reference model ----------------
  layer_cfg_t cfgs [NPASS];
  int img [D][D];
  int clean [D][D];
  int ref_map [64][64];
  int ref_h, ref_w;

  function automatic int clampv(int acc, int sh);
    if (acc < 0) acc = 0;
    acc = acc / (1 << sh);
    return (acc > 255) ? 255 : acc;
  endfunction

  task automatic reference();
    int m [64][64], cv [64][64], o [64][64];
    int h, w, ch, cw, pt, s, oh, ow;
    h = D; w = D;
    for (int r = 0; r < D; r++) for (int c = 0; c < D; c++) m[r][c] = img[r][c];
    for (int p = 0; p < NPASS; p++) begin
      layer_cfg_t k;
      k = cfgs[p];
      pt = (k.pad == PAD_FULL) ? 1 : 0;
      ch = (k.pad == PAD_FULL) ? h + 1 : (k.pad == PAD_VALID) ? h - 1 : h;
      cw = (k.pad == PAD_FULL) ? w + 1 : (k.pad == PAD_VALID) ? w - 1 : w;
      for (int i = 0; i < ch; i++)
        for (int j = 0; j < cw; j++) begin
          int acc;
          acc = int'(k.bias);
          for (int a = 0; a < 2; a++)
            for (int b = 0; b < 2; b++) begin
              int rr, cc, x, wt;
              rr = i - pt + a; cc = j - pt + b;
              x = (rr >= 0 && cc >= 0 && rr < h && cc < w) ? m[rr][cc] : 0;
              wt = (a == 0) ? ((b == 0) ? int'(k.w00) : int'(k.w01))
                            : ((b == 0) ? int'(k.w10) : int'(k.w11));
              acc += wt * x;
            end
          cv[i][j] = clampv(acc, int'(k.shift));
        end
      if (k.post == OP_POOL) begin
        s = int'(k.pool_stride);
        oh = (ch - 2) / s + 1; ow = (cw - 2) / s + 1;
        for (int i = 0; i < oh; i++)
          for (int j = 0; j < ow; j++) begin
            int mx = 0;
            for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++)
              if (cv[i*s+a][j*s+b] > mx) mx = cv[i*s+a][j*s+b];
            o[i][j] = mx;
          end
      end else if (k.post == OP_UP) begin
        oh = 2 * ch; ow = 2 * cw;
        for (int i = 0; i < oh; i++) for (int j = 0; j < ow; j++) o[i][j] = cv[i/2][j/2];
      end else begin
        oh = ch; ow = cw;
        for (int i = 0; i < oh; i++) for (int j = 0; j < ow; j++) o[i][j] = cv[i][j];
      end
      h = oh; w = ow;
      for (int i = 0; i < h; i++) for (int j = 0; j < w; j++) m[i][j] = o[i][j];
    end
    ref_h = h; ref_w = w;
    for (int i = 0; i < h; i++) for (int j = 0; j < w; j++) ref_map[i][j] = m[i][j];
  endtask

  // Synthetic digit on a black background: shape 0 is an upright ellipse
  // ring ("0"), shape 1 a slanted bar with a foot ("1"). Noise is the sum of
  // four uniform values, roughly Gaussian with sigma about 37 grey levels.
  task automatic make_digit(int shape);
    for (int r = 0; r < D; r++)
      for (int c = 0; c < D; c++) begin
        int d, v, n;
        if (shape == 0) begin
          d = 36 * (r - 14) * (r - 14) + 81 * (c - 14) * (c - 14);
          v = (d > 2000 && d < 3900) ? 230 : 0;
        end else begin
          v = ((c - 14 + (r - 14) / 4) >= -1 && (c - 14 + (r - 14) / 4) <= 1 && r >= 4 && r <= 23) ? 230 : 0;
          if (r >= 22 && r <= 23 && c >= 10 && c <= 18) v = 230;
        end
        clean[r][c] = v;
        n = int'($urandom % 64) + int'($urandom % 64) + int'($urandom % 64) + int'($urandom % 64) - 126;
        v = v + n;
        img[r][c] = (v < 0) ? 0 : (v > 255) ? 255 : v;
      end
  endtask

  function automatic int mae_noisy();
    int s = 0;
    for (int r = 0; r < D; r++) for (int c = 0; c < D; c++)
      s += (img[r][c] > clean[r][c]) ? img[r][c] - clean[r][c] : clean[r][c] - img[r][c];
    return s / (D * D);
  endfunction

  // ---------------- stimulus helpers ----------------
  task automatic write_cfg(int p, layer_cfg_t c);
    @(negedge clk);
    cfg_we = 1; cfg_pass = 3'(p); cfg_data = c;
    @(negedge clk);
    cfg_we = 0;
    cfgs[p] = c;
  endtask

  task automatic run_image(string name, bit bp);
    int got [64][64];
    int cnt [64][64];
    int n_out, t0, lat, errs;
    bit finished;
    reference();
    for (int i = 0; i < 64; i++) for (int j = 0; j < 64; j++) cnt[i][j] = 0;
    // stream the image in
    for (int k = 0; k < D * D; ) begin
      @(negedge clk);
      in_valid = ($urandom % 5) != 0;
      in_pixel = 8'(img[k / D][k % D]);
      #1;
      if (in_valid && in_ready) k++;
    end
    @(negedge clk);
    in_valid = 0;
    t0 = int'($time / 10);
    n_out = 0; finished = 0;
    while (!finished) begin
      out_ready = bp ? (($urandom % 4) != 0) : 1'b1;
      @(posedge clk);
      if (out_valid && out_ready) begin
        got[int'(out_row)][int'(out_col)] = int'(out_pixel);
        cnt[int'(out_row)][int'(out_col)]++;
        checks++;
        if (out_last != (n_out == ref_h * ref_w - 1) || !busy) begin
          failures++; $display("%s: out_last=%0b busy=%0b at output pixel %0d", name, out_last, busy, n_out);
        end
        n_out++;
      end
      if (done) finished = 1;
      @(negedge clk);
    end
    lat = int'($time / 10) - t0;
    errs = 0;
    checks++;
    if (n_out != ref_h * ref_w) begin
      failures++; $display("%s: %0d pixels out, expected %0d", name, n_out, ref_h * ref_w);
    end
    for (int i = 0; i < ref_h; i++)
      for (int j = 0; j < ref_w; j++) begin
        checks++;
        if (cnt[i][j] != 1 || got[i][j] != ref_map[i][j]) begin
          failures++; errs++;
          if (errs < 6) $display("%s: pixel (%0d,%0d) got %0d x%0d exp %0d", name, i, j, got[i][j], cnt[i][j], ref_map[i][j]);
        end
      end
    checks++;
    if (lat > LAT_LIMIT) begin failures++; $display("%s: latency %0d cycles", name, lat); end
    $display("%s: %0dx%0d image, %0d cycles from load to done, %0d pixel errors", name, ref_h, ref_w, lat, errs);
    begin
      int so = 0;
      for (int r = 0; r < D; r++) for (int c = 0; c < D; c++)
        so += (got[r][c] > clean[r][c]) ? got[r][c] - clean[r][c] : clean[r][c] - got[r][c];
      $display("%s: mean |noisy - clean| = %0d, mean |output - clean| = %0d", name, mae_noisy(), so / (D * D));
    end
  endtask

  function automatic layer_cfg_t rand_cfg(layer_cfg_t base);
    layer_cfg_t c;
    c = base;
    c.w00 = 8'($urandom % 96) - 8'sd16;
    c.w01 = 8'($urandom % 96) - 8'sd16;
    c.w10 = 8'($urandom % 96) - 8'sd16;
    c.w11 = 8'($urandom % 96) - 8'sd16;
    c.bias = 16'($signed($urandom % 512) - 256);
    c.shift = 4'd6 + 4'($urandom % 2);
    return c;
  endfunction

  // 2x2 box filter: four taps of 16 with shift 6 average the window.
  function automatic layer_cfg_t box_cfg(int p);
    layer_cfg_t c;
    c = default_cfg(p);
    c.w00 = 8'sd16; c.w01 = 8'sd16; c.w10 = 8'sd16; c.w11 = 8'sd16;
    c.bias = -16'sd512;   // subtract 8 grey levels of background noise
    c.shift = 4'd6;
    return c;
  endfunction

  initial begin
    cfg_we = 0; cfg_pass = 0; cfg_data = '0; in_valid = 0; in_pixel = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int p = 0; p < NPASS; p++) write_cfg(p, box_cfg(p));
    for (int k = 0; k < 4; k++) begin
      make_digit(k % 2);
      run_image((k % 2 == 0) ? "noisy 0" : "noisy 1", k >= 2);
    end
    begin
      string nm [9];
      int v [9];
      nm = '{"pool pass", "up-sample pass", "plain pass", "stride-2 pool",
             "valid padding", "same padding", "full padding", "feedback write",
             "packaging contention"};
      v = '{n_pool, n_up, n_none, n_s2, n_valid_pad, n_same_pad, n_full_pad, n_fb,
            n_contend};
      for (int i = 0; i < 9; i++) begin
        checks++;
        $display("mechanism %-22s %0d", nm[i], v[i]);
        if (v[i] == 0) begin failures++; $display("mechanism %s never happened", nm[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
