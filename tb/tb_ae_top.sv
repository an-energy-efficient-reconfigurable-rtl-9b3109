// tb_ae_top: end-to-end test of the accelerator at its default size
// (28x28 image, 4 channels, 7 passes). A behavioural reference written with
// plain integers runs the same layer settings (zero-padded 2x2 convolution,
// ReLU, shift and clamp, 2x2 max pooling, 2x nearest-neighbour up-sampling)
// and every pixel of the reconstructed image is compared with it.
// Runs: (1) reset settings (identity kernels, 28->14->7->4->8->14->28->28);
// (2) random kernels written through the configuration port, random output
// back-pressure; (3) a reconfigured schedule with stride-1 pooling and full
// padding, as in the layer table read literally; (4) a fourth image with new random
// kernels on the reset schedule, to check that one image follows another.
// It counts the mechanisms of the design and fails if one never happened:
// pooling, up-sampling and plain passes, stride-1 and stride-2 pooling, each
// padding mode, feedback writes, the channel controller stalling on a full
// FIFO, several channels competing in the round-robin packaging stage, and
// output back-pressure. Each image must finish within 291,000 cycles, the
// 2.91 ms per image reported for the FPGA build at 100 MHz.
module tb_ae_top;
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
    for (int r = 0; r < D; r++) for (int c = 0; c < D; c++) img[r][c] = int'($urandom % 256);
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

  initial begin
    cfg_we = 0; cfg_pass = 0; cfg_data = '0; in_valid = 0; in_pixel = 0; out_ready = 1;
    for (int p = 0; p < NPASS; p++) cfgs[p] = default_cfg(p);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    run_image("reset settings", 0);

    for (int p = 0; p < NPASS; p++) write_cfg(p, rand_cfg(default_cfg(p)));
    run_image("random kernels", 1);

    // stride-1 pooling with a full zero ring: 28 -> 29 -> 28 at every encoder pass
    for (int p = 0; p < 3; p++) begin
      layer_cfg_t c;
      c = rand_cfg(default_cfg(p));
      c.pad = PAD_FULL; c.pool_stride = 2'd1;
      write_cfg(p, c);
    end
    begin
      layer_cfg_t c;
      c = rand_cfg(default_cfg(3)); c.pad = PAD_VALID; c.post = OP_NONE; write_cfg(3, c);  // 27
      c = rand_cfg(default_cfg(4)); c.pad = PAD_FULL;  c.post = OP_NONE; write_cfg(4, c);  // 28
      c = rand_cfg(default_cfg(5)); c.pad = PAD_VALID; c.post = OP_NONE; write_cfg(5, c);  // 27
      c = rand_cfg(default_cfg(6)); c.pad = PAD_FULL;  c.post = OP_NONE; write_cfg(6, c);  // 28
    end
    run_image("stride-1 schedule", 1);

    for (int p = 0; p < NPASS; p++) write_cfg(p, rand_cfg(default_cfg(p)));
    run_image("second image", 0);

    begin
      string nm [11];
      int v [11];
      nm = '{"pool pass", "up-sample pass", "plain pass", "stride-1 pool", "stride-2 pool",
             "valid padding", "same padding", "full padding", "feedback write",
             "distributor stall", "packaging contention"};
      v = '{n_pool, n_up, n_none, n_s1, n_s2, n_valid_pad, n_same_pad, n_full_pad, n_fb,
            n_stall, n_contend};
      for (int i = 0; i < 11; i++) begin
        checks++;
        $display("mechanism %-22s %0d", nm[i], v[i]);
        if (v[i] == 0) begin failures++; $display("mechanism %s never happened", nm[i]); end
      end
      checks++;
      $display("mechanism %-22s %0d", "output back-pressure", n_bp);
      if (n_bp == 0) begin failures++; $display("no output back-pressure"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
