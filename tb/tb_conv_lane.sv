// tb_conv_lane: random kernels, biases, shifts and windows. Each result is
// compared with a reference written with plain integers (2x2 convolution,
// ReLU, shift, clamp to 0..255, max over the four positions when pooling).
// Also checks the latency from window acceptance to out_valid: 4 cycles when
// pooling, 1 otherwise, and that the coordinate tag is carried through.
module tb_conv_lane;
  import ae_pkg::*;
  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  patch_t in_patch;
  result_t out_res;
  int checks = 0, failures = 0;

  conv_lane dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int conv_at(patch_t p, layer_cfg_t c, int r, int q);
    int acc;
    acc = int'(c.bias)
        + int'(c.w00) * int'(p.px[r*3+q])   + int'(c.w01) * int'(p.px[r*3+q+1])
        + int'(c.w10) * int'(p.px[r*3+q+3]) + int'(c.w11) * int'(p.px[r*3+q+4]);
    if (acc < 0) acc = 0;
    acc = acc / (1 << c.shift);
    if (acc > 255) acc = 255;
    return acc;
  endfunction

  function automatic int expect_val(patch_t p, layer_cfg_t c);
    int m;
    if (c.post != OP_POOL) return conv_at(p, c, 0, 0);
    m = 0;
    for (int r = 0; r < 2; r++)
      for (int q = 0; q < 2; q++)
        if (conv_at(p, c, r, q) > m) m = conv_at(p, c, r, q);
    return m;
  endfunction

  initial begin
    int lat, exp_lat, e;
    in_valid = 0; out_ready = 0; in_patch = '0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      cfg       = '0;
      cfg.post  = post_e'($urandom % 3);
      cfg.shift = 4'($urandom % 8);
      cfg.w00 = 8'($urandom); cfg.w01 = 8'($urandom);
      cfg.w10 = 8'($urandom); cfg.w11 = 8'($urandom);
      cfg.bias = 16'($signed(($urandom % 4001)) - 2000);
      for (int i = 0; i < 9; i++) in_patch.px[i] = 8'($urandom);
      in_patch.row = coord_t'($urandom); in_patch.col = coord_t'($urandom);
      in_valid = 1;
      checks++;
      if (!in_ready) begin failures++; $display("lane not ready at t=%0d", t); end
      @(negedge clk);
      in_valid = 0;
      lat = 0;
      while (!out_valid) begin @(negedge clk); lat++; end
      exp_lat = (cfg.post == OP_POOL) ? 4 : 1;
      e = expect_val(in_patch, cfg);
      checks += 3;
      if (lat != exp_lat) begin failures++; $display("latency %0d exp %0d", lat, exp_lat); end
      if (int'(out_res.val) != e) begin
        failures++;
        $display("t=%0d post=%0d val=%0d exp=%0d", t, cfg.post, out_res.val, e);
      end
      if (out_res.row != in_patch.row || out_res.col != in_patch.col) begin
        failures++; $display("tag mismatch");
      end
      // hold the result for a random number of cycles
      repeat ($urandom % 3) begin
        @(negedge clk);
        checks++;
        if (!out_valid || int'(out_res.val) != e) begin failures++; $display("result not held"); end
      end
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
