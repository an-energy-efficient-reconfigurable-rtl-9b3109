// tb_output_controller: three passes. (1) A 14x14 feedback pass: every result
// must appear as one feedback write at row*28+col with its value, and
// pass_done must pulse exactly after the 196th. (2) A 7x7 -> 14x14 up-sampling
// feedback pass: each result must become four writes covering its 2x2 block,
// four cycles per result. (3) A final 28x28 pass to the output port under
// random out_ready: pixels, coordinates, out_last and pass_done are checked.
module tb_output_controller;
  import ae_pkg::*;
  localparam int D = 28;
  localparam int AW = $clog2(D * D);
  logic clk = 0, rst_n = 0;
  logic up, final_pass;
  logic [AW:0] expected;
  logic in_valid, in_ready;
  result_t in_res;
  logic fb_we;
  logic [AW-1:0] fb_addr;
  pix_t fb_data, out_pixel;
  logic out_valid, out_ready, out_last, pass_done;
  coord_t out_row, out_col;
  int checks = 0, failures = 0;
  int wr_val [D*D];
  int wr_cnt [D*D];
  int done_cnt = 0, cycles = 0, n_out = 0;

  output_controller #(.MAX_DIM(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (fb_we) begin wr_val[fb_addr] = int'(fb_data); wr_cnt[fb_addr]++; end
    if (out_valid && out_ready) begin
      int a;
      checks++;
      if (out_last != (n_out == int'(expected) - 1)) begin
        failures++; $display("out_last=%0b at output pixel %0d", out_last, n_out);
      end
      n_out++;
      a = int'(out_row) * D + int'(out_col);
      wr_val[a] = int'(out_pixel); wr_cnt[a]++;
    end
    if (pass_done) done_cnt++;
  end

  function automatic int val_of(int r, int c);
    return (r * 5 + c * 3 + 1) & 255;
  endfunction

  task automatic run_pass(int h, int w, bit u, bit fin);
    int oh, ow, c0, ncyc;
    oh = u ? 2 * h : h; ow = u ? 2 * w : w;
    for (int i = 0; i < D * D; i++) begin wr_cnt[i] = 0; wr_val[i] = -1; end
    up = u; final_pass = fin; expected = (AW+1)'(oh * ow);
    done_cnt = 0; n_out = 0;
    @(negedge clk);
    c0 = cycles;
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        in_valid = 1; in_res.val = 8'(val_of(r, c)); in_res.row = coord_t'(r); in_res.col = coord_t'(c);
        forever begin
          bit taken;
          out_ready = fin ? (($urandom % 3) != 0) : 1'b0;
          #1;
          taken = in_ready;
          @(negedge clk);
          if (taken) break;
        end
      end
    in_valid = 0;
    ncyc = cycles - c0;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (done_cnt != 1) begin failures++; $display("pass_done pulsed %0d times", done_cnt); end
    for (int r = 0; r < oh; r++)
      for (int c = 0; c < ow; c++) begin
        int e;
        e = u ? val_of(r / 2, c / 2) : val_of(r, c);
        checks++;
        if (wr_cnt[r * D + c] != 1 || wr_val[r * D + c] != e) begin
          failures++;
          if (failures < 10) $display("pixel (%0d,%0d) written %0d times value %0d exp %0d", r, c, wr_cnt[r*D+c], wr_val[r*D+c], e);
        end
      end
    if (u && !fin) begin
      checks++;   // four write cycles per result when up-sampling
      if (ncyc < 4 * h * w) begin failures++; $display("up-sampling took %0d cycles", ncyc); end
    end
  endtask

  initial begin
    in_valid = 0; in_res = '0; up = 0; final_pass = 0; expected = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_pass(14, 14, 0, 0);
    run_pass(7, 7, 1, 0);
    run_pass(28, 28, 0, 1);
    run_pass(4, 4, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
