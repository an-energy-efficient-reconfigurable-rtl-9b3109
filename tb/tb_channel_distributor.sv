// tb_channel_distributor: sends a numbered stream of windows under random
// lane back-pressure and checks that window k reaches lane k mod 4, in order,
// with its contents intact; also that the stream is accepted at one window
// per cycle when the lanes always take.
module tb_channel_distributor;
  import ae_pkg::*;
  localparam int NCH = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready;
  patch_t in_patch;
  logic [NCH-1:0] lane_valid, lane_ready;
  patch_t lane_patch [NCH];
  int checks = 0, failures = 0;
  int sent = 0, got = 0;
  int next_seq [NCH];
  bit bp;

  channel_distributor #(.NCH(NCH), .FIFO_DEPTH(4)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic patch_t mk(int k);
    patch_t p;
    p.row = coord_t'(k / 32);
    p.col = coord_t'(k % 32);
    for (int i = 0; i < 9; i++) p.px[i] = 8'((k * 7 + i * 13) & 255);
    return p;
  endfunction

  // lane side: check every popped window
  always @(negedge clk) if (rst_n) begin
    lane_ready = bp ? NCH'($urandom) : '1;
    #1;
    for (int g = 0; g < NCH; g++)
      if (lane_valid[g] && lane_ready[g]) begin
        checks++;
        if (lane_patch[g] !== mk(next_seq[g])) begin
          failures++;
          $display("lane %0d got (%0d,%0d) exp seq %0d", g, lane_patch[g].row, lane_patch[g].col, next_seq[g]);
        end
        next_seq[g] += NCH;
        got++;
      end
  end

  task automatic run(int n);
    int cyc = 0, start_sent = sent;
    while (sent < start_sent + n) begin
      @(negedge clk);
      in_valid = 1;
      in_patch = mk(sent);
      #2;
      if (in_ready) sent++;
      cyc++;
    end
    @(negedge clk); in_valid = 0;
    if (!bp) begin
      checks++;
      if (cyc != n) begin failures++; $display("rate: %0d cycles for %0d windows", cyc, n); end
    end
  endtask

  initial begin
    in_valid = 0; in_patch = '0; lane_ready = 0; bp = 0;
    for (int g = 0; g < NCH; g++) next_seq[g] = g;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(200);
    bp = 1;
    run(400);
    bp = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (got != sent) begin failures++; $display("got %0d of %0d windows", got, sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
