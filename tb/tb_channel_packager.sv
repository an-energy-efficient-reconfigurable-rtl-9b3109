// tb_channel_packager: four producers send numbered results (lane id in the
// column, sequence number in row/value) under random valid and random
// downstream ready. Checks that every result comes out exactly once, in order
// per lane, that with all lanes busy the lanes are served in rotation
// 0,1,2,3,... and that one result leaves per cycle in that case.
module tb_channel_packager;
  import ae_pkg::*;
  localparam int NCH = 4;
  logic clk = 0, rst_n = 0;
  logic [NCH-1:0] in_valid, in_ready;
  result_t in_res [NCH];
  logic out_valid, out_ready;
  result_t out_res;
  int checks = 0, failures = 0;
  int seq [NCH], exp_seq [NCH];
  int total = 0, last_lane = -1;
  bit saturate;
  int sat_out = 0, sat_cyc = 0;

  channel_packager #(.NCH(NCH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    for (int g = 0; g < NCH; g++) begin
      in_valid[g] = saturate ? 1'b1 : (($urandom % 2) == 1);
      in_res[g].val = 8'(seq[g]);
      in_res[g].row = coord_t'(seq[g] / 256);
      in_res[g].col = coord_t'(g);
    end
    out_ready = saturate ? 1'b1 : (($urandom % 3) != 0);
    #1;
    if (saturate) sat_cyc++;
    if (out_valid && out_ready) begin
      int l, s;
      l = int'(out_res.col);
      s = int'(out_res.row) * 256 + int'(out_res.val);
      checks++;
      if (l >= NCH || s != exp_seq[l]) begin
        failures++;
        $display("lane %0d seq %0d exp %0d", l, s, exp_seq[l]);
      end else exp_seq[l]++;
      if (saturate && last_lane >= 0) begin
        checks++;
        if (l != (last_lane + 1) % NCH) begin
          failures++; $display("rotation: lane %0d after %0d", l, last_lane);
        end
      end
      if (saturate) sat_out++;
      last_lane = l;
      total++;
    end
    for (int g = 0; g < NCH; g++)
      if (in_valid[g] && in_ready[g]) seq[g]++;
  end

  initial begin
    in_valid = 0; out_ready = 0; saturate = 0;
    for (int g = 0; g < NCH; g++) begin seq[g] = 0; exp_seq[g] = 0; in_res[g] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2000) @(posedge clk);
    saturate = 1;
    repeat (200) @(posedge clk);
    checks++;
    // slots refill every other cycle per lane, four lanes keep the output busy
    if (sat_out < sat_cyc - 8) begin failures++; $display("rate: %0d results in %0d cycles", sat_out, sat_cyc); end
    saturate = 0;
    in_valid = 0;
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
