// tb_sync_fifo: random pushes and pops against a queue model. Checks the data
// order, the full/empty flags and that writes while full are dropped.
module tb_sync_fifo;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0;
  logic wr_en, rd_en, full, empty;
  logic [W-1:0] din, dout;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; din = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (empty !== (model.size() == 0) || full !== (model.size() == D)) begin
        failures++;
        $display("flag mismatch at %0d: empty=%0b full=%0b size=%0d", i, empty, full, model.size());
      end
      if (!empty) begin
        checks++;
        if (dout !== model[0]) begin
          failures++;
          $display("data mismatch at %0d: got %h exp %h", i, dout, model[0]);
        end
      end
      wr_en = ($urandom % 100) < 55 && !full;
      rd_en = ($urandom % 100) < 45 && !empty;
      din   = W'($urandom);
      @(posedge clk);
      #1;
      if (rd_en) void'(model.pop_front());
      if (wr_en) model.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
