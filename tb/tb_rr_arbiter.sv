// tb_rr_arbiter: compares the grant with a reference round-robin model for
// random request patterns and checks fairness: a requester that keeps its
// request up is granted within N grants.
module tb_rr_arbiter;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req, grant;
  logic advance;
  int checks = 0, failures = 0;
  int prio = 0;

  rr_arbiter #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] ref_grant(logic [N-1:0] r, int p);
    for (int k = 0; k < N; k++)
      if (r[(p + k) % N]) return N'(1) << ((p + k) % N);
    return '0;
  endfunction

  initial begin
    req = 0; advance = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random traffic against the model
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      req     = N'($urandom);
      advance = ($urandom % 4) != 0;
      #1;
      checks++;
      if (grant !== ref_grant(req, prio)) begin
        failures++;
        $display("cycle %0d req=%b prio=%0d grant=%b exp=%b", i, req, prio, grant, ref_grant(req, prio));
      end
      if (advance && req != 0)
        for (int k = 0; k < N; k++) if (grant[k]) prio = (k + 1) % N;
    end
    // all requesting: grants rotate 0,1,2,3,...
    @(negedge clk);
    req = '1; advance = 1;
    for (int i = 0; i < 2 * N; i++) begin
      #1;
      checks++;
      if (grant !== (N'(1) << ((prio + 0) % N))) begin
        failures++;
        $display("rotation: grant=%b exp one-hot %0d", grant, prio);
      end
      prio = (prio + 1) % N;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
