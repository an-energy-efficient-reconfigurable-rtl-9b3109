// channel_packager: the "Channel Packaging" stage with its round-robin
// arbitrator.
//
// Each of the NCH lanes owns a one-entry slot. A lane's result is taken into
// its slot when the slot is empty (in_ready[i]). The round-robin arbiter picks
// one full slot per cycle and offers it downstream (out_valid/out_res); when
// out_ready accepts it the slot empties and the arbiter's priority moves past
// that channel. Throughput is one result per cycle. Results carry their
// coordinates, so the order in which channels are served does not affect the
// image. Slot depth one is this design's choice; packaging the lane outputs
// and serving them round robin follows the published design.
module channel_packager
  import ae_pkg::*;
#(
  parameter int unsigned NCH = 4
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [NCH-1:0] in_valid,
  output logic [NCH-1:0] in_ready,
  input  result_t        in_res [NCH],
  output logic           out_valid,
  input  logic           out_ready,
  output result_t        out_res
);
  logic    [NCH-1:0] full, grant;
  result_t           slot [NCH];

  rr_arbiter #(.N(NCH)) u_arb (
    .clk     (clk),
    .rst_n   (rst_n),
    .req     (full),
    .advance (out_ready),
    .grant   (grant)
  );

  assign in_ready  = ~full;
  assign out_valid = |full;

  always_comb begin
    out_res = '0;
    for (int i = 0; i < NCH; i++)
      if (grant[i]) out_res = slot[i];
  end

  for (genvar g = 0; g < NCH; g++) begin : g_slot
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        full[g] <= 1'b0;
        slot[g] <= '0;
      end else begin
        if (grant[g] && out_ready) full[g] <= 1'b0;
        if (in_valid[g] && !full[g]) begin
          full[g] <= 1'b1;
          slot[g] <= in_res[g];
        end
      end
    end
  end
endmodule
