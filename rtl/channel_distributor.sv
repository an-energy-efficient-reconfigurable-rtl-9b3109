// channel_distributor: the channel controller and its FIFOs.
//
// Windows arriving from the matrix stage are dealt to the NCH FIFOs strictly
// in sequence: window k goes to FIFO k mod NCH. The controller accepts a
// window (in_ready) only when the FIFO whose turn it is has room, so the
// sequence is never broken and each lane sees every NCH-th window. Each FIFO
// head is presented to its encoding/decoding lane as lane_valid/lane_patch and
// popped by lane_ready. The dealing in sequence to several FIFOs follows the
// published design; the strict round robin, the stall rule and FIFO_DEPTH are
// this design's choices. NCH is 4 as in the block diagram (the prose says 8;
// the module works for any NCH >= 1).
module channel_distributor
  import ae_pkg::*;
#(
  parameter int unsigned NCH        = 4,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  patch_t           in_patch,
  output logic   [NCH-1:0] lane_valid,
  input  logic   [NCH-1:0] lane_ready,
  output patch_t           lane_patch [NCH]
);
  localparam int unsigned IW = (NCH > 1) ? $clog2(NCH) : 1;

  logic [IW-1:0]  turn;
  logic [NCH-1:0] full, empty, wr;

  assign in_ready = !full[turn];

  always_comb begin
    wr = '0;
    wr[turn] = in_valid && in_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    turn <= '0;
    else if (in_valid && in_ready) turn <= (turn == IW'(NCH-1)) ? '0 : turn + IW'(1);
  end

  for (genvar g = 0; g < NCH; g++) begin : g_fifo
    sync_fifo #(.WIDTH($bits(patch_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk   (clk),
      .rst_n (rst_n),
      .wr_en (wr[g]),
      .din   (in_patch),
      .full  (full[g]),
      .rd_en (lane_ready[g] && !empty[g]),
      .dout  (lane_patch[g]),
      .empty (empty[g])
    );
    assign lane_valid[g] = !empty[g];
  end
endmodule
