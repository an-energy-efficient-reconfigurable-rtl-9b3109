// sync_fifo: single-clock first-word-fall-through FIFO, one per channel of the
// channel distributor (the FIF01..FIF04 boxes of the block diagram).
//
// Storage is a register array of DEPTH entries with read/write pointers and an
// occupancy counter. dout shows the oldest entry whenever empty is low; rd_en
// pops it. A write and a read in the same cycle are both accepted when the
// FIFO is neither full (write) nor empty (read). Writes while full and reads
// while empty are ignored and flagged by assertions. Depth and the FIFO style
// are this design's choice; the published design only names the FIFOs.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] din,
  output logic             full,
  input  logic             rd_en,
  output logic [WIDTH-1:0] dout,
  output logic             empty
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [AW:0]      count;
  logic             do_wr, do_rd;

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;
  assign dout  = mem[rptr];

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= next_ptr(wptr);
      if (do_rd) rptr <= next_ptr(rptr);
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= din;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
endmodule
