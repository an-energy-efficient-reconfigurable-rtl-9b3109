// output_controller: decides where every output pixel of a pass goes and
// tells when the pass is complete.
//
// Each merged result (value, row, col) is written out as one pixel, or, in an
// up-sampling pass (up = 1), as the 2x2 block (2row+dr, 2col+dc), one pixel
// per cycle for four cycles (nearest-neighbour up-sampling). The switch
// final_pass selects the route: 0 writes the pixel back into the matrix
// buffer for the next layer (fb_we, fb_addr = row*MAX_DIM + col, always
// accepted); 1 sends it to the output port (out_valid/out_ready, tagged with
// its row and column). The controller counts written pixels and, when the
// count reaches expected (out_h*out_w of the pass), pulses pass_done and
// clears the count; out_last marks the final pixel on the output port.
// The feedback/output switch and the completion check follow the published
// block diagram and text; counting pixels against the pass size, the
// replication scheme and the port protocol are this design's choices.
// fb_data and out_pixel are the incoming value wired through unchanged: the
// routing is done by the enables (fb_we / out_valid), not by the data path.
module output_controller
  import ae_pkg::*;
#(
  parameter int unsigned MAX_DIM = 28,
  localparam int unsigned AW = $clog2(MAX_DIM * MAX_DIM)
) (
  input  logic          clk,
  input  logic          rst_n,
  // pass settings, stable during a pass
  input  logic          up,
  input  logic          final_pass,
  input  logic [AW:0]   expected,
  // merged results
  input  logic          in_valid,
  output logic          in_ready,
  input  result_t       in_res,
  // feedback into the matrix
  output logic          fb_we,
  output logic [AW-1:0] fb_addr,
  output pix_t          fb_data,
  // final image
  output logic          out_valid,
  input  logic          out_ready,
  output pix_t          out_pixel,
  output coord_t        out_row,
  output coord_t        out_col,
  output logic          out_last,
  // completion
  output logic          pass_done
);
  logic [1:0]  sub;        // which pixel of the 2x2 up-sampling block
  logic [AW:0] count;
  coord_t      wr_row, wr_col;
  logic        wr_fire, last_sub, last_pix;

  always_comb begin
    if (up) begin
      wr_row = coord_t'({in_res.row, sub[1]});
      wr_col = coord_t'({in_res.col, sub[0]});
    end else begin
      wr_row = in_res.row;
      wr_col = in_res.col;
    end
  end

  assign last_sub = !up || (sub == 2'd3);
  assign wr_fire  = in_valid && (!final_pass || out_ready);
  assign in_ready = wr_fire && last_sub;
  assign last_pix = (count + (AW+1)'(1) == expected);

  assign fb_we     = wr_fire && !final_pass;
  assign fb_addr   = AW'(wr_row) * AW'(MAX_DIM) + AW'(wr_col);
  assign fb_data   = in_res.val;

  assign out_valid = in_valid && final_pass;
  assign out_pixel = in_res.val;
  assign out_row   = wr_row;
  assign out_col   = wr_col;
  assign out_last  = out_valid && last_pix;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sub       <= '0;
      count     <= '0;
      pass_done <= 1'b0;
    end else begin
      pass_done <= 1'b0;
      if (wr_fire) begin
        sub <= last_sub ? 2'd0 : sub + 2'd1;
        if (last_pix) begin
          count     <= '0;
          pass_done <= 1'b1;
        end else begin
          count <= count + (AW+1)'(1);
        end
      end
    end
  end

  a_addr_in_range: assert property (@(posedge clk) disable iff (!rst_n)
      wr_fire |-> (wr_row < coord_t'(MAX_DIM) && wr_col < coord_t'(MAX_DIM)));
endmodule
