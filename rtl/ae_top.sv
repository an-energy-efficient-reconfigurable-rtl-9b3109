// ae_top: reconfigurable convolutional autoencoder accelerator.
//
// Data path (one pass = one convolution layer with what follows it):
//   matrix_unit -> channel_distributor (NCH FIFOs) -> NCH x conv_lane
//   -> channel_packager (round robin) -> output_controller
//   -> back into matrix_unit (next pass) or out to the output port (last pass).
// The 13 layers of the network (conv/pool x3, conv/up-sample x3, conv) run as
// NPASS = 7 passes over this loop. A small sequencer here holds one
// layer_cfg_t per pass (padding, pool / up-sample / none, pool stride,
// requantisation shift, 2x2 kernel and bias), works out the geometry of each
// pass from the size of the map it reads, starts the matrix scan and waits for
// the output controller's pass_done before swapping the ping-pong banks and
// starting the next pass.
//
// Interface: write pass settings with cfg_we/cfg_pass/cfg_data while idle
// (reset values: identity kernels, 28->14->7->4->8->14->28->28). Stream an
// IMG_DIM x IMG_DIM image in raster order through in_valid/in_ready (accepted
// only while idle); processing starts by itself after the last pixel. The
// reconstructed image leaves through out_valid/out_ready with its row and
// column; out_last marks its last pixel and done pulses one cycle after.
// The stage chain and the feedback loop follow the published block diagram;
// the sequencer, configuration port and all widths are this design's own.
module ae_top
  import ae_pkg::*;
#(
  parameter int unsigned IMG_DIM    = 28,
  parameter int unsigned MAX_DIM    = 28,
  parameter int unsigned NCH        = 4,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned PW = $clog2(NPASS)
) (
  input  logic          clk,
  input  logic          rst_n,
  // configuration
  input  logic          cfg_we,
  input  logic [PW-1:0] cfg_pass,
  input  layer_cfg_t    cfg_data,
  // input image
  input  logic          in_valid,
  output logic          in_ready,
  input  pix_t          in_pixel,
  // reconstructed image
  output logic          out_valid,
  input  logic          out_ready,
  output pix_t          out_pixel,
  output coord_t        out_row,
  output coord_t        out_col,
  output logic          out_last,
  // status
  output logic          busy,
  output logic          done,
  output logic [PW-1:0] pass_idx
);
  localparam int unsigned AW = $clog2(MAX_DIM * MAX_DIM);

  // ---------------- sequencer ----------------
  layer_cfg_t cfg_tab [NPASS];
  layer_cfg_t cur_cfg;
  geom_t      geom;
  dim_t       cur_h, cur_w;
  logic       rd_bank, start, running, loaded, pass_done;

  assign cur_cfg  = cfg_tab[pass_idx];
  assign geom     = make_geom(cur_h, cur_w, cur_cfg);
  assign busy     = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPASS; p++) cfg_tab[p] <= default_cfg(p);
    end else if (cfg_we && !running) begin
      cfg_tab[cfg_pass] <= cfg_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running  <= 1'b0;
      start    <= 1'b0;
      done     <= 1'b0;
      pass_idx <= '0;
      rd_bank  <= 1'b0;
      cur_h    <= dim_t'(IMG_DIM);
      cur_w    <= dim_t'(IMG_DIM);
    end else begin
      start <= 1'b0;
      done  <= 1'b0;
      if (loaded) begin
        running  <= 1'b1;
        start    <= 1'b1;
        pass_idx <= '0;
        rd_bank  <= 1'b0;
        cur_h    <= dim_t'(IMG_DIM);
        cur_w    <= dim_t'(IMG_DIM);
      end else if (running && pass_done) begin
        if (pass_idx == PW'(NPASS-1)) begin
          running <= 1'b0;
          done    <= 1'b1;
        end else begin
          pass_idx <= pass_idx + PW'(1);
          rd_bank  <= !rd_bank;
          cur_h    <= geom.out_h;
          cur_w    <= geom.out_w;
          start    <= 1'b1;
        end
      end
    end
  end

  // ---------------- data path ----------------
  logic           patch_valid, patch_ready, scan_busy;
  patch_t         patch;
  logic [NCH-1:0] lane_in_valid, lane_in_ready, lane_out_valid, lane_out_ready;
  patch_t         lane_patch [NCH];
  result_t        lane_res   [NCH];
  logic           m_valid, m_ready;
  result_t        m_res;
  logic           fb_we;
  logic [AW-1:0]  fb_addr;
  pix_t           fb_data;

  matrix_unit #(.MAX_DIM(MAX_DIM), .IMG_DIM(IMG_DIM)) u_matrix (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_pixel,
    .load_en     (!running),
    .loaded,
    .start, .rd_bank, .geom, .scan_busy,
    .patch_valid, .patch_ready, .patch,
    .fb_we, .fb_addr, .fb_data
  );

  channel_distributor #(.NCH(NCH), .FIFO_DEPTH(FIFO_DEPTH)) u_dist (
    .clk, .rst_n,
    .in_valid   (patch_valid),
    .in_ready   (patch_ready),
    .in_patch   (patch),
    .lane_valid (lane_in_valid),
    .lane_ready (lane_in_ready),
    .lane_patch (lane_patch)
  );

  for (genvar g = 0; g < NCH; g++) begin : g_lane
    conv_lane u_lane (
      .clk, .rst_n,
      .cfg       (cur_cfg),
      .in_valid  (lane_in_valid[g]),
      .in_ready  (lane_in_ready[g]),
      .in_patch  (lane_patch[g]),
      .out_valid (lane_out_valid[g]),
      .out_ready (lane_out_ready[g]),
      .out_res   (lane_res[g])
    );
  end

  channel_packager #(.NCH(NCH)) u_pack (
    .clk, .rst_n,
    .in_valid  (lane_out_valid),
    .in_ready  (lane_out_ready),
    .in_res    (lane_res),
    .out_valid (m_valid),
    .out_ready (m_ready),
    .out_res   (m_res)
  );

  output_controller #(.MAX_DIM(MAX_DIM)) u_out (
    .clk, .rst_n,
    .up         (cur_cfg.post == OP_UP),
    .final_pass (pass_idx == PW'(NPASS-1)),
    .expected   ((AW+1)'(geom.out_h) * (AW+1)'(geom.out_w)),
    .in_valid   (m_valid),
    .in_ready   (m_ready),
    .in_res     (m_res),
    .fb_we, .fb_addr, .fb_data,
    .out_valid, .out_ready, .out_pixel, .out_row, .out_col, .out_last,
    .pass_done
  );

  a_scan_before_done: assert property (@(posedge clk) disable iff (!rst_n)
      pass_done |-> !scan_busy);
  a_geom_fits: assert property (@(posedge clk) disable iff (!rst_n)
      running |-> (geom.out_h <= dim_t'(MAX_DIM) && geom.out_w <= dim_t'(MAX_DIM)));
endmodule
