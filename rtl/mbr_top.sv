// mbr_top: model-based photoacoustic image reconstruction core.
//
// Reconstructs an IMG_N x IMG_N image from the samples of a 4*LANES-element
// ring array by iterating a delay-and-sum backward model (das_module) and
// an s-Wave forward model (swave_module):
//
//   sensor stream -> load_unit --(cc's channels)--> das_module
//        das_module -> deviation_module -> swave_module -> loss_module
//        loss_module --(residual channels)--> das_module
//        deviation_module -> final image out
//   top_controller sequences all of them.
//
// Channels are handled LANES at a time in four execution cycles; geometry
// tables are stored for LANES+1 sensors only and reused for the rest by
// symmetry (see amu). The tables are written once through the cfg_* bus:
// cfg_sel picks the table (pat_pkg::tbl_sel_e), cfg_set the stored sensor
// 0..LANES, cfg_addr the pixel (raster index) or, for the standard signal,
// the sample.
//
// Use: write the tables; stream a frame on in_valid/in_ready/in_data
// (sample-major: channel 0..N-1 of sample 0, then of sample 1, ...);
// pulse start with k_max (K), lr (Q8.8) and threshold (L) applied. The
// final 8-bit image leaves in raster order on out_valid/out_data, `done`
// pulses after the last pixel; loss/loss_valid report the loss of each
// iteration, iterations the last t, stopped_by_loss whether the threshold
// (rather than K) ended the run. A following frame may be streamed in
// while one is processed; it waits in the input FIFO (in_ready low) until
// the frame in use is released.
// The block structure and connections follow the architecture of the
// method; the interfaces and handshakes are this design's.
module mbr_top #(
  parameter int unsigned LANES    = pat_pkg::LANES,
  parameter int unsigned IMG_N    = pat_pkg::IMG_N,
  parameter int unsigned SAMP_AW  = pat_pkg::SAMP_AW,
  parameter int unsigned SIG_LEN  = 1 << pat_pkg::SAMP_AW,
  parameter int unsigned S_W      = pat_pkg::S_W,
  parameter int unsigned SW_SHIFT = 8,
  localparam int unsigned SET_W   = $clog2(LANES + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // sensor data
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic signed [S_W-1:0]         in_data,
  // geometry table preload
  input  logic                          cfg_we,
  input  pat_pkg::tbl_sel_e             cfg_sel,
  input  logic [SET_W-1:0]              cfg_set,
  input  logic [15:0]                   cfg_addr,
  input  logic [15:0]                   cfg_data,
  // run control
  input  logic                          start,
  input  logic [7:0]                    k_max,
  input  logic [pat_pkg::LR_W-1:0]      lr,
  input  logic [pat_pkg::LOSS_W-1:0]    threshold,
  output logic                          busy,
  output logic                          done,
  output logic [7:0]                    iterations,
  output logic                          stopped_by_loss,
  output logic [pat_pkg::LOSS_W-1:0]    loss,
  output logic                          loss_valid,
  // final image
  output logic                          out_valid,
  output logic [pat_pkg::PIX_W-1:0]     out_data
);
  localparam int unsigned LANE_W = $clog2(LANES);
  localparam int unsigned SN_W   = pat_pkg::SN_W;

  // ---------------------------------------------------------- controller
  logic [1:0]         cc;
  logic               lu_loaded, lu_release, copying, copy_wr_en;
  logic [SAMP_AW-1:0] copy_rd_addr, copy_wr_addr;
  logic               das_start, das_done, das_busy, das_out_start;
  logic               t_zero, dev_in_start, dev_in_done, dev_out_start;
  logic               out_final, dev_out_done;
  logic               sw_pix_wr_start, sw_start, sw_done, sw_busy;
  logic               loss_start, loss_first, loss_last, loss_done;
  logic               loss_busy, iter_end;

  top_controller #(.SAMP_AW(SAMP_AW)) u_ctrl (
    .clk, .rst_n, .start, .k_max, .busy, .done,
    .t(iterations), .stopped_by_loss,
    .lu_loaded, .lu_release, .cc, .copying, .copy_rd_addr,
    .copy_wr_en, .copy_wr_addr,
    .das_start, .das_done, .das_out_start,
    .t_zero, .dev_in_start, .dev_in_done, .dev_out_start, .out_final,
    .dev_out_done,
    .sw_pix_wr_start, .sw_start, .sw_done,
    .loss_start, .loss_first, .loss_last, .loss_done, .iter_end
  );

  // ---------------------------------------------------------- load unit
  logic [SAMP_AW-1:0]    lu_rd_addr, loss_rd_addr;
  logic [LANE_W-1:0]     loss_rd_lane, loss_rd_lane_q;
  logic signed [S_W-1:0] lu_rd_data [LANES];

  always_comb lu_rd_addr = copying ? copy_rd_addr : loss_rd_addr;

  load_unit #(.LANES(LANES), .SAMP_AW(SAMP_AW), .S_W(S_W)) u_lu (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .release_frame(lu_release), .loaded(lu_loaded),
    .rd_cc(cc), .rd_addr(lu_rd_addr), .rd_data(lu_rd_data)
  );

  // ---------------------------------------------------------- DAS
  logic [LANES-1:0]       sr_wr_en;
  logic [SAMP_AW-1:0]     sr_wr_addr;
  logic signed [S_W-1:0]  sr_wr_data [LANES];
  logic                   res_wr_en;
  logic [LANE_W-1:0]      res_wr_lane;
  logic [SAMP_AW-1:0]     res_wr_addr;
  logic signed [S_W-1:0]  res_wr_data;
  logic                   das_out_valid, das_out_done;
  logic [pat_pkg::NORM_W-1:0] das_out_data;

  // sensor RAM writes: all lanes from the load unit, or one residual lane
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      sr_wr_en[i]   = copying ? copy_wr_en
                              : (res_wr_en && res_wr_lane == LANE_W'(i));
      sr_wr_data[i] = copying ? lu_rd_data[i] : res_wr_data;
    end
    sr_wr_addr = copying ? copy_wr_addr : res_wr_addr;
  end

  das_module #(.LANES(LANES), .IMG_N(IMG_N), .SAMP_AW(SAMP_AW), .S_W(S_W)) u_das (
    .clk, .rst_n,
    .cfg_we, .cfg_sel, .cfg_set, .cfg_addr, .cfg_data,
    .sr_wr_en, .sr_wr_addr, .sr_wr_data,
    .start(das_start), .cc, .busy(das_busy), .done(das_done),
    .out_start(das_out_start), .out_valid(das_out_valid),
    .out_data(das_out_data), .out_done(das_out_done)
  );

  // ---------------------------------------------------------- deviation
  logic                       dev_out_valid;
  logic [pat_pkg::PIX_W-1:0]  dev_out_data;

  deviation_module #(.IMG_N(IMG_N)) u_dev (
    .clk, .rst_n, .t_zero, .lr,
    .in_start(dev_in_start), .in_valid(das_out_valid), .in_data(das_out_data),
    .in_done(dev_in_done),
    .out_start(dev_out_start), .out_valid(dev_out_valid),
    .out_data(dev_out_data), .out_done(dev_out_done)
  );

  always_comb begin
    out_valid = dev_out_valid && out_final;
    out_data  = dev_out_data;
  end

  // ---------------------------------------------------------- s-Wave
  logic signed [SN_W-1:0] sn_data;

  swave_module #(.LANES(LANES), .IMG_N(IMG_N), .SAMP_AW(SAMP_AW),
                 .SIG_LEN(SIG_LEN), .S_W(S_W), .SW_SHIFT(SW_SHIFT)) u_sw (
    .clk, .rst_n,
    .cfg_we, .cfg_sel, .cfg_set, .cfg_addr, .cfg_data,
    .pix_wr_start(sw_pix_wr_start),
    .pix_wr_en(dev_out_valid && !out_final), .pix_wr_data(dev_out_data),
    .start(sw_start), .cc, .busy(sw_busy), .done(sw_done),
    .rd_lane(loss_rd_lane), .rd_addr(loss_rd_addr), .rd_data(sn_data)
  );

  // ---------------------------------------------------------- loss
  always_ff @(posedge clk) loss_rd_lane_q <= loss_rd_lane;

  loss_module #(.LANES(LANES), .SAMP_AW(SAMP_AW), .S_W(S_W)) u_loss (
    .clk, .rst_n,
    .start(loss_start), .first(loss_first), .last(loss_last), .threshold,
    .rd_addr(loss_rd_addr), .rd_lane(loss_rd_lane),
    .sn_data, .s_data(lu_rd_data[loss_rd_lane_q]),
    .res_wr_en, .res_wr_lane, .res_wr_addr, .res_wr_data,
    .busy(loss_busy), .done(loss_done),
    .loss, .loss_valid, .iter_end
  );

  // Only one sub-module works at a time.
  assert property (@(posedge clk) disable iff (!rst_n)
                   $onehot0({das_busy, sw_busy, loss_busy}));
endmodule
