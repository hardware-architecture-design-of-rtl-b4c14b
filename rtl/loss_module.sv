// loss_module: sensor-domain residual and loss value.
//
// For one execution cycle (`start`) it walks every sample m of every lane
// (lane index fastest), requesting the new sensor sample s_n from the
// s-Wave module and the measured sample S from the load unit (both answer
// one cycle later on sn_data / s_data). Then
//   r = sat16(s_n - S)            residual, written to the DAS sensor RAM
//                                 of the same lane and sample (res_wr_*)
//   sumsq <= sumsq + r*r          one squarer, one adder, one register
// `first` clears sumsq before the pass. When the pass flagged `last` ends,
// the root of sumsq is taken and compared with `threshold`:
//   loss = floor(sqrt(sumsq)),  iter_end = loss < threshold.
// `done` pulses at the end of the pass (after the square root for the last
// one; loss_valid pulses with it). A pass takes LANES*M + 3 cycles, plus
// 33 for the square root.
// The residual, square-and-accumulate, square root and threshold compare
// follow the method; the sign s_n - S, the serial order, the 16-bit
// saturation and the integer square root (in place of a CORDIC core) are
// this design's choices.
module loss_module #(
  parameter int unsigned LANES   = pat_pkg::LANES,
  parameter int unsigned SAMP_AW = pat_pkg::SAMP_AW,
  parameter int unsigned S_W     = pat_pkg::S_W,
  parameter int unsigned SN_W    = pat_pkg::SN_W,
  parameter int unsigned LOSS_W  = pat_pkg::LOSS_W,
  localparam int unsigned LANE_W = $clog2(LANES)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic                      first,
  input  logic                      last,
  input  logic [LOSS_W-1:0]         threshold,
  output logic [SAMP_AW-1:0]        rd_addr,
  output logic [LANE_W-1:0]         rd_lane,
  input  logic signed [SN_W-1:0]    sn_data,
  input  logic signed [S_W-1:0]     s_data,
  output logic                      res_wr_en,
  output logic [LANE_W-1:0]         res_wr_lane,
  output logic [SAMP_AW-1:0]        res_wr_addr,
  output logic signed [S_W-1:0]     res_wr_data,
  output logic                      busy,
  output logic                      done,
  output logic [LOSS_W-1:0]         loss,
  output logic                      loss_valid,
  output logic                      iter_end
);
  localparam int unsigned ACC_W = 2 * LOSS_W;
  localparam logic signed [S_W-1:0] SMAX = {1'b0, {(S_W-1){1'b1}}};
  localparam logic signed [S_W-1:0] SMIN = {1'b1, {(S_W-1){1'b0}}};

  logic run, last_q;
  logic v1, v2;
  logic [SAMP_AW-1:0] a1;
  logic [LANE_W-1:0]  l1;
  logic [ACC_W-1:0]   sumsq;

  // request sequencer
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0;
    end else if (start) begin
      run     <= 1'b1;
      rd_addr <= '0;
      rd_lane <= '0;
      last_q  <= last;
    end else if (run) begin
      rd_lane <= rd_lane + 1'b1;
      if (rd_lane == LANE_W'(LANES - 1)) begin
        rd_lane <= '0;
        rd_addr <= rd_addr + 1'b1;
        if (rd_addr == SAMP_AW'((1 << SAMP_AW) - 1)) run <= 1'b0;
      end
    end
  end

  // residual with saturation
  logic signed [SN_W:0] diff;
  logic signed [S_W-1:0] r;
  always_comb begin
    diff = (SN_W+1)'(sn_data) - (SN_W+1)'(s_data);
    if (diff > (SN_W+1)'(SMAX))      r = SMAX;
    else if (diff < (SN_W+1)'(SMIN)) r = SMIN;
    else                             r = S_W'(diff);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
    end else begin
      v1 <= run;
      v2 <= v1;
    end
    a1          <= rd_addr;
    l1          <= rd_lane;
    res_wr_data <= r;
    res_wr_addr <= a1;
    res_wr_lane <= l1;
  end
  always_comb res_wr_en = v2;

  // square and accumulate
  always_ff @(posedge clk) begin
    if (start && first) sumsq <= '0;
    else if (v2)        sumsq <= sumsq + ACC_W'(res_wr_data * res_wr_data);
  end

  // end of pass, square root on the last one
  logic pass_end, v3, sq_start, sq_busy, sq_done;
  logic [LOSS_W-1:0] root;
  always_ff @(posedge clk) begin
    if (!rst_n) v3 <= 1'b0;
    else        v3 <= v2;
  end
  always_comb begin
    pass_end = v3 && !v2;           // sumsq holds the whole pass
    sq_start = pass_end && last_q;
  end

  isqrt #(.IW(ACC_W)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .x(sumsq),
    .busy(sq_busy), .done(sq_done), .root(root)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      done       <= 1'b0;
      loss_valid <= 1'b0;
      iter_end   <= 1'b0;
    end else begin
      done       <= (pass_end && !last_q) || sq_done;
      loss_valid <= sq_done;
      if (sq_done) begin
        loss     <= root;
        iter_end <= root < threshold;
      end
    end
  end
  always_comb busy = run || v1 || v2 || v3 || sq_busy;
endmodule
