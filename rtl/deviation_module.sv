// deviation_module: combines the newest DAS image with the current estimate.
//
// Input pass: a DAS image arrives in raster order, one pixel per in_valid
// (in_start pulses before the first pixel). For each pixel j the stored
// estimate prev[j] is read and
//   t_zero = 1 (iteration t = 0):  new = x                  (initial image)
//   t_zero = 0 (t > 0):           new = | prev - (lr*x >> 8) |
// is written back over prev[j] two cycles later while a max unit tracks
// the largest value written. lr is unsigned Q8.8. in_done pulses with the
// write of the last pixel.
// Output pass (out_start): the stored image is read in raster order and
// normalised as (v << 8) / max, saturated to 8 bits (0..255), and sent out
// on out_valid/out_data, towards the s-Wave module or as the final image
// (the top routes it); out_done marks the last pixel.
//
// The two paths (lr weighting, subtraction from the stored image, abs,
// multiplexer on t) and the 8-bit normalised output follow the method;
// the Q8.8 learning-rate format, word widths and the saturation of 256 to
// 255 are this design's choices.
module deviation_module #(
  parameter int unsigned IMG_N  = pat_pkg::IMG_N,
  parameter int unsigned LR_W   = pat_pkg::LR_W,
  parameter int unsigned DEV_W  = 18,
  localparam int unsigned PA_W  = 2 * $clog2(IMG_N),
  localparam int unsigned IN_W  = pat_pkg::NORM_W,
  localparam int unsigned OUT_W = pat_pkg::PIX_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              t_zero,
  input  logic [LR_W-1:0]   lr,
  input  logic              in_start,
  input  logic              in_valid,
  input  logic [IN_W-1:0]   in_data,
  output logic              in_done,
  input  logic              out_start,
  output logic              out_valid,
  output logic [OUT_W-1:0]  out_data,
  output logic              out_done
);
  localparam int unsigned NPIX  = IMG_N * IMG_N;
  localparam int unsigned NUM_W = DEV_W + 8;
  localparam int unsigned PROD_W = IN_W + LR_W;

  logic [DEV_W-1:0] ram [NPIX];

  // ------------------------------------------------------------ input pass
  logic [PA_W-1:0]  in_j, a_j, b_j;
  logic             a_v, b_v;
  logic [IN_W-1:0]  a_x;
  logic [DEV_W-1:0] prev, b_val, cur_max;

  always_ff @(posedge clk) begin
    if (!rst_n || in_start) in_j <= '0;
    else if (in_valid)      in_j <= in_j + 1'b1;
  end

  // stage a: read the stored estimate
  always_ff @(posedge clk) begin
    if (!rst_n) a_v <= 1'b0;
    else        a_v <= in_valid;
    a_j  <= in_j;
    a_x  <= in_data;
    prev <= ram[in_j];
  end

  // stage b: weight, subtract, abs, select on t
  logic [PROD_W-1:0] weighted;
  logic [DEV_W-1:0]  scaled, diff_abs, sel;
  always_comb begin
    weighted = PROD_W'(a_x) * PROD_W'(lr);
    scaled   = DEV_W'(weighted >> 8);
    diff_abs = (prev >= scaled) ? prev - scaled : scaled - prev;
    sel      = t_zero ? DEV_W'(a_x) : diff_abs;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) b_v <= 1'b0;
    else        b_v <= a_v;
    b_j   <= a_j;
    b_val <= sel;
  end

  // write back, two cycles after the read
  always_ff @(posedge clk)
    if (b_v) ram[b_j] <= b_val;

  max_unit #(.W(DEV_W)) u_max (
    .clk, .clr(in_start), .en(b_v), .din(b_val), .max(cur_max)
  );

  always_comb in_done = b_v && b_j == PA_W'(NPIX - 1);

  // ------------------------------------------------------------ output pass
  logic             o_run, o_v;
  logic [PA_W-1:0]  o_pix, o_cnt;
  logic [DEV_W-1:0] o_val;
  logic [NUM_W-1:0] quo;
  logic             q_v;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      o_run <= 1'b0;
      o_v   <= 1'b0;
      o_pix <= '0;
    end else begin
      if (out_start) begin
        o_run <= 1'b1;
        o_pix <= '0;
      end else if (o_run) begin
        o_pix <= o_pix + 1'b1;
        if (o_pix == PA_W'(NPIX - 1)) o_run <= 1'b0;
      end
      o_v <= o_run;
    end
    o_val <= ram[o_pix];
  end

  divider #(.NW(NUM_W), .DW(DEV_W)) u_div (
    .clk, .rst_n, .in_valid(o_v), .num({o_val, 8'b0}), .den(cur_max),
    .out_valid(q_v), .quo(quo)
  );

  always_comb begin
    out_valid = q_v;
    out_data  = (quo > NUM_W'(2**OUT_W - 1)) ? OUT_W'(2**OUT_W - 1) : quo[OUT_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n || out_start) o_cnt <= '0;
    else if (q_v)            o_cnt <= o_cnt + 1'b1;
  end
  always_comb out_done = q_v && o_cnt == PA_W'(NPIX - 1);
endmodule
