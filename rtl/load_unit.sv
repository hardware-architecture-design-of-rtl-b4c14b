// load_unit (LU): buffers the incoming sensor stream and stores one frame.
//
// Samples arrive one per cycle on a valid/ready stream, sample-major: all
// N_SENS channels of sample 0, then all channels of sample 1, and so on.
// They pass through a FIFO and are written into one RAM per channel
// (N_SENS RAMs of 2**SAMP_AW words). After N_SENS * 2**SAMP_AW words the
// frame is complete and `loaded` rises. While a frame is loaded the LU
// stops draining its FIFO, so a following frame fills the FIFO and then
// stalls the input (in_ready low) until the controller pulses `release`.
//
// Read port: rd_cc and rd_addr select one sample of the LANES channels that
// the lanes serve in that execution cycle (pat_pkg::lane_channel); rd_data
// is registered, one cycle after the request.
// The FIFO plus 128 per-channel RAMs follow the method; the stream order,
// handshake, FIFO depth and frame hold/release are this design's choices.
module load_unit #(
  parameter int unsigned LANES      = pat_pkg::LANES,
  parameter int unsigned SAMP_AW    = pat_pkg::SAMP_AW,
  parameter int unsigned S_W        = pat_pkg::S_W,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic signed [S_W-1:0]      in_data,
  input  logic                       release_frame,
  output logic                       loaded,
  input  logic [1:0]                 rd_cc,
  input  logic [SAMP_AW-1:0]         rd_addr,
  output logic signed [S_W-1:0]      rd_data [LANES]
);
  localparam int unsigned N_SENS = 4 * LANES;
  localparam int unsigned CH_W   = $clog2(N_SENS);
  localparam int unsigned M      = 1 << SAMP_AW;

  logic                 f_valid, f_ready;
  logic signed [S_W-1:0] f_data;

  sync_fifo #(.W(S_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(in_data),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data)
  );

  logic signed [S_W-1:0] ram [N_SENS][M];
  logic [CH_W-1:0]       wr_ch;
  logic [SAMP_AW-1:0]    wr_m;

  always_comb f_ready = !loaded;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ch  <= '0;
      wr_m   <= '0;
      loaded <= 1'b0;
    end else begin
      if (release_frame) loaded <= 1'b0;
      if (f_valid && f_ready) begin
        wr_ch <= wr_ch + 1'b1;
        if (wr_ch == CH_W'(N_SENS - 1)) begin
          wr_m <= wr_m + 1'b1;
          if (wr_m == SAMP_AW'(M - 1)) loaded <= 1'b1;
        end
      end
    end
    if (f_valid && f_ready) ram[wr_ch][wr_m] <= f_data;
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < LANES; i++)
      rd_data[i] <= ram[CH_W'(pat_pkg::lane_channel(rd_cc, i, LANES))][rd_addr];
  end
endmodule
