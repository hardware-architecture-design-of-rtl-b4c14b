// das_module: delay-and-sum backward model (sensor data -> image).
//
// One pass (`start`) handles the LANES channels of one execution cycle cc
// for every pixel of the IMG_N x IMG_N image, one pixel per clock:
//   p0  the AMU gives the table address of pixel j; all N_ROM = LANES+1
//       delay ROMs are read at it;
//   p1  lane i takes ROM i (cc 0, 2) or ROM i+1 (cc 1, 3) and uses that
//       delay as the read address of its sensor-data RAM;
//   p2  adder stage 1: two half sums of the LANES samples;
//   p3  adder stage 2: their sum; the image RAM is read at pixel j;
//   p4  adder stage 3: add the image RAM value (0 in cc 0); in cc 3 take
//       the absolute value;
//   p5  write back to the image RAM (two cycles after its read) and, in
//       cc 3, update the running maximum.
// `done` pulses one cycle after the last write, NPIX + 6 cycles after start.
// An output pass (`out_start`) then reads the image in raster order and
// divides (value << 8) by the maximum, giving out_data in 0..256 on
// out_valid, one pixel per cycle after the divider latency; `out_done`
// marks the last pixel.
//
// The sensor-data RAMs are written through sr_wr_* (from the load unit, or
// residuals from the loss module). The delay ROM contents depend on the
// array geometry and are written through the cfg_* preload bus.
// The ROM bank with per-lane cc multiplexers, the adder tree, the
// accumulation with read/write two cycles apart, the abs in the last cycle,
// the max unit and the <<8 divider follow the method; the exact cycle
// placement, word widths and the preload bus are this design's choices.
module das_module #(
  parameter int unsigned LANES   = pat_pkg::LANES,
  parameter int unsigned IMG_N   = pat_pkg::IMG_N,
  parameter int unsigned SAMP_AW = pat_pkg::SAMP_AW,
  parameter int unsigned S_W     = pat_pkg::S_W,
  parameter int unsigned DLY_W   = pat_pkg::DLY_W,
  localparam int unsigned PA_W   = 2 * $clog2(IMG_N),
  localparam int unsigned SET_W  = $clog2(LANES + 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // geometry table preload
  input  logic                         cfg_we,
  input  pat_pkg::tbl_sel_e            cfg_sel,
  input  logic [SET_W-1:0]             cfg_set,
  input  logic [15:0]                  cfg_addr,
  input  logic [15:0]                  cfg_data,
  // sensor-data RAM write port
  input  logic [LANES-1:0]             sr_wr_en,
  input  logic [SAMP_AW-1:0]           sr_wr_addr,
  input  logic signed [S_W-1:0]        sr_wr_data [LANES],
  // accumulation pass
  input  logic                         start,
  input  logic [1:0]                   cc,
  output logic                         busy,
  output logic                         done,
  // normalised output pass
  input  logic                         out_start,
  output logic                         out_valid,
  output logic [pat_pkg::NORM_W-1:0]   out_data,
  output logic                         out_done
);
  localparam int unsigned N_ROM  = LANES + 1;
  localparam int unsigned NPIX   = IMG_N * IMG_N;
  localparam int unsigned M      = 1 << SAMP_AW;
  localparam int unsigned SUM_W  = S_W + $clog2(LANES);
  localparam int unsigned HALF   = LANES / 2;
  localparam int unsigned IMG_DW = SUM_W + 2;        // 4 execution cycles
  localparam int unsigned NUM_W  = IMG_DW + 8;

  // ---------------------------------------------------------------- memories
  logic [DLY_W-1:0]        dly_rom [N_ROM][NPIX];
  logic signed [S_W-1:0]   sr      [LANES][M];
  logic signed [IMG_DW-1:0] img    [NPIX];

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_sel == pat_pkg::TBL_DELAY)
      dly_rom[cfg_set][PA_W'(cfg_addr)] <= cfg_data[DLY_W-1:0];
    for (int i = 0; i < LANES; i++)
      if (sr_wr_en[i]) sr[i][sr_wr_addr] <= sr_wr_data[i];
  end

  // ---------------------------------------------------------------- control
  logic [1:0]       cc_q;
  logic             run;
  logic [PA_W-1:0]  pix;
  logic [PA_W-1:0]  rom_addr;
  logic             amu_restart;

  always_comb amu_restart = start;

  amu #(.IMG_N(IMG_N)) u_amu (
    .clk, .rst_n, .restart(amu_restart), .step(run), .cc(cc_q), .addr(rom_addr)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0;
      pix <= '0;
    end else if (start) begin
      run <= 1'b1;
      pix <= '0;
    end else if (run) begin
      pix <= pix + 1'b1;
      if (pix == PA_W'(NPIX - 1)) run <= 1'b0;
    end
    if (start) cc_q <= cc;
  end

  // pipeline valid bits and pixel indices, p1..p5
  logic            v   [1:5];
  logic [PA_W-1:0] j   [1:5];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 1; s <= 5; s++) v[s] <= 1'b0;
    end else begin
      v[1] <= run;
      for (int s = 2; s <= 5; s++) v[s] <= v[s-1];
    end
    j[1] <= pix;
    for (int s = 2; s <= 5; s++) j[s] <= j[s-1];
  end

  // p0 -> p1: delay ROM read
  logic [DLY_W-1:0] dly_q [N_ROM];
  always_ff @(posedge clk)
    for (int r = 0; r < N_ROM; r++) dly_q[r] <= dly_rom[r][rom_addr];

  // p1 -> p2: per-lane ROM select by cc, sensor RAM read
  logic [SAMP_AW-1:0]    lane_dly [LANES];
  logic signed [S_W-1:0] smp      [LANES];
  always_comb
    for (int i = 0; i < LANES; i++)
      lane_dly[i] = SAMP_AW'(cc_q[0] ? dly_q[i+1] : dly_q[i]);
  always_ff @(posedge clk)
    for (int i = 0; i < LANES; i++) smp[i] <= sr[i][lane_dly[i]];

  // p2 -> p3: adder stage 1 (two half sums)
  logic signed [SUM_W-1:0] half_a, half_b, total;
  always_ff @(posedge clk) begin
    logic signed [SUM_W-1:0] a, b;
    a = '0;
    b = '0;
    for (int i = 0; i < HALF; i++)      a += SUM_W'(smp[i]);
    for (int i = HALF; i < LANES; i++)  b += SUM_W'(smp[i]);
    half_a <= a;
    half_b <= b;
  end

  // p3 -> p4: adder stage 2, image RAM read
  logic signed [IMG_DW-1:0] img_rd;
  always_ff @(posedge clk) begin
    total  <= half_a + half_b;
    img_rd <= img[j[3]];
  end

  // p4 -> p5: adder stage 3 (accumulate), abs in the last execution cycle
  logic signed [IMG_DW-1:0] acc, wr_val;
  always_comb begin
    acc = IMG_DW'(total) + ((cc_q == 2'd0) ? IMG_DW'(0) : img_rd);
    if (cc_q == 2'd3 && acc < 0) acc = -acc;
  end
  always_ff @(posedge clk) wr_val <= acc;

  // p5: write back, max tracking
  logic [IMG_DW-1:0] img_max;
  always_ff @(posedge clk)
    if (v[5]) img[j[5]] <= wr_val;

  max_unit #(.W(IMG_DW)) u_max (
    .clk,
    .clr (start && cc == 2'd3),
    .en  (v[5] && cc_q == 2'd3),
    .din (wr_val),
    .max (img_max)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) done <= 1'b0;
    else        done <= v[5] && j[5] == PA_W'(NPIX - 1);
  end
  always_comb busy = run || v[1] || v[2] || v[3] || v[4] || v[5];

  // ---------------------------------------------------------------- output
  logic             o_run, o_v;
  logic [PA_W-1:0]  o_pix;
  logic [IMG_DW-1:0] o_val;
  logic [PA_W-1:0]  o_cnt;
  logic [NUM_W-1:0] quo;

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
    o_val <= img[o_pix];
  end

  divider #(.NW(NUM_W), .DW(IMG_DW)) u_div (
    .clk, .rst_n,
    .in_valid (o_v),
    .num      ({o_val, 8'b0}),           // <<< 8
    .den      (img_max),
    .out_valid(out_valid),
    .quo      (quo)
  );

  always_comb out_data = quo[pat_pkg::NORM_W-1:0];

  always_ff @(posedge clk) begin
    if (!rst_n || out_start) o_cnt <= '0;
    else if (out_valid)      o_cnt <= o_cnt + 1'b1;
  end
  always_comb out_done = out_valid && o_cnt == PA_W'(NPIX - 1);

  // A pass may only start while the module is idle.
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
