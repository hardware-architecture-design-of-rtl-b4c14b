// swave_module: s-Wave forward model (image -> sensor data), one execution
// cycle (LANES channels) per `start`.
//
// The forward model treats every pixel as a scaled, time-shifted copy of
// one standard signal s[0..SIG_LEN-1] (the response of a unit pixel at the
// image centre). For lane i, pixel j with value p, stored amplitude A and
// stored offset tau (both from table set i or i+1, chosen by cc, at the
// address the AMU gives for pixel j):
//     acc_i[(tau + k) mod M] += (p * A * s[k]) >>> SW_SHIFT,  k = 0..SIG_LEN-1
// The wrap-around mod M is the circular shift of the method.
//
// An FSM runs the pass:
//   CLEAR   zero the LANES accumulation RAMs (M cycles)
//   FETCH   read pixel j from the pixel RAM and all amplitude/offset ROMs
//   WEIGHT  w_i = p * A_i for all lanes in one cycle, latch tau_i
//   ACCUM   SIG_LEN cycles of read-modify-write: read acc_i at tau_i+k,
//           multiply w_i by s[k], add, write back; the write address is
//           the read address delayed by three registers
//   DRAIN   3 cycles so the next pixel never reads a word still in flight
// so a pass takes M + NPIX*(SIG_LEN+5) + 1 cycles; `done` pulses at its end.
//
// The pixel RAM is loaded in raster order through pix_wr_*; pix_wr_start
// rewinds its write pointer. After a pass the Loss module reads the new
// sensor data through rd_lane/rd_addr, data one cycle later on rd_data.
// The table sets are written through the cfg_* preload bus.
// The ROM sets, broadcast pixel-times-amplitude products, circular shift
// through offset read addresses and the 3-cycle delayed write address
// follow the method; word widths, SW_SHIFT (standing in for the constant
// k of the amplitude law) and the drain gap are this design's choices.
module swave_module #(
  parameter int unsigned LANES    = pat_pkg::LANES,
  parameter int unsigned IMG_N    = pat_pkg::IMG_N,
  parameter int unsigned SAMP_AW  = pat_pkg::SAMP_AW,
  parameter int unsigned SIG_LEN  = 1 << pat_pkg::SAMP_AW,
  parameter int unsigned S_W      = pat_pkg::S_W,
  parameter int unsigned SN_W     = pat_pkg::SN_W,
  parameter int unsigned SW_SHIFT = 8,
  localparam int unsigned PA_W    = 2 * $clog2(IMG_N),
  localparam int unsigned SET_W   = $clog2(LANES + 1),
  localparam int unsigned LANE_W  = $clog2(LANES)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // geometry table preload
  input  logic                          cfg_we,
  input  pat_pkg::tbl_sel_e             cfg_sel,
  input  logic [SET_W-1:0]              cfg_set,
  input  logic [15:0]                   cfg_addr,
  input  logic [15:0]                   cfg_data,
  // image input
  input  logic                          pix_wr_start,
  input  logic                          pix_wr_en,
  input  logic [pat_pkg::PIX_W-1:0]     pix_wr_data,
  // pass control
  input  logic                          start,
  input  logic [1:0]                    cc,
  output logic                          busy,
  output logic                          done,
  // new sensor data read port
  input  logic [LANE_W-1:0]             rd_lane,
  input  logic [SAMP_AW-1:0]            rd_addr,
  output logic signed [SN_W-1:0]        rd_data
);
  localparam int unsigned N_ROM = LANES + 1;
  localparam int unsigned NPIX  = IMG_N * IMG_N;
  localparam int unsigned M     = 1 << SAMP_AW;
  localparam int unsigned AMP_W = pat_pkg::AMP_W;
  localparam int unsigned OFS_W = pat_pkg::OFS_W;
  localparam int unsigned PIX_W = pat_pkg::PIX_W;
  localparam int unsigned W_W   = PIX_W + AMP_W;
  localparam int unsigned K_W   = $clog2(SIG_LEN + 1);

  // ---------------------------------------------------------------- memories
  logic [AMP_W-1:0]       amp_rom [N_ROM][NPIX];
  logic [OFS_W-1:0]       ofs_rom [N_ROM][NPIX];
  logic signed [S_W-1:0]  std_rom [SIG_LEN];
  logic [PIX_W-1:0]       pix_ram [NPIX];
  logic signed [SN_W-1:0] acc_ram [LANES][M];

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_sel == pat_pkg::TBL_AMP)
      amp_rom[cfg_set][PA_W'(cfg_addr)] <= cfg_data[AMP_W-1:0];
    if (cfg_we && cfg_sel == pat_pkg::TBL_OFFSET)
      ofs_rom[cfg_set][PA_W'(cfg_addr)] <= cfg_data[OFS_W-1:0];
    if (cfg_we && cfg_sel == pat_pkg::TBL_STD)
      std_rom[$clog2(SIG_LEN)'(cfg_addr)] <= cfg_data;
  end

  logic [PA_W-1:0] pw_ptr;
  always_ff @(posedge clk) begin
    if (!rst_n || pix_wr_start) pw_ptr <= '0;
    else if (pix_wr_en)         pw_ptr <= pw_ptr + 1'b1;
    if (pix_wr_en) pix_ram[pw_ptr] <= pix_wr_data;
  end

  // ---------------------------------------------------------------- FSM
  typedef enum logic [2:0] {IDLE, CLEAR, FETCH, WEIGHT, ACCUM, DRAIN} state_e;
  state_e state;

  logic [1:0]         cc_q;
  logic [PA_W-1:0]    pix;
  logic [K_W-1:0]     k;
  logic [SAMP_AW-1:0] clr_addr;
  logic [1:0]         drain_cnt;
  logic [PA_W-1:0]    rom_addr;
  logic               amu_step;

  amu #(.IMG_N(IMG_N)) u_amu (
    .clk, .rst_n, .restart(start), .step(amu_step), .cc(cc_q), .addr(rom_addr)
  );

  always_comb amu_step = (state == DRAIN) && drain_cnt == 2'd2 &&
                         pix != PA_W'(NPIX - 1);

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (!rst_n) begin
      state <= IDLE;
    end else begin
      case (state)
        IDLE: if (start) begin
          state    <= CLEAR;
          cc_q     <= cc;
          clr_addr <= '0;
          pix      <= '0;
        end
        CLEAR: begin
          clr_addr <= clr_addr + 1'b1;
          if (clr_addr == SAMP_AW'(M - 1)) state <= FETCH;
        end
        FETCH:  state <= WEIGHT;
        WEIGHT: begin
          state <= ACCUM;
          k     <= '0;
        end
        ACCUM: begin
          k <= k + 1'b1;
          if (k == K_W'(SIG_LEN - 1)) begin
            state     <= DRAIN;
            drain_cnt <= '0;
          end
        end
        DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (drain_cnt == 2'd2) begin
            if (pix == PA_W'(NPIX - 1)) begin
              state <= IDLE;
              done  <= 1'b1;
            end else begin
              state <= FETCH;
              pix   <= pix + 1'b1;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  always_comb busy = state != IDLE;

  // ---------------------------------------------------------------- fetch
  logic [PIX_W-1:0] p_q;
  logic [AMP_W-1:0] amp_q [N_ROM];
  logic [OFS_W-1:0] ofs_q [N_ROM];
  always_ff @(posedge clk) begin
    p_q <= pix_ram[pix];
    for (int r = 0; r < N_ROM; r++) begin
      amp_q[r] <= amp_rom[r][rom_addr];
      ofs_q[r] <= ofs_rom[r][rom_addr];
    end
  end

  // ---------------------------------------------------------------- weight
  logic [W_W-1:0]     w   [LANES];
  logic [SAMP_AW-1:0] tau [LANES];
  always_ff @(posedge clk)
    if (state == WEIGHT)
      for (int i = 0; i < LANES; i++) begin
        w[i]   <= W_W'(p_q) * W_W'(cc_q[0] ? amp_q[i+1] : amp_q[i]);
        tau[i] <= SAMP_AW'(cc_q[0] ? ofs_q[i+1] : ofs_q[i]);
      end

  // ---------------------------------------------------------------- accumulate
  // read (r) -> multiply (m) -> add (a) -> write; addresses travel along.
  logic                   r_v, m_v, a_v;
  logic [SAMP_AW-1:0]     r_addr [LANES];
  logic [SAMP_AW-1:0]     m_addr [LANES];
  logic [SAMP_AW-1:0]     a_addr [LANES];
  logic signed [SN_W-1:0] r_data [LANES];
  logic signed [SN_W-1:0] m_data [LANES];
  logic signed [SN_W-1:0] m_term [LANES];
  logic signed [SN_W-1:0] a_sum  [LANES];
  logic signed [S_W-1:0]  s_k;
  logic [SAMP_AW-1:0]     rd_idx [LANES];

  always_comb
    for (int i = 0; i < LANES; i++)
      rd_idx[i] = (state == ACCUM) ? tau[i] + SAMP_AW'(k) : rd_addr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r_v <= 1'b0;
      m_v <= 1'b0;
      a_v <= 1'b0;
    end else begin
      r_v <= state == ACCUM;
      m_v <= r_v;
      a_v <= m_v;
    end
    s_k <= std_rom[$clog2(SIG_LEN)'(k)];
    for (int i = 0; i < LANES; i++) begin
      r_data[i] <= acc_ram[i][rd_idx[i]];
      r_addr[i] <= rd_idx[i];
      // weighting of the standard signal
      m_term[i] <= SN_W'((($signed({1'b0, w[i]}) * s_k)) >>> SW_SHIFT);
      m_data[i] <= r_data[i];
      m_addr[i] <= r_addr[i];
      // superposition
      a_sum[i]  <= m_data[i] + m_term[i];
      a_addr[i] <= m_addr[i];
    end
  end

  always_ff @(posedge clk)
    for (int i = 0; i < LANES; i++) begin
      if (state == CLEAR) acc_ram[i][clr_addr]  <= '0;
      else if (a_v)       acc_ram[i][a_addr[i]] <= a_sum[i];
    end

  // Loss-module read port (valid while the module is idle)
  logic [LANE_W-1:0] rd_lane_q;
  always_ff @(posedge clk) rd_lane_q <= rd_lane;
  always_comb rd_data = r_data[rd_lane_q];

  assert property (@(posedge clk) disable iff (!rst_n) start |-> state == IDLE);
endmodule
