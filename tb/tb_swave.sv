// tb_swave: one full s-Wave forward projection of a random 4 x 4 image for
// 8 elements (2 lanes) with 32-sample records. Writes the amplitude,
// offset and standard-signal tables, loads the image, and for each
// execution cycle runs a pass, checks it takes M + NPIX*(SIG_LEN+5) + 1
// cycles, and reads back every sample of both lanes through the loss read
// port, comparing with the reference forward model of the sensor each
// lane serves.
module tb_swave;
  import pat_ref_pkg::*;
  localparam int LANES = 2, IMG_N = 4, SAMP_AW = 5, SIG_LEN = 32;
  localparam int N = 4 * LANES, M = 1 << SAMP_AW, NPIX = IMG_N * IMG_N;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0;
  pat_pkg::tbl_sel_e cfg_sel = pat_pkg::TBL_AMP;
  logic [1:0] cfg_set = '0;
  logic [15:0] cfg_addr = '0, cfg_data = '0;
  logic pix_wr_start = 0, pix_wr_en = 0, start = 0, busy, done;
  logic [7:0] pix_wr_data = '0;
  logic [1:0] cc = '0;
  logic [0:0] rd_lane = '0;
  logic [SAMP_AW-1:0] rd_addr = '0;
  logic signed [31:0] rd_data;

  swave_module #(.LANES(LANES), .IMG_N(IMG_N), .SAMP_AW(SAMP_AW), .SIG_LEN(SIG_LEN)) dut (
    .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_set, .cfg_addr, .cfg_data,
    .pix_wr_start, .pix_wr_en, .pix_wr_data, .start, .cc, .busy, .done,
    .rd_lane, .rd_addr, .rd_data);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(pat_pkg::tbl_sel_e sel, int set, int addr, int data);
    cfg_we <= 1; cfg_sel <= sel; cfg_set <= 2'(set); cfg_addr <= 16'(addr); cfg_data <= 16'(data);
    @(posedge clk);
  endtask

  initial begin
    int pix[], sn[];
    pix = new[NPIX];
    foreach (pix[j]) pix[j] = int'($urandom % 256);
    ref_swave(pix, N, IMG_N, M, SIG_LEN, 8, sn);
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r <= LANES; r++)
      for (int j = 0; j < NPIX; j++) begin
        wr(pat_pkg::TBL_AMP, r, j, amp_of(r, j, N, IMG_N));
        wr(pat_pkg::TBL_OFFSET, r, j, offset_of(r, j, N, IMG_N, M));
      end
    for (int k = 0; k < SIG_LEN; k++) wr(pat_pkg::TBL_STD, 0, k, std_of(k, M));
    cfg_we <= 0;
    pix_wr_start <= 1;
    @(posedge clk);
    pix_wr_start <= 0;
    for (int j = 0; j < NPIX; j++) begin
      pix_wr_en <= 1; pix_wr_data <= 8'(pix[j]);
      @(posedge clk);
    end
    pix_wr_en <= 0;
    for (int c = 0; c < 4; c++) begin
      int cyc;
      cc <= 2'(c); start <= 1;
      @(posedge clk);
      start <= 0;
      cyc = 0;
      do begin @(posedge clk); cyc++; end while (!done);
      check(cyc == M + NPIX * (SIG_LEN + 5) + 1, $sformatf("cc %0d pass took %0d cycles", c, cyc));
      for (int i = 0; i < LANES; i++)
        for (int m = 0; m < M; m++) begin
          automatic int ch = pat_pkg::lane_channel(c, i, LANES);
          rd_lane <= 1'(i); rd_addr <= SAMP_AW'(m);
          @(posedge clk);
          #1;
          check(int'(rd_data) == sn[ch * M + m],
                $sformatf("cc %0d lane %0d m %0d: %0d expected %0d", c, i, m, rd_data, sn[ch * M + m]));
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
