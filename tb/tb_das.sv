// tb_das: one full DAS reconstruction on a 16-element, 8 x 8, 64-sample
// configuration. Writes the delay tables of stored sensors 0..4, then for
// each execution cycle fills the sensor RAMs with the channels the lanes
// serve, runs the pass and checks that `done` comes NPIX + 6 cycles after
// `start`. The normalised output stream is compared pixel by pixel with
// the reference DAS computed sensor by sensor from the geometry.
module tb_das;
  import pat_ref_pkg::*;
  localparam int LANES = 4, IMG_N = 8, SAMP_AW = 6;
  localparam int N = 4 * LANES, M = 1 << SAMP_AW, NPIX = IMG_N * IMG_N;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we = 0;
  pat_pkg::tbl_sel_e cfg_sel = pat_pkg::TBL_DELAY;
  logic [2:0] cfg_set = '0;
  logic [15:0] cfg_addr = '0, cfg_data = '0;
  logic [LANES-1:0] sr_wr_en = '0;
  logic [SAMP_AW-1:0] sr_wr_addr = '0;
  logic signed [15:0] sr_wr_data [LANES];
  logic start = 0, busy, done, out_start = 0, out_valid, out_done;
  logic [1:0] cc = '0;
  logic [8:0] out_data;

  das_module #(.LANES(LANES), .IMG_N(IMG_N), .SAMP_AW(SAMP_AW)) dut (
    .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_set, .cfg_addr, .cfg_data,
    .sr_wr_en, .sr_wr_addr, .sr_wr_data, .start, .cc, .busy, .done,
    .out_start, .out_valid, .out_data, .out_done);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int outs[$];
  always @(posedge clk) if (out_valid) outs.push_back(int'(out_data));

  initial begin
    int s_data[];
    longint img[];
    int nrm[];
    s_data = new[N * M];
    foreach (s_data[i]) s_data[i] = int'($urandom % 20001) - 10000;
    ref_das(s_data, N, IMG_N, M, img);
    ref_norm(img, 1'b0, nrm);

    repeat (2) @(posedge clk);
    rst_n <= 1;
    cfg_we <= 1;
    for (int r = 0; r <= LANES; r++)
      for (int j = 0; j < NPIX; j++) begin
        cfg_set <= 3'(r); cfg_addr <= 16'(j); cfg_data <= 16'(delay_of(r, j, N, IMG_N, M));
        @(posedge clk);
      end
    cfg_we <= 0;
    for (int c = 0; c < 4; c++) begin
      int cyc;
      sr_wr_en <= '1;
      for (int m = 0; m < M; m++) begin
        sr_wr_addr <= SAMP_AW'(m);
        for (int i = 0; i < LANES; i++)
          sr_wr_data[i] <= 16'(s_data[pat_pkg::lane_channel(c, i, LANES) * M + m]);
        @(posedge clk);
      end
      sr_wr_en <= '0;
      cc <= 2'(c); start <= 1;
      @(posedge clk);
      start <= 0;
      cyc = 0;
      do begin @(posedge clk); cyc++; end while (!done);
      check(cyc == NPIX + 6, $sformatf("cc %0d pass took %0d cycles", c, cyc));
    end
    out_start <= 1;
    @(posedge clk);
    out_start <= 0;
    wait (out_done);
    @(posedge clk);
    @(posedge clk);
    check(outs.size() == NPIX, $sformatf("%0d output pixels", outs.size()));
    foreach (outs[j])
      if (j < NPIX) check(outs[j] == nrm[j], $sformatf("pixel %0d: %0d expected %0d", j, outs[j], nrm[j]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
