// tb_mbr_full: one complete frame through mbr_top at its default size
// (128 elements in 32 lanes, 128 x 128 image, 1024-sample records).
//
// Writes all geometry tables (33 sets each of delay, amplitude and offset
// plus the standard signal), streams one frame and runs one iteration
// (K = 1). The DAS image of t = 0 is compared pixel by pixel with the
// reference DAS of pat_ref_pkg; the run must end with a loss value and a
// full 128 x 128 output image. The s-Wave reference is not recomputed at
// this size, so the later images are checked for count and completion only.
module tb_mbr_full;
  import pat_ref_pkg::*;
  localparam int LANES = pat_pkg::LANES, IMG_N = pat_pkg::IMG_N,
                 SAMP_AW = pat_pkg::SAMP_AW, SIG_LEN = 1 << pat_pkg::SAMP_AW;
  localparam int N = 4 * LANES, M = 1 << SAMP_AW, NPIX = IMG_N * IMG_N;
  localparam int LR = 128;   // 0.5 in Q8.8
  localparam bit FULL_CHECK = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready;
  logic signed [15:0] in_data = '0;
  logic cfg_we = 0;
  pat_pkg::tbl_sel_e cfg_sel = pat_pkg::TBL_DELAY;
  logic [$clog2(LANES+1)-1:0] cfg_set = '0;
  logic [15:0] cfg_addr = '0, cfg_data = '0;
  logic start = 0;
  logic [7:0] k_max = '0;
  logic [15:0] lr = 16'(LR);
  logic [31:0] threshold = '0;
  logic busy, done, stopped_by_loss, loss_valid, out_valid;
  logic [7:0] iterations, out_data;
  logic [31:0] loss;

  mbr_top dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .cfg_we, .cfg_sel, .cfg_set, .cfg_addr, .cfg_data,
    .start, .k_max, .lr, .threshold, .busy, .done, .iterations,
    .stopped_by_loss, .loss, .loss_valid, .out_valid, .out_data
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------- watchdog
  initial begin
    repeat (400_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------- mechanisms
  int n_das_cc[4], n_sw_cc[4], n_dev_t0, n_dev_tn, n_stall, n_to_sw, n_to_out;
  int n_das_abs;
  always @(posedge clk) if (rst_n) begin
    if (dut.das_start) n_das_cc[dut.cc]++;
    if (dut.sw_start)  n_sw_cc[dut.cc]++;
    if (dut.dev_in_start) begin
      if (dut.t_zero) n_dev_t0++; else n_dev_tn++;
    end
    if (in_valid && !in_ready) n_stall++;
    if (dut.dev_out_valid && !dut.out_final) n_to_sw++;
    if (out_valid) n_to_out++;
    if (dut.u_das.v[4] && dut.u_das.cc_q == 2'd3 &&
        ($signed(dut.u_das.total) + $signed(dut.u_das.img_rd)) < 0) n_das_abs++;
  end

  // ---------------------------------------------------------- monitors
  int out_q[$];
  int loss_q[$];
  int das0_q[$];
  always @(posedge clk) begin
    if (out_valid) out_q.push_back(int'(out_data));
    if (loss_valid) loss_q.push_back(int'(loss));
    if (dut.das_out_valid && dut.t_zero) das0_q.push_back(int'(dut.das_out_data));
  end

  // ---------------------------------------------------------- stimulus
  int sdat[1][];
  int sin_q[$];

  initial begin
    for (int f = 0; f < 1; f++) begin
      int ph[];
      int sn[];
      ph = new[NPIX];
      foreach (ph[j]) ph[j] = 0;
      // phantom: a few small point absorbers, different per frame
      ph[(IMG_N/4) * IMG_N + IMG_N/4 + f] = 2;
      ph[(IMG_N/2) * IMG_N + (3*IMG_N)/4] = 1;
      ph[((3*IMG_N)/4) * IMG_N + IMG_N/2 - f] = 2;
      ref_swave(ph, N, IMG_N, M, SIG_LEN, 8, sn);
      sdat[f] = new[N * M];
      foreach (sn[i]) sdat[f][i] = sat16(longint'(sn[i]) + ((i * 7919 + f * 31) % 61) - 30);
      // sample-major stream
      for (int m = 0; m < M; m++)
        for (int s = 0; s < N; s++) sin_q.push_back(sdat[f][s * M + m]);
    end
  end

  // input driver: streams everything in sin_q as fast as in_ready allows
  initial begin
    @(posedge rst_n);
    repeat (5) @(posedge clk);
    while (sin_q.size() > 0) begin
      in_valid <= 1'b1;
      in_data  <= 16'(sin_q[0]);
      @(posedge clk);
      if (in_ready) void'(sin_q.pop_front());
    end
    in_valid <= 1'b0;
  end

  task automatic cfg_write(pat_pkg::tbl_sel_e sel, int set, int addr, int data);
    cfg_we   <= 1'b1;
    cfg_sel  <= sel;
    cfg_set  <= ($clog2(LANES+1))'(set);
    cfg_addr <= 16'(addr);
    cfg_data <= 16'(data);
    @(posedge clk);
  endtask

  // reference chain of one frame
  task automatic reference(int f, int kk, int thr, ref int img_out[], ref int losses[$],
                           ref int t_end, ref int das0[]);
    longint img[], est[];
    int n[], p[], sn[], r[];
    longint sq;
    ref_das(sdat[f], N, IMG_N, M, img);
    ref_norm(img, 1'b0, n);
    das0 = n;
    est = new[NPIX];
    ref_dev(est, n, 1'b1, LR);
    ref_norm(est, 1'b1, p);
    for (int t = 0; ; t++) begin
      ref_swave(p, N, IMG_N, M, SIG_LEN, 8, sn);
      sq = ref_resid(sn, sdat[f], r);
      losses.push_back(int'(isqrt_ref(sq)));
      if (t >= 1 && (isqrt_ref(sq) < thr || t == kk)) begin
        img_out = p;
        t_end = t;
        return;
      end
      ref_das(r, N, IMG_N, M, img);
      ref_norm(img, 1'b0, n);
      ref_dev(est, n, 1'b0, LR);
      ref_norm(est, 1'b1, p);
    end
  endtask

  initial begin
    int kk[2] = '{1, 1};
    int thr[2] = '{32'h7fff_ffff, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    // geometry tables: stored sets 0..LANES are sensors 0..LANES
    for (int r = 0; r <= LANES; r++)
      for (int j = 0; j < NPIX; j++) begin
        cfg_write(pat_pkg::TBL_DELAY,  r, j, delay_of(r, j, N, IMG_N, M));
        cfg_write(pat_pkg::TBL_AMP,    r, j, amp_of(r, j, N, IMG_N));
        cfg_write(pat_pkg::TBL_OFFSET, r, j, offset_of(r, j, N, IMG_N, M));
      end
    for (int k = 0; k < SIG_LEN; k++) cfg_write(pat_pkg::TBL_STD, 0, k, std_of(k, M));
    cfg_we <= 1'b0;

    for (int f = 0; f < 1; f++) begin
      int ref_img[], das0[];
      int ref_loss[$];
      int t_end;
      int l0;
      ref_loss.delete();
      out_q.delete();
      das0_q.delete();
      l0 = loss_q.size();
      k_max     <= 8'(kk[f]);
      threshold <= 32'(thr[f]);
      start     <= 1'b1;
      @(posedge clk);
      start     <= 1'b0;
      @(posedge done);
      @(posedge clk);
      if (FULL_CHECK) begin
        reference(f, kk[f], thr[f], ref_img, ref_loss, t_end, das0);
      end else begin
        longint img[];
        int n[];
        ref_das(sdat[f], N, IMG_N, M, img);
        ref_norm(img, 1'b0, das0);
        t_end = 1;
      end
      // DAS image of t = 0
      check(das0_q.size() == NPIX, $sformatf("frame %0d: DAS output count %0d", f, das0_q.size()));
      foreach (das0_q[j])
        if (j < NPIX) check(das0_q[j] == das0[j],
          $sformatf("frame %0d DAS pixel %0d: %0d expected %0d", f, j, das0_q[j], das0[j]));
      check(out_q.size() == NPIX, $sformatf("frame %0d: %0d output pixels", f, out_q.size()));
      check(int'(iterations) == t_end, $sformatf("frame %0d: stopped at t=%0d expected %0d", f, iterations, t_end));
      if (FULL_CHECK) begin
        check(stopped_by_loss == (thr[f] != 0), $sformatf("frame %0d stop reason", f));
        check(loss_q.size() - l0 == ref_loss.size(), $sformatf("frame %0d: %0d loss values, expected %0d",
              f, loss_q.size() - l0, ref_loss.size()));
        for (int i = 0; i < ref_loss.size() && l0 + i < loss_q.size(); i++)
          check(loss_q[l0 + i] == ref_loss[i], $sformatf("frame %0d loss %0d: %0d expected %0d",
                f, i, loss_q[l0 + i], ref_loss[i]));
        foreach (out_q[j])
          if (j < NPIX) check(out_q[j] == ref_img[j],
            $sformatf("frame %0d image pixel %0d: %0d expected %0d", f, j, out_q[j], ref_img[j]));
      end else begin
        check(loss_q.size() - l0 == 2, "two loss values");
      end
    end

    // every mechanism must have happened
    for (int c = 0; c < 4; c++) begin
      check(n_das_cc[c] > 0, $sformatf("no DAS pass in cc %0d", c));
      check(n_sw_cc[c] > 0, $sformatf("no s-Wave pass in cc %0d", c));
    end
    check(n_dev_t0 > 0, "deviation t=0 path never used");
    check(n_dev_tn > 0, "deviation t>0 path never used");
    check(n_to_sw > 0, "deviation never fed the s-Wave module");
    check(n_to_out > 0, "no final image output");
    check(n_das_abs > 0, "abs of a negative DAS sum never happened");
    if (1 > 1) begin
      check(n_stall > 0, "input never stalled");
    end
    $display("mechanisms: das_cc=%0d/%0d/%0d/%0d sw_cc=%0d/%0d/%0d/%0d dev_t0=%0d dev_t>0=%0d stalls=%0d to_sw=%0d to_out=%0d abs=%0d",
             n_das_cc[0], n_das_cc[1], n_das_cc[2], n_das_cc[3], n_sw_cc[0], n_sw_cc[1], n_sw_cc[2], n_sw_cc[3],
             n_dev_t0, n_dev_tn, n_stall, n_to_sw, n_to_out, n_das_abs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
