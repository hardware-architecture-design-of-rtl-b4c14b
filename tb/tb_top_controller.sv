// tb_top_controller: drives the controller with behavioural stand-ins of
// the sub-modules (each answers a start with its done pulse after a
// random delay; the copy is checked address by address) and counts the
// sequence it issues for
//   run 1: K = 4, loss never below threshold -> stops at t = 4
//   run 2: K = 4, loss below threshold       -> stops at t = 1
// Expected counts per run with T the final t: 4 copies, 4 + 4(T+1) DAS
// passes, 4(T+1) s-Wave and loss passes, T+1 deviation inputs, T+2
// deviation outputs (the last one to the image output), one done.
module tb_top_controller;
  localparam int SAMP_AW = 3, M = 1 << SAMP_AW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, stopped_by_loss;
  logic [7:0] k_max = '0, t;
  logic lu_loaded = 0, lu_release, copying, copy_wr_en;
  logic [1:0] cc;
  logic [SAMP_AW-1:0] copy_rd_addr, copy_wr_addr;
  logic das_start, das_done, das_out_start, t_zero, dev_in_start, dev_in_done;
  logic dev_out_start, out_final, dev_out_done, sw_pix_wr_start, sw_start, sw_done;
  logic loss_start, loss_first, loss_last, loss_done, iter_end = 0;

  top_controller #(.SAMP_AW(SAMP_AW)) dut (.*);

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

  tb_responder r_das  (.clk, .start(das_start),     .done(das_done));
  tb_responder r_devi (.clk, .start(dev_in_start),  .done(dev_in_done));
  tb_responder r_devo (.clk, .start(dev_out_start), .done(dev_out_done));
  tb_responder r_sw   (.clk, .start(sw_start),      .done(sw_done));
  tb_responder r_loss (.clk, .start(loss_start),    .done(loss_done));

  int n_copy_wr, n_das, n_sw, n_loss, n_dev_in, n_dev_out, n_done, n_final, n_rel;
  int exp_wr = 0;
  always @(posedge clk) if (rst_n) begin
    if (copy_wr_en) begin
      n_copy_wr++;
      check(int'(copy_wr_addr) == exp_wr % M, "copy address order");
      exp_wr++;
    end
    if (das_start) n_das++;
    if (sw_start) n_sw++;
    if (loss_start) begin
      n_loss++;
      check(loss_first == (cc == 0) && loss_last == (cc == 3), "loss first/last flags");
    end
    if (dev_in_start) n_dev_in++;
    if (dev_out_start) begin
      n_dev_out++;
      if (out_final) n_final++;
    end
    if (done) n_done++;
    if (lu_release) n_rel++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int run = 0; run < 2; run++) begin
      int T;
      T = (run == 0) ? 4 : 1;
      {n_copy_wr, n_das, n_sw, n_loss, n_dev_in, n_dev_out, n_done, n_final, n_rel} = '0;
      iter_end <= (run == 1);
      k_max <= 8'd4;
      start <= 1;
      @(posedge clk);
      start <= 0;
      repeat (10) @(posedge clk);
      check(busy && n_copy_wr == 0, "copy started before the frame was loaded");
      lu_loaded <= 1;
      wait (done);
      @(posedge clk);
      lu_loaded <= 0;
      repeat (3) @(posedge clk);
      check(n_copy_wr == 4 * M, $sformatf("run %0d: %0d copy writes", run, n_copy_wr));
      check(n_das == 4 + 4 * (T + 1), $sformatf("run %0d: %0d DAS passes", run, n_das));
      check(n_sw == 4 * (T + 1), $sformatf("run %0d: %0d s-Wave passes", run, n_sw));
      check(n_loss == 4 * (T + 1), $sformatf("run %0d: %0d loss passes", run, n_loss));
      check(n_dev_in == T + 1, $sformatf("run %0d: %0d deviation inputs", run, n_dev_in));
      check(n_dev_out == T + 2 && n_final == 1, $sformatf("run %0d: %0d deviation outputs", run, n_dev_out));
      check(n_done == 1 && n_rel == 1, "done / release");
      check(int'(t) == T, $sformatf("run %0d: t=%0d", run, t));
      check(stopped_by_loss == (run == 1), "stop reason");
      check(!busy, "still busy");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
