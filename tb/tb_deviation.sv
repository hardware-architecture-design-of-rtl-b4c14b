// tb_deviation: runs the deviation module through three iterations of a
// 4 x 4 image: t = 0 (the input is stored as is) and two t > 0 passes
// (| prev - lr*x >> 8 |) with different learning rates. After each pass
// the 8-bit normalised output stream is compared with the reference, and
// in_done must come with the write of the last pixel, two cycles after
// that pixel was presented.
module tb_deviation;
  import pat_ref_pkg::*;
  localparam int IMG_N = 4, NPIX = IMG_N * IMG_N;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic t_zero = 1, in_start = 0, in_valid = 0, in_done, out_start = 0, out_valid, out_done;
  logic [15:0] lr = '0;
  logic [8:0] in_data = '0;
  logic [7:0] out_data;

  deviation_module #(.IMG_N(IMG_N)) dut (
    .clk, .rst_n, .t_zero, .lr, .in_start, .in_valid, .in_data, .in_done,
    .out_start, .out_valid, .out_data, .out_done);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int outs[$];
  always @(posedge clk) if (out_valid) outs.push_back(int'(out_data));

  initial begin
    longint est[];
    int x[], p[];
    int lrs[3] = '{0, 128, 300};
    est = new[NPIX];
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 3; t++) begin
      int lat;
      x = new[NPIX];
      foreach (x[j]) x[j] = (j == 5) ? 256 : int'($urandom % 257);
      ref_dev(est, x, t == 0, lrs[t]);
      ref_norm(est, 1'b1, p);
      t_zero <= (t == 0); lr <= 16'(lrs[t]);
      in_start <= 1;
      @(posedge clk);
      in_start <= 0;
      for (int j = 0; j < NPIX; j++) begin
        in_valid <= 1; in_data <= 9'(x[j]);
        @(posedge clk);
      end
      in_valid <= 0;
      lat = 1;
      while (!in_done) begin @(posedge clk); lat++; end
      check(lat == 3, $sformatf("in_done %0d cycles after the last pixel", lat));
      @(posedge clk);
      outs.delete();
      out_start <= 1;
      @(posedge clk);
      out_start <= 0;
      wait (out_done);
      @(posedge clk);
      @(posedge clk);
      check(outs.size() == NPIX, "output count");
      foreach (outs[j])
        if (j < NPIX) check(outs[j] == p[j], $sformatf("t=%0d pixel %0d: %0d expected %0d", t, j, outs[j], p[j]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
