// tb_loss: runs the loss module over two frames of four execution cycles
// (2 lanes, 8 samples) against small memory models of the s-Wave and
// load-unit read ports. Values are drawn wide enough that some residuals
// saturate. Checks every residual written (lane, sample, value), the loss
// value floor(sqrt(sum r^2)) over all four cycles, and iter_end for a
// threshold just above (frame 1) and equal to (frame 2) the loss.
module tb_loss;
  import pat_ref_pkg::*;
  localparam int LANES = 2, SAMP_AW = 3, M = 1 << SAMP_AW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, first = 0, last = 0;
  logic [31:0] threshold = '0;
  logic [SAMP_AW-1:0] rd_addr;
  logic [0:0] rd_lane;
  logic signed [31:0] sn_data;
  logic signed [15:0] s_data;
  logic res_wr_en;
  logic [0:0] res_wr_lane;
  logic [SAMP_AW-1:0] res_wr_addr;
  logic signed [15:0] res_wr_data;
  logic busy, done, loss_valid, iter_end;
  logic [31:0] loss;

  loss_module #(.LANES(LANES), .SAMP_AW(SAMP_AW)) dut (
    .clk, .rst_n, .start, .first, .last, .threshold, .rd_addr, .rd_lane,
    .sn_data, .s_data, .res_wr_en, .res_wr_lane, .res_wr_addr, .res_wr_data,
    .busy, .done, .loss, .loss_valid, .iter_end);

  int sn_mem [LANES][M];
  int s_mem  [LANES][M];
  always @(posedge clk) begin
    sn_data <= 32'(sn_mem[rd_lane][rd_addr]);
    s_data  <= 16'(s_mem[rd_lane][rd_addr]);
  end

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

  int exp_r [LANES][M];
  int n_wr = 0;
  always @(posedge clk) if (res_wr_en) begin
    n_wr++;
    check(int'(res_wr_data) == exp_r[res_wr_lane][res_wr_addr],
          $sformatf("residual lane %0d m %0d: %0d expected %0d", res_wr_lane, res_wr_addr,
                    res_wr_data, exp_r[res_wr_lane][res_wr_addr]));
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 2; f++) begin
      automatic longint sq = 0;
      longint lv;
      for (int c = 0; c < 4; c++) begin
        for (int i = 0; i < LANES; i++)
          for (int m = 0; m < M; m++) begin
            sn_mem[i][m] = int'($urandom % 120001) - 60000;
            s_mem[i][m]  = int'($urandom % 65536) - 32768;
            exp_r[i][m]  = sat16(longint'(sn_mem[i][m]) - s_mem[i][m]);
            sq += longint'(exp_r[i][m]) * exp_r[i][m];
          end
        lv = isqrt_ref(sq);
        threshold <= (f == 0) ? 32'(lv + 1) : 32'(lv);
        n_wr = 0;
        start <= 1; first <= (c == 0); last <= (c == 3);
        @(posedge clk);
        start <= 0;
        @(posedge done);
        #1;
        check(n_wr == LANES * M, $sformatf("%0d residuals written", n_wr));
        if (c == 3) begin
          check(loss_valid, "loss_valid missing with done");
          check(longint'(loss) == lv, $sformatf("loss %0d expected %0d", loss, lv));
          check(iter_end == (f == 0), $sformatf("iter_end %0d in frame %0d", iter_end, f));
        end else begin
          check(!loss_valid, "loss_valid before the last cycle");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
