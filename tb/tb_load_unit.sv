// tb_load_unit: streams two frames (16 channels, 16 samples) back to back
// into the load unit with random gaps. Checks that `loaded` rises after
// exactly one frame, that the input stalls while the frame is held, that
// every (cc, lane, sample) read returns the channel the lane serves in
// that cycle with a one-cycle latency, and that after `release` the second
// frame is stored intact.
module tb_load_unit;
  localparam int LANES = 4, SAMP_AW = 4, N = 4 * LANES, M = 1 << SAMP_AW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, release_frame = 0, loaded;
  logic signed [15:0] in_data = '0;
  logic [1:0] rd_cc = '0;
  logic [SAMP_AW-1:0] rd_addr = '0;
  logic signed [15:0] rd_data [LANES];

  load_unit #(.LANES(LANES), .SAMP_AW(SAMP_AW), .FIFO_DEPTH(8)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .release_frame, .loaded,
    .rd_cc, .rd_addr, .rd_data);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sample(int f, int ch, int m);
    return (f * 977 + ch * 131 + m * 17) % 65536 - 32768;
  endfunction

  int stalls = 0;
  int sent = 0;
  initial begin
    @(posedge rst_n);
    for (int f = 0; f < 2; f++)
      for (int m = 0; m < M; m++)
        for (int ch = 0; ch < N; ch++) begin
          while ($urandom % 4 == 0) begin in_valid <= 0; @(posedge clk); end
          in_valid <= 1;
          in_data  <= 16'(sample(f, ch, m));
          @(posedge clk);
          while (!in_ready) begin stalls++; @(posedge clk); end
          sent++;
        end
    in_valid <= 0;
  end

  task automatic read_all(int f);
    for (int c = 0; c < 4; c++)
      for (int m = 0; m < M; m++) begin
        rd_cc <= 2'(c); rd_addr <= SAMP_AW'(m);
        @(posedge clk);
        #1;
        for (int i = 0; i < LANES; i++)
          check(int'(rd_data[i]) == sample(f, pat_pkg::lane_channel(c, i, LANES), m),
                $sformatf("frame %0d cc %0d lane %0d m %0d: %0d", f, c, i, m, rd_data[i]));
      end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    wait (loaded);
    #1;
    check(sent >= N * M, "loaded before the whole frame was sent");
    repeat (200) @(posedge clk);
    check(loaded, "frame not held");
    check(stalls > 0, "input never stalled while a frame was held");
    read_all(0);
    @(posedge clk);
    release_frame <= 1;
    @(posedge clk);
    release_frame <= 0;
    @(posedge clk);
    #1;
    check(!loaded, "release did not clear loaded");
    wait (loaded);
    @(posedge clk);
    read_all(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
