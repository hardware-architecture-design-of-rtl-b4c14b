// tb_amu: checks the four addressing modes of the address mapping unit.
//
// For an 8 x 8 grid and for the default 128 x 128 grid it walks every
// pixel in every execution cycle and compares the address with the
// mirror formula of that mode. For the 8 x 8 grid it also checks the
// property the mapping exists for: the distance from the sensor a lane
// serves to pixel j equals the distance from the stored sensor whose
// table the lane reads to the pixel at the mapped address.
module tb_amu;
  import pat_ref_pkg::*;
  localparam int N1 = 8, N2 = 128, LANES = 4;

  logic clk = 0, rst_n = 0, restart = 0, step = 0;
  logic [1:0] cc = '0;
  logic [5:0]  addr1;
  logic [13:0] addr2;
  always #5 clk = ~clk;

  amu #(.IMG_N(N1)) dut1 (.clk, .rst_n, .restart, .step, .cc, .addr(addr1));
  amu dut2 (.clk, .rst_n, .restart, .step, .cc, .addr(addr2));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic int expect_addr(int c, int j, int n);
    int row = j / n, col = j % n;
    case (c)
      0: return j;
      1: return row * n + (n - 1 - col);
      2: return n * n - 1 - j;
      default: return (n - 1 - row) * n + col;
    endcase
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int c = 0; c < 4; c++) begin
      cc <= 2'(c);
      restart <= 1;
      @(posedge clk);
      restart <= 0;
      step <= 1;
      for (int j = 0; j < N2 * N2; j++) begin
        #1;
        if (j < N1 * N1) begin
          check(addr1 == 6'(expect_addr(c, j, N1)),
                $sformatf("8x8 cc=%0d j=%0d addr=%0d", c, j, addr1));
          for (int i = 0; i < LANES; i++)
            check(fabs(distance(pat_pkg::lane_channel(c, i, LANES), j, 4 * LANES, N1) -
                       distance(pat_pkg::lane_rom(c, i), int'(addr1), 4 * LANES, N1)) < 1e-9,
                  $sformatf("symmetry cc=%0d lane=%0d j=%0d", c, i, j));
        end
        check(addr2 == 14'(expect_addr(c, j, N2)),
              $sformatf("128x128 cc=%0d j=%0d addr=%0d", c, j, addr2));
        @(posedge clk);
      end
      step <= 0;
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
