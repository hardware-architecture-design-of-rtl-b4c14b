// tb_isqrt: compares floor(sqrt(x)) for random 64-bit radicands, perfect
// squares and their neighbours with a reference, and checks the latency
// of IW/2 + 1 cycles from start to done.
module tb_isqrt;
  import pat_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [63:0] x = '0;
  logic [31:0] root;
  always #5 clk = ~clk;

  isqrt #(.IW(64)) dut (.clk, .rst_n, .start, .x, .busy, .done, .root);

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 600; n++) begin
      longint v;
      int lat;
      case (n % 4)
        0: v = {$urandom, $urandom} & 64'h3fff_ffff_ffff_ffff;
        1: begin v = longint'($urandom >> 1); v = v * v; end
        2: begin v = longint'($urandom >> 1); v = v * v - 1; end
        default: v = longint'($urandom % 1000);
      endcase
      x <= 64'(v); start <= 1;
      @(posedge clk);
      start <= 0;
      lat = 0;
      do begin @(posedge clk); lat++; end while (!done);
      checks += 2;
      if (root != 32'(isqrt_ref(v))) begin
        failures++;
        if (failures < 10) $display("FAIL: sqrt(%0d)=%0d expected %0d", v, root, isqrt_ref(v));
      end
      if (lat != 33) begin
        failures++;
        if (failures < 10) $display("FAIL: latency %0d", lat);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
