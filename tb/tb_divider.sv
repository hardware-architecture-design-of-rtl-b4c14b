// tb_divider: issues one random division per cycle (including image-style
// operands (v << 8) / max with v <= max, and a zero divisor) and checks
// every quotient and that it arrives exactly NW cycles after its operands.
module tb_divider;
  localparam int NW = 32, DW = 24;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [NW-1:0] num = '0, quo;
  logic [DW-1:0] den = '0;
  always #5 clk = ~clk;

  divider #(.NW(NW), .DW(DW)) dut (.clk, .rst_n, .in_valid, .num, .den, .out_valid, .quo);

  int checks = 0, failures = 0;
  longint exp_q[$];
  int     exp_t[$];
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0 || quo != NW'(exp_q[0]) || cyc != exp_t[0]) begin
      failures++;
      if (failures < 10) $display("FAIL: quo=%0d expected %0d at %0d/%0d", quo,
                                  exp_q.size() ? exp_q[0] : -1, cyc, exp_t.size() ? exp_t[0] : -1);
    end
    if (exp_q.size()) begin void'(exp_q.pop_front()); void'(exp_t.pop_front()); end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 3000; n++) begin
      longint a, b;
      b = longint'($urandom) & ((1 << DW) - 1);
      case (n % 4)
        0: a = longint'($urandom);
        1: a = (b == 0) ? 0 : (longint'($urandom) % (b + 1)) << 8;  // image style
        2: begin b = 0; a = longint'($urandom); end
        default: begin b = b & 32'hff; a = longint'($urandom); end
      endcase
      in_valid <= 1; num <= NW'(a); den <= DW'(b);
      exp_q.push_back(b == 0 ? 0 : (a / b));
      exp_t.push_back(cyc + 2 + NW);  // result NW cycles after the operands are seen
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (NW + 5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
