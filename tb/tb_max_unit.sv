// tb_max_unit: feeds random values with random enables, clears now and
// then, and compares the register with a running maximum kept here.
module tb_max_unit;
  logic clk = 0, clr = 0, en = 0;
  logic [23:0] din = '0, max;
  always #5 clk = ~clk;

  max_unit #(.W(24)) dut (.clk, .clr, .en, .din, .max);

  int checks = 0, failures = 0;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned model = 0;
    clr <= 1;
    @(posedge clk);
    for (int n = 0; n < 2000; n++) begin
      logic c, e;
      logic [23:0] d;
      c = ($urandom % 50) == 0;
      e = ($urandom % 4) != 0;
      d = 24'($urandom);
      clr <= c; en <= e; din <= d;
      @(posedge clk);
      if (c) model = 0;
      else if (e && d > model) model = d;
      #1;
      checks++;
      if (max != 24'(model)) begin
        failures++;
        if (failures < 10) $display("FAIL: max=%0d expected %0d", max, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
