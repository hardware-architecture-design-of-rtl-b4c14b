// tb_responder: behavioural stand-in for a sub-module in controller tests.
// Answers each one-cycle `start` pulse with a one-cycle `done` pulse 2 to
// 6 cycles later.
module tb_responder (
  input  logic clk,
  input  logic start,
  output logic done
);
  int cnt = 0;
  initial done = 1'b0;
  always @(posedge clk) begin
    done <= 1'b0;
    if (start)          cnt <= 2 + int'($urandom % 5);
    else if (cnt > 1)   cnt <= cnt - 1;
    else if (cnt == 1) begin
      cnt  <= 0;
      done <= 1'b1;
    end
  end
endmodule
