// isqrt: integer square root, root = floor(sqrt(x)), one result bit per
// clock.
//
// Digit-by-digit (shift-and-subtract) method: each step brings down the
// next two radicand bits into the remainder and tries to subtract
// (4*root + 1); success sets the next root bit. start loads x; done pulses
// IW/2 + 1 cycles later with root valid (held until the next start).
// The loss computation of the method takes this square root with a vendor
// CORDIC core; this module computes the same function with plain logic.
module isqrt #(
  parameter int unsigned IW = 64,
  localparam int unsigned RW = IW / 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [IW-1:0] x,
  output logic          busy,
  output logic          done,
  output logic [RW-1:0] root
);
  logic [IW-1:0]   rad;        // radicand, consumed two bits per step
  logic [RW+1:0]   rem;
  logic [$clog2(RW+1)-1:0] n;

  logic [RW+2:0] trial, sub;
  always_comb begin
    trial = {rem[RW:0], rad[IW-1 -: 2]};
    sub   = trial - {1'b0, root, 2'b01};
  end

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (!rst_n) begin
      busy <= 1'b0;
    end else if (start) begin
      busy <= 1'b1;
      rad  <= x;
      rem  <= '0;
      root <= '0;
      n    <= '0;
    end else if (busy) begin
      rad <= rad << 2;
      if (!sub[RW+2]) begin
        rem  <= sub[RW+1:0];
        root <= {root[RW-2:0], 1'b1};
      end else begin
        rem  <= trial[RW+1:0];
        root <= {root[RW-2:0], 1'b0};
      end
      n <= n + 1'b1;
      if (n == ($clog2(RW+1))'(RW - 1)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end
endmodule
