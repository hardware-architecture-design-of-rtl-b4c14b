// amu: address mapping unit.
//
// Produces the geometry-table address of the pixel being processed, in one
// of four addressing modes chosen by the execution cycle cc. Each mode is a
// counter that walks the IMG_N x IMG_N grid in its own order while the
// image itself is always walked in raster order:
//   counter 1 (cc 0): row ascending,  column ascending  -> the pixel itself
//   counter 2 (cc 1): row ascending,  column descending -> mirror about the
//                     vertical axis (sensors 32..63 read sets 32..1)
//   counter 3 (cc 2): row descending, column descending -> point reflection
//                     through the centre (sensors 64..95 read sets 0..31)
//   counter 4 (cc 3): row descending, column ascending  -> mirror about the
//                     horizontal axis (sensors 96..127 read sets 32..1)
// A multiplexer driven by cc selects one of the four counter values.
// Four counters and a cc-driven multiplexer follow the method; the row and
// column counting rules are derived here from the ring/grid symmetry.
//
// Interface: restart puts every counter on its first pixel; step advances
// all counters by one pixel. addr is combinational from the counters, so it
// is valid in the same cycle as the counter state it reflects.
module amu #(
  parameter int unsigned IMG_N = pat_pkg::IMG_N
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              restart,
  input  logic                              step,
  input  logic [1:0]                        cc,
  output logic [2*$clog2(IMG_N)-1:0]        addr
);
  localparam int unsigned CW = $clog2(IMG_N);
  localparam logic [CW-1:0] LAST = CW'(IMG_N - 1);

  typedef struct packed {
    logic [CW-1:0] row;
    logic [CW-1:0] col;
  } rc_t;

  rc_t cnt [4];  // counter1..counter4

  // Initial value and counting direction of each counter.
  function automatic rc_t first_of(int unsigned k);
    rc_t r;
    r.row = (k >= 2) ? LAST : '0;
    r.col = (k == 1 || k == 2) ? LAST : '0;
    return r;
  endfunction

  function automatic rc_t next_of(int unsigned k, rc_t r);
    rc_t n;
    logic row_up, col_up, wrap;
    row_up = (k < 2);
    col_up = (k == 0 || k == 3);
    n = r;
    wrap = col_up ? (r.col == LAST) : (r.col == '0);
    n.col = wrap ? first_of(k).col : (col_up ? r.col + 1'b1 : r.col - 1'b1);
    if (wrap) n.row = row_up ? r.row + 1'b1 : r.row - 1'b1;
    return n;
  endfunction

  always_ff @(posedge clk) begin
    for (int k = 0; k < 4; k++) begin
      if (!rst_n || restart) cnt[k] <= first_of(k);
      else if (step)         cnt[k] <= next_of(k, cnt[k]);
    end
  end

  // The mode multiplexer.
  always_comb addr = cnt[cc];

endmodule
