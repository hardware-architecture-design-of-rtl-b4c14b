// divider: fully pipelined unsigned restoring divider, one quotient per
// cycle.
//
// Used to normalise an image: num is the pixel value shifted left by 8 and
// den the image maximum, so the quotient lies in 0..256. Stage k decides
// quotient bit NW-1-k by trial subtraction of the divisor from the partial
// remainder, so the latency is NW cycles from in_valid to out_valid.
// A divider at this point follows the method; its restoring, one-bit-per-
// stage form and the rule that division by zero gives 0 are this design's.
module divider #(
  parameter int unsigned NW = 32,   // dividend / quotient width
  parameter int unsigned DW = 24    // divisor width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic          out_valid,
  output logic [NW-1:0] quo
);
  typedef struct packed {
    logic          v;
    logic [DW:0]   rem;   // partial remainder (one spare bit)
    logic [NW-1:0] n;     // remaining dividend bits, then quotient bits
    logic [DW-1:0] d;
  } stage_t;

  stage_t st [NW+1];

  always_comb begin
    st[0].v   = in_valid;
    st[0].rem = '0;
    st[0].n   = num;
    st[0].d   = den;
  end

  for (genvar k = 0; k < NW; k++) begin : g_stage
    logic [DW:0] trial;
    logic [DW:0] diff;
    always_comb begin
      trial = {st[k].rem[DW-1:0], st[k].n[NW-1]};
      diff  = trial - {1'b0, st[k].d};
    end
    always_ff @(posedge clk) begin
      if (!rst_n) st[k+1].v <= 1'b0;
      else        st[k+1].v <= st[k].v;
      st[k+1].d <= st[k].d;
      if (!diff[DW]) begin
        st[k+1].rem <= diff;
        st[k+1].n   <= {st[k].n[NW-2:0], 1'b1};
      end else begin
        st[k+1].rem <= trial;
        st[k+1].n   <= {st[k].n[NW-2:0], 1'b0};
      end
    end
  end

  always_comb begin
    out_valid = st[NW].v;
    quo       = (st[NW].d == '0) ? '0 : st[NW].n;
  end
endmodule
