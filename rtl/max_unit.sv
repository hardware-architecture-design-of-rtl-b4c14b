// max_unit: running maximum used for image normalisation.
//
// A comparator checks the incoming value against the stored maximum, a
// selector picks the larger one and a register holds it. clr loads the
// register with 0 (its initial value) at the start of a pass; en marks the
// cycles whose din takes part. max is the register output, so a value
// presented in cycle n is reflected in max from cycle n+1. The structure
// (comparator, selector, register cleared to 0) follows the method.
module max_unit #(
  parameter int unsigned W = 24
) (
  input  logic         clk,
  input  logic         clr,
  input  logic         en,
  input  logic [W-1:0] din,
  output logic [W-1:0] max
);
  logic gt;
  always_comb gt = din > max;           // comparator

  always_ff @(posedge clk) begin
    if (clr)           max <= '0;       // "0 (init)"
    else if (en && gt) max <= din;      // selector
  end
endmodule
