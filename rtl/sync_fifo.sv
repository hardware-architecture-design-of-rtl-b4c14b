// sync_fifo: single-clock first-in first-out buffer with valid/ready on
// both sides.
//
// Storage is a DEPTH-entry array with read and write pointers one bit wider
// than the index, so full and empty are told apart by the top pointer bit.
// A word is written when in_valid && in_ready and leaves when
// out_valid && out_ready; out_data shows the oldest word (first-word
// fall-through), so a word written in cycle n can leave in cycle n+1.
// DEPTH must be a power of two. Used as the input buffer of the load unit.
module sync_fifo #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  always_comb begin
    in_ready  = (wp - rp) != (AW+1)'(DEPTH);
    out_valid = wp != rp;
    out_data  = mem[rp[AW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (in_valid && in_ready)   wp <= wp + 1'b1;
      if (out_valid && out_ready) rp <= rp + 1'b1;
    end
    if (in_valid && in_ready) mem[wp[AW-1:0]] <= in_data;
  end

  // A full FIFO never accepts and an empty one never delivers.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (wp - rp) <= (AW+1)'(DEPTH));
endmodule
