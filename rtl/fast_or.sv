// fast_or: chip-wide OR of the channel hit pulses.
//
// 'any_hit' is high whenever any of the N channels presents a hit term. Each
// term is already gated per channel by the fast-OR enable, so this block is a
// plain N-input OR, written as a balanced tree by the reduction operator. It
// is combinational; in the chip the sum is a wired current output, here it is
// a logic level.
module fast_or #(
  parameter int unsigned N = 64
) (
  input  logic [N-1:0] terms,
  output logic         any_hit
);

  assign any_hit = |terms;

endmodule
