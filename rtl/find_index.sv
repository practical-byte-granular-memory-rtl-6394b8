// find_index: "find index of first bit of value VALUE" over a W-bit vector.
//
// Used by the spill unit (bitvector -> sentinel conversion): with VALUE=1 it locates the
// next security byte in the line's metadata vector, with VALUE=0 it picks the sentinel,
// the lowest 6-bit value not used by any normal byte. "First" is the lowest index.
// Besides the index it returns a mask that is all ones except at the found position;
// ANDing that mask with the input removes the found bit, which is how several blocks are
// chained to find the 1st, 2nd, 3rd and 4th security byte.
//
// The chaining and the mask follow the paper's spill diagram. The paper builds the block
// from 64 shift stages and one comparator; here it is a plain priority encoder, which
// computes the same function. Purely combinational.
module find_index #(
  parameter int unsigned W     = 64,
  parameter bit          VALUE = 1'b1
) (
  input  logic [W-1:0]         vec,
  output logic                 found,
  output logic [$clog2(W)-1:0] index,
  output logic [W-1:0]         mask
);
  logic [W-1:0] hits;
  assign hits = VALUE ? vec : ~vec;

  always_comb begin
    found = 1'b0;
    index = '0;
    for (int i = W - 1; i >= 0; i--) begin
      if (hits[i]) begin
        found = 1'b1;
        index = i[$clog2(W)-1:0];
      end
    end
    mask = '1;
    if (found) mask[index] = 1'b0;
  end
endmodule
