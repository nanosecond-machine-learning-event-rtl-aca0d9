// active_array_lut -- converts the one-hot "active input array" of a Bin Engine
// into a bin index.
//
// Both Bin Engines end in a small table that takes the vector in_0 .. in_{NB-1},
// of which exactly one element is 1, and returns the position b of that element
// (the array [0,0,1,0], listed from in_0, gives b = 2). It is written here as an
// OR of the indices of the set inputs, which is the plain encoder form of that
// table; the source design only gives the table's function. Purely
// combinational; the one-hot rule is checked by the Bin Engines, which have a
// clock.
//
// Parameters: NB number of bins (inputs), BW output width.
module active_array_lut #(
  parameter int unsigned NB = 4,
  parameter int unsigned BW = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic [NB-1:0] in_active,  // one-hot bin vector, in_active[b] = in_b
  output logic [BW-1:0] out_index   // position of the set bit
);

  always_comb begin
    out_index = '0;
    for (int unsigned b = 0; b < NB; b++)
      if (in_active[b]) out_index = out_index | BW'(b);
  end

endmodule
