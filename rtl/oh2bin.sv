// oh2bin: one-hot to binary encoder for one sub-TDL.
//
// Output = index of the set bit of a one-hot vector of NIN bits (0 if none
// is set). Built as an OR of the indices of the set bits, the usual small
// encoder: with more than one bit set the result is their bitwise OR, which
// is why the sub-TDL must deliver bubble-free codes. Combinational.
module oh2bin #(
  parameter int unsigned NIN = 61,
  parameter int unsigned W   = $clog2(NIN)
) (
  input  logic [NIN-1:0] onehot,
  output logic [W-1:0]   bin
);
  timeunit 1ps; timeprecision 1fs;

  always_comb begin
    bin = '0;
    for (int unsigned i = 0; i < NIN; i++)
      if (onehot[i]) bin |= W'(i);
  end
endmodule
