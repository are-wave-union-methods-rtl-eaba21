// tm2oh: thermometer-to-one-hot converter for one sub-TDL.
//
// A sub-TDL is the set of taps that share one output position (say C[3])
// in every CARRY8 of the line, so neighbouring bits are a whole cell apart
// and the bubbles of the full line do not appear. Bit 0 is the tap nearest
// the line input. The wave-union pulse leaves the pattern 1..1 0..0 1..1
// (idle level high): the trailing rising edge has passed the leading ones,
// the leading falling edge has passed every bit up to the last zero.
//   EDGE_RISING : oh[i] = 1 where the first zero sits  (1 -> 0 step at i)
//   EDGE_FALLING: oh[i] = 1 just after the last zero   (0 -> 1 step at i)
// The code is padded with a 1 on both sides, so a line of zeros reaching the
// end gives oh[N] for the falling edge, and no zero at all gives no hot bit.
// For the rising edge oh[N] is therefore always 0; it is kept so that both
// edges share one port width.
// The split into TM2OH and OH2BIN stages follows the paper; the padding rule
// is this design's choice. Purely combinational.
module tm2oh
  import tdc_pkg::*;
#(
  parameter int unsigned N    = 60,
  parameter edge_e       EDGE = EDGE_RISING
) (
  input  logic [N-1:0] therm,
  output logic [N:0]   onehot
);
  timeunit 1ps; timeprecision 1fs;

  logic [N+1:0] ext;   // ext[i+1] = therm[i]; ext[0] = ext[N+1] = 1
  assign ext = {1'b1, therm, 1'b1};

  always_comb begin
    for (int unsigned i = 0; i <= N; i++) begin
      if (EDGE == EDGE_RISING) onehot[i] =  ext[i] & ~ext[i+1];
      else                     onehot[i] = ~ext[i] &  ext[i+1];
    end
  end
endmodule
