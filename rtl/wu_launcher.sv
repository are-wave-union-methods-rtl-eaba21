// wu_launcher -- BEHAVIOURAL MODEL (not synthesizable as written).
//
// Wave-union A launcher built from one LUT. The hit drives LUT input B
// directly and input A through a buffer, and the LUT implements the printed
// truth table: (A,B) = 00 -> 1, 01 -> 0, 10 -> 1, 11 -> 1, i.e. Out = A | ~B.
// When hit rises, B goes high while A is still low, so Out drops to 0; one
// buffer delay later A follows and Out returns to 1. The result is a
// negative pulse of width BUF_PS whose leading (falling) and trailing
// (rising) edges both travel down the delay line. The LUT function and the
// buffer-plus-LUT structure follow the paper, which builds the launcher from
// a LUT and a CARRY8, so the buffer stands for that carry cell. The pulse
// width is a property of the device, so it is a parameter here (value
// chosen, not given).
//
// Interface: hit in, wu_out out (idle high). Timing: asynchronous,
// LUT_PS after each input change.
module wu_launcher #(
  parameter real BUF_PS = 120.0,   // buffer + route delay on input A
  parameter real LUT_PS = 20.0     // LUT propagation delay
) (
  input  logic hit,
  output logic wu_out
);
  timeunit 1ps; timeprecision 1fs;

  logic a, b, lut_q;

  assign #(BUF_PS) a = hit;
  assign b = hit;

  // Printed truth table of the LUT.
  always_comb begin
    unique case ({a, b})
      2'b00:   lut_q = 1'b1;
      2'b01:   lut_q = 1'b0;
      2'b10:   lut_q = 1'b1;
      default: lut_q = 1'b1;
    endcase
  end

  assign #(LUT_PS) wu_out = lut_q;
endmodule
