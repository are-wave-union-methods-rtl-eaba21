// wu_fine_code: wave-union fine code and hit detection.
//
// Two sub-TDL encoders read the same sampled taps, one locating the rising
// (trailing) edge of the wave-union pulse and one the falling (leading)
// edge, and their codes are added, as in the paper's block diagram (the
// adder between Encoder (R) and Encoder (F)). Each edge acts like its own
// delay line, so the sum has twice as many bins as one edge alone.
//
// Hit detection is this design's choice (the paper does not describe it):
// a sample "holds" a hit when the first tap of the line is high again (the
// rising edge has entered) while some tap is still low (the pulse is in the
// line). The first sample that holds a hit after one that did not is the
// event; a later sample of the same pulse is ignored. The line must be
// longer than the clock period plus the pulse width, and the pulse wider
// than one sub-TDL step, for both edges to be seen.
//
// With USE_WU = 0 (the paper's non-WU variant, hit fed straight into the
// line, which idles low) the falling encoder is left out and the fine code
// is the rising-edge code alone; the same hit detection then sees the step
// while its edge is inside the line, so hit must stay high for longer than
// one clock period.
//
// Timing: taps sampled at cycle t give fine/valid at cycle t+3, valid for
// one cycle. rise_code and fall_code are the two addends, same cycle.
module wu_fine_code
  import tdc_pkg::*;
#(
  parameter int unsigned N_CARRY8 = 60,
  parameter bit          USE_DS   = 1'b1,
  parameter bit          USE_WU   = 1'b1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [N_CARRY8-1:0][7:0] c_taps,
  input  logic [N_CARRY8-1:0][7:0] s_taps,
  output logic                     valid,
  output code_t                    fine,
  output code_t                    rise_code,
  output code_t                    fall_code
);
  timeunit 1ps; timeprecision 1fs;

  code_t r_code, f_code;

  subtdl_encoder #(.N_CARRY8(N_CARRY8), .USE_DS(USE_DS), .EDGE(EDGE_RISING))
    u_enc_r (.clk, .c_taps, .s_taps, .code(r_code));
  if (USE_WU) begin : g_wu
    subtdl_encoder #(.N_CARRY8(N_CARRY8), .USE_DS(USE_DS), .EDGE(EDGE_FALLING))
      u_enc_f (.clk, .c_taps, .s_taps, .code(f_code));
  end else begin : g_no_wu
    assign f_code = '0;   // no second edge without a wave-union launcher
  end

  logic first_tap, any_low, holds;
  assign first_tap = USE_DS ? s_taps[0][0] : c_taps[0][0];
  assign any_low   = USE_DS ? (~&c_taps | ~&s_taps) : ~&c_taps;
  assign holds     = first_tap & any_low;

  logic holds_q, holds_qq, ev_q, ev_qq;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      holds_q  <= 1'b1;   // no event is reported for a pulse already in flight
      holds_qq <= 1'b1;
      ev_q     <= 1'b0;
      ev_qq    <= 1'b0;
    end else begin
      holds_q  <= holds;
      holds_qq <= holds_q;
      ev_q     <= holds_q & ~holds_qq;
      ev_qq    <= ev_q;
    end
  end

  always_ff @(posedge clk) begin
    fine      <= r_code + f_code;
    rise_code <= r_code;
    fall_code <= f_code;
  end
  assign valid = ev_qq;
endmodule
