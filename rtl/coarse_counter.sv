// coarse_counter: coarse time of a hit in sampling-clock cycles.
//
// A free-running COARSE_W-bit counter of the sampling clock. When the fine
// path reports an event (capture), the counter value of the cycle in which
// the delay line was sampled, LAT cycles earlier, is latched as the event's
// coarse stamp. wrap pulses for one cycle each time the counter rolls over,
// so a host can extend the range. The paper only names the coarse counter
// (and notes it extends the range); width, latching and the wrap pulse are
// this design's choices.
//
// Timing: stamp/stamp_valid one cycle after capture.
module coarse_counter #(
  parameter int unsigned COARSE_W = 16,
  parameter int unsigned LAT      = 3
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                capture,
  output logic [COARSE_W-1:0] count,
  output logic [COARSE_W-1:0] stamp,
  output logic                stamp_valid,
  output logic                wrap
);
  timeunit 1ps; timeprecision 1fs;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count       <= '0;
      stamp       <= '0;
      stamp_valid <= 1'b0;
      wrap        <= 1'b0;
    end else begin
      count       <= count + 1'b1;
      wrap        <= &count;
      stamp_valid <= capture;
      if (capture) stamp <= count - COARSE_W'(LAT);
    end
  end
endmodule
