// tb_coarse_counter: 4-bit counter with LAT = 3. Checks that the count
// advances once per clock from reset, that a capture latches the count of
// LAT cycles earlier (with wrap-around) one cycle later with stamp_valid,
// and that wrap pulses exactly once per 16 cycles.
module tb_coarse_counter;
  timeunit 1ps; timeprecision 1fs;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, capture = 1'b0;
  logic [3:0] count, stamp;
  logic stamp_valid, wrap;
  always #1000 clk = ~clk;

  coarse_counter #(.COARSE_W(4), .LAT(3)) dut (.clk, .rst_n, .capture, .count, .stamp, .stamp_valid, .wrap);

  int edges = 0, wraps = 0;
  int cap_edge = -1;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 200; n++) begin
      @(posedge clk);
      edges++;
      #100;
      checks++;
      if (count != 4'(edges)) begin failures++; $display("FAIL count %0d exp %0d", count, edges % 16); end
      if (wrap) wraps++;
      if (stamp_valid) begin
        checks++;
        if (cap_edge < 0 || stamp != 4'(cap_edge - 3)) begin failures++; $display("FAIL stamp %0d at edge %0d", stamp, edges); end
        cap_edge = -1;
      end
      capture = ($urandom % 5 == 0) && !stamp_valid;
      if (capture) cap_edge = edges + 0;
      // capture is sampled at the next edge, where count (still) equals edges
    end
    checks++;
    if (wraps != 200 / 16) begin failures++; $display("FAIL wraps %0d", wraps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
