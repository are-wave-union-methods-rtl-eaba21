// tb_histogram: 64-bin histogram with 32-bit counters and a 3-bit-counter
// instance for saturation. Clears, then sends random codes (many back to
// back, many repeating the previous code) and compares every counter with a
// reference array; checks the read latency, that events during a clear
// sweep are dropped, and that the 3-bit counters stop at 7 and set sat.
module tb_histogram;
  timeunit 1ps; timeprecision 1fs;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1000 clk = ~clk;

  logic in_valid = 1'b0, clr = 1'b0, busy, sat;
  logic [5:0] in_bin = '0, rd_addr = '0;
  logic [31:0] rd_data;
  histogram #(.ADDR_W(6), .COUNT_W(32)) dut (.clk, .rst_n, .in_valid, .in_bin, .hist_clr(clr),
    .busy, .sat, .rd_addr, .rd_data);

  logic v3 = 1'b0, clr3 = 1'b0, busy3, sat3;
  logic [2:0] b3 = '0, ra3 = '0;
  logic [2:0] rd3;
  histogram #(.ADDR_W(3), .COUNT_W(3)) dut3 (.clk, .rst_n, .in_valid(v3), .in_bin(b3), .hist_clr(clr3),
    .busy(busy3), .sat(sat3), .rd_addr(ra3), .rd_data(rd3));

  int ref_h [64];

  task automatic clear_all();
    @(negedge clk) clr = 1'b1; clr3 = 1'b1;
    @(negedge clk) clr = 1'b0; clr3 = 1'b0;
    while (busy) @(negedge clk);
    foreach (ref_h[i]) ref_h[i] = 0;
  endtask

  task automatic read_check();
    for (int a = 0; a < 64; a++) begin
      @(negedge clk) rd_addr = 6'(a);
      @(negedge clk);
      checks++;
      if (rd_data != 32'(ref_h[a])) begin failures++; $display("FAIL bin %0d = %0d exp %0d", a, rd_data, ref_h[a]); end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    clear_all();
    read_check();
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = ($urandom % 4 != 0);
      if ($urandom % 3 != 0) in_bin = 6'($urandom % 64);
      if (in_valid) ref_h[in_bin]++;
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (3) @(negedge clk);
    read_check();
    // events during the clear sweep are dropped
    @(negedge clk) clr = 1'b1;
    @(negedge clk) clr = 1'b0; in_valid = 1'b1; in_bin = 6'd9;
    @(negedge clk) in_valid = 1'b0;
    while (busy) @(negedge clk);
    foreach (ref_h[i]) ref_h[i] = 0;
    repeat (3) @(negedge clk);
    read_check();
    // saturation
    for (int n = 0; n < 10; n++) begin @(negedge clk) v3 = 1'b1; b3 = 3'd5; end
    @(negedge clk) v3 = 1'b0;
    repeat (3) @(negedge clk);
    ra3 = 3'd5;
    @(negedge clk);
    checks += 2;
    if (rd3 != 3'd7) begin failures++; $display("FAIL saturation %0d", rd3); end
    if (!sat3 || sat) begin failures++; $display("FAIL sat flags %b %b", sat3, sat); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
