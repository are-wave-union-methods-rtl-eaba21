// tb_tm2oh: self-checking test of the thermometer-to-one-hot converter.
// Builds wave-union patterns 1^r 0^k 1^m (and the edge cases: no zero,
// zeros to the end, zeros from the start) for a 60-bit and an 8-bit sub-TDL
// and compares both edge variants with the expected single hot bit.
module tb_tm2oh;
  timeunit 1ps; timeprecision 1fs;
  import tdc_pkg::*;

  int checks = 0, failures = 0;

  logic [59:0] t60;
  logic [60:0] r60, f60;
  logic [7:0]  t8;
  logic [8:0]  r8, f8;

  tm2oh #(.N(60), .EDGE(EDGE_RISING))  u_r60 (.therm(t60), .onehot(r60));
  tm2oh #(.N(60), .EDGE(EDGE_FALLING)) u_f60 (.therm(t60), .onehot(f60));
  tm2oh #(.N(8),  .EDGE(EDGE_RISING))  u_r8  (.therm(t8),  .onehot(r8));
  tm2oh #(.N(8),  .EDGE(EDGE_FALLING)) u_f8  (.therm(t8),  .onehot(f8));

  task automatic check60(int r, int f);
    logic [60:0] er, ef;
    t60 = '1;
    for (int i = r; i < f; i++) t60[i] = 1'b0;
    #1;
    er = '0; ef = '0;
    if (f > r) begin er[r] = 1'b1; ef[f] = 1'b1; end
    checks += 2;
    if (r60 !== er) begin failures++; $display("FAIL r60 r=%0d f=%0d got %h", r, f, r60); end
    if (f60 !== ef) begin failures++; $display("FAIL f60 r=%0d f=%0d got %h", r, f, f60); end
  endtask

  initial begin
    for (int r = 0; r <= 60; r++)
      for (int f = r; f <= 60; f += 3) check60(r, f);
    check60(0, 60);
    check60(59, 60);
    for (int r = 0; r <= 8; r++)
      for (int f = r; f <= 8; f++) begin
        t8 = '1;
        for (int i = r; i < f; i++) t8[i] = 1'b0;
        #1;
        checks += 2;
        if (f > r) begin
          if (r8 !== (9'd1 << r) || f8 !== (9'd1 << f)) begin failures += 2; $display("FAIL n8 r=%0d f=%0d", r, f); end
        end else if (r8 !== '0 || f8 !== '0) begin failures += 2; $display("FAIL n8 idle"); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
