// tb_wu_launcher: checks the launcher's static truth table (idle high for hit
// low and for hit held high) and that a hit step produces one negative pulse
// of BUF_PS width, starting LUT_PS after the hit.
module tb_wu_launcher;
  timeunit 1ps; timeprecision 1fs;
  int checks = 0, failures = 0;
  logic hit = 1'b0, wu;
  realtime t_fall = 0, t_rise = 0;
  int n_fall = 0, n_rise = 0;
  wu_launcher #(.BUF_PS(120.0), .LUT_PS(20.0)) dut (.hit, .wu_out(wu));

  always @(negedge wu) begin t_fall = $realtime; n_fall++; end
  always @(posedge wu) if ($realtime > 100) begin t_rise = $realtime; n_rise++; end

  task automatic chk(logic exp, string what);
    checks++;
    if (wu !== exp) begin failures++; $display("FAIL %s: wu=%b at %0t", what, wu, $realtime); end
  endtask

  initial begin
    #1000; chk(1'b1, "idle low");
    for (int k = 0; k < 3; k++) begin
      realtime t0;
      t0 = $realtime;
      hit = 1'b1;
      #30;  chk(1'b0, "pulse low");
      #200; chk(1'b1, "after pulse");
      checks += 2;
      if (t_fall - t0 < 19.9 || t_fall - t0 > 20.1) begin failures++; $display("FAIL fall delay %0t", t_fall - t0); end
      if (t_rise - t_fall < 119.9 || t_rise - t_fall > 120.1) begin failures++; $display("FAIL width %0t", t_rise - t_fall); end
      #500; chk(1'b1, "hit held high");
      hit = 1'b0;
      #500; chk(1'b1, "hit released");
    end
    checks++;
    if (n_fall != 3 || n_rise != 3) begin failures++; $display("FAIL pulses %0d %0d", n_fall, n_rise); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
