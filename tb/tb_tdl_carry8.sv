// tb_tdl_carry8: checks the delay-line model with equal element delays
// (SEED = 0, 4 cells, 5 ps per element, falling edges 1.03x slower): after a
// falling then a rising edge at known times, every sampled S and C tap must
// hold the value given by its position (S of element e at 5e+2.5 ps, C at
// 5(e+1) ps). A second run uses the default uneven line and checks that the
// taps still form one clean step over the whole line order.
module tb_tdl_carry8;
  timeunit 1ps; timeprecision 1fs;
  int checks = 0, failures = 0;
  logic clk = 1'b0, sig = 1'b1;
  logic [3:0][7:0] c_q, s_q;
  logic [59:0][7:0] c60, s60;

  tdl_carry8 #(.N_CARRY8(4), .C_PS(5.0), .SEED(0), .FALL_SCALE(1.03)) dut
    (.clk, .sig_in(sig), .c_q, .s_q);
  tdl_carry8 dut60 (.clk, .sig_in(sig), .c_q(c60), .s_q(s60));

  function automatic logic expect_tap(real pos, real dt_fall, real dt_rise);
    // value at a tap with rising arrival pos: rising edge (newest) first
    if (dt_rise >= pos) return 1'b1;
    if (dt_fall >= pos * 1.03) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    realtime tf, tr;
    #2000;
    repeat (5) begin
      int unsigned df, w;
      df = 80 + $urandom % 90;       // time from falling edge to clock edge
      w  = 10 + $urandom % 60;       // pulse width
      tf = 10000.0 * (checks / 64 + 1);
      #(tf - $realtime) sig = 1'b0;
      #(w) sig = 1'b1;
      tr = tf + w;
      #(tf + df - $realtime) clk = 1'b1;
      #1 clk = 1'b0;
      for (int e = 0; e < 32; e++) begin
        logic ec, es;
        ec = expect_tap(5.0 * (e + 1), real'(df), real'(df) - real'(w));
        es = expect_tap(5.0 * e + 2.5, real'(df), real'(df) - real'(w));
        checks += 2;
        if (c_q[e/8][e%8] !== ec) begin failures++; $display("FAIL C%0d df=%0d w=%0d", e, df, w); end
        if (s_q[e/8][e%8] !== es) begin failures++; $display("FAIL S%0d df=%0d w=%0d", e, df, w); end
      end
    end
    // Uneven line: a single falling step leaves zeros then ones in line order.
    #5000 sig = 1'b0;
    #1200 clk = 1'b1;
    #1 clk = 1'b0;
    begin
      int n0, trans;
      logic prev;
      n0 = 0; trans = 0; prev = 1'b0;
      for (int e = 0; e < 480; e++) begin
        if (s60[e/8][e%8] != prev) trans++;
        prev = s60[e/8][e%8];
        if (c60[e/8][e%8] != prev) trans++;
        prev = c60[e/8][e%8];
        n0 += (s60[e/8][e%8] == 1'b0) + (c60[e/8][e%8] == 1'b0);
      end
      checks += 2;
      if (trans != 1) begin failures++; $display("FAIL uneven line: %0d transitions", trans); end
      if (n0 < 300 || n0 > 700) begin failures++; $display("FAIL uneven line: %0d low taps", n0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
