// tb_subtdl_encoder: drives the 60-cell tap arrays with wave-union patterns
// laid out in line order (S[0],C[0],S[1],...,C[7] per cell) and checks the
// rising and falling codes of the dual-sampled (all 960 taps) and the
// single-sampled (480 C taps) encoders two cycles later. The reference is
// computed without sub-TDLs: rising = taps still high before the middle of
// the pulse, falling = that plus the low taps after it. Half of the patterns
// carry bubbles (neighbouring taps swapped at both edges), which the sub-TDL
// split must absorb.
module tb_subtdl_encoder;
  timeunit 1ps; timeprecision 1fs;
  import tdc_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #1000 clk = ~clk;

  logic [59:0][7:0] c_t, s_t;
  code_t r_ds, f_ds, r_ss, f_ss;

  subtdl_encoder #(.N_CARRY8(60), .USE_DS(1'b1), .EDGE(EDGE_RISING))  u_r_ds (.clk, .c_taps(c_t), .s_taps(s_t), .code(r_ds));
  subtdl_encoder #(.N_CARRY8(60), .USE_DS(1'b1), .EDGE(EDGE_FALLING)) u_f_ds (.clk, .c_taps(c_t), .s_taps(s_t), .code(f_ds));
  subtdl_encoder #(.N_CARRY8(60), .USE_DS(1'b0), .EDGE(EDGE_RISING))  u_r_ss (.clk, .c_taps(c_t), .s_taps(s_t), .code(r_ss));
  subtdl_encoder #(.N_CARRY8(60), .USE_DS(1'b0), .EDGE(EDGE_FALLING)) u_f_ss (.clk, .c_taps(c_t), .s_taps(s_t), .code(f_ss));

  logic line [960];   // line-order view of the taps

  task automatic apply();
    for (int p = 0; p < 960; p++)
      if (p % 2 == 0) s_t[p/16][(p%16)/2] = line[p]; else c_t[p/16][(p%16)/2] = line[p];
  endtask

  typedef struct { int rd, fd, rs, fs; } exp_t;
  exp_t q[$];

  function automatic exp_t reference(int mid);
    exp_t e;
    e = '{0, 0, 0, 0};
    for (int p = 0; p < 960; p++) begin
      int hi_before, lo_after;
      hi_before = (p < mid && line[p]) ? 1 : 0;
      lo_after  = (p < mid) ? 1 : (line[p] ? 0 : 1);
      e.rd += hi_before; e.fd += lo_after;
      if (p % 2 == 1) begin e.rs += hi_before; e.fs += lo_after; end
    end
    return e;
  endfunction

  task automatic check(exp_t e);
    checks += 4;
    if (r_ds != code_t'(e.rd)) begin failures++; $display("FAIL r_ds %0d exp %0d", r_ds, e.rd); end
    if (f_ds != code_t'(e.fd)) begin failures++; $display("FAIL f_ds %0d exp %0d", f_ds, e.fd); end
    if (r_ss != code_t'(e.rs)) begin failures++; $display("FAIL r_ss %0d exp %0d", r_ss, e.rs); end
    if (f_ss != code_t'(e.fs)) begin failures++; $display("FAIL f_ss %0d exp %0d", f_ss, e.fs); end
  endtask

  initial begin
    c_t = '1; s_t = '1;
    @(negedge clk);
    for (int n = 0; n < 402; n++) begin
      int r, f;
      if (n >= 2) check(q.pop_front());
      r = $urandom % 900;
      f = r + 40 + $urandom % 200;
      if (n % 7 == 0) f = 960;            // pulse reaching the end of the line
      if (n % 11 == 0) r = 0;             // rising edge not yet in the line
      if (f > 960) f = 960;
      for (int p = 0; p < 960; p++) line[p] = (p >= r && p < f) ? 1'b0 : 1'b1;
      if (n % 2 == 1) begin
        if (r > 0)   begin line[r-1] = 1'b0; line[r] = 1'b1; end
        if (f < 960) begin line[f-1] = 1'b1; line[f] = 1'b0; end
      end
      apply();
      q.push_back(reference((r + f) / 2));
      @(negedge clk);
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
