// tb_bin_calibration: loads a table in which raw code k maps to main bin
// k/2 and, for odd k, also to compensation bin k/2+1 with a share of
// (k*37)%256 / 256. Checks the two-cycle latency, the identity map of the
// reset-time table and of cal_en = 0, and every calibrated code exactly
// against a reference copy of the 16-bit LFSR (x^16+x^14+x^13+x^11+1,
// seed ACE1, advancing once per code). It also checks the overall share of
// codes sent to BCF_c against the table's split values.
module tb_bin_calibration;
  timeunit 1ps; timeprecision 1fs;
  import tdc_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1000 clk = ~clk;

  logic cal_en = 1'b0, in_valid = 1'b0, out_valid, tbl_we = 1'b0;
  code_t raw = '0, code;
  code_t tbl_addr = '0;
  cal_entry_t tbl_wdata;

  bin_calibration dut (.clk, .rst_n, .cal_en, .in_valid, .raw, .out_valid, .code,
                       .tbl_we, .tbl_addr, .tbl_wdata);

  logic [15:0] lfsr_ref = 16'hACE1;
  int exp_q[$];
  int n_c = 0, n_odd = 0;
  real share_sum = 0.0;

  function automatic cal_entry_t entry(int k);
    cal_entry_t e;
    e.bcf_m = code_t'(k / 2);
    e.bcf_c = code_t'(k / 2 + 1);
    e.c_valid = k[0];
    e.split = 8'((k * 37) % 256);
    return e;
  endfunction

  // Reference model of the expected output for one input code.
  function automatic int expect_code(int k, bit en);
    cal_entry_t e;
    int r;
    if (!en) r = k;
    else begin
      e = entry(k);
      if (e.c_valid && lfsr_ref[7:0] < e.split) r = e.bcf_c; else r = e.bcf_m;
    end
    lfsr_ref = {1'b0, lfsr_ref[15:1]} ^ (lfsr_ref[0] ? 16'hB400 : 16'h0000);
    return r;
  endfunction

  // Output checker: codes in order of arrival.
  always @(posedge clk) begin
    #100;
    if (out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
      else begin
        int e;
        e = exp_q.pop_front();
        if (code != code_t'(e)) begin failures++; $display("FAIL code %0d exp %0d", code, e); end
      end
    end
  end

  // Latency probe: one code, count edges until out_valid.
  task automatic latency_check();
    int n;
    @(negedge clk) in_valid = 1'b1; raw = 11'd100;
    exp_q.push_back(expect_code(100, cal_en));
    @(negedge clk) in_valid = 1'b0;
    n = 1;
    while (!out_valid) begin @(negedge clk); n++; end
    checks++;
    if (n != 2) begin failures++; $display("FAIL latency %0d", n); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // identity table after configuration, cal_en both ways
    latency_check();
    cal_en = 1'b1;
    for (int n = 0; n < 100; n++) begin
      @(negedge clk) in_valid = 1'b1; raw = code_t'($urandom % 2048);
      exp_q.push_back(int'(raw));
      lfsr_ref = {1'b0, lfsr_ref[15:1]} ^ (lfsr_ref[0] ? 16'hB400 : 16'h0000);
    end
    @(negedge clk) in_valid = 1'b0;
    // load table
    for (int k = 0; k < 2048; k++) begin
      @(negedge clk) tbl_we = 1'b1; tbl_addr = code_t'(k); tbl_wdata = entry(k);
    end
    @(negedge clk) tbl_we = 1'b0;
    repeat (3) @(negedge clk);
    latency_check();
    for (int n = 0; n < 4000; n++) begin
      int k;
      @(negedge clk);
      in_valid = ($urandom % 3 != 0);
      k = $urandom % 2048;
      raw = code_t'(k);
      if (in_valid) begin
        int e;
        e = expect_code(k, cal_en);
        exp_q.push_back(e);
        if (k % 2 == 1) begin
          n_odd++; share_sum += real'((k * 37) % 256) / 256.0;
          if (e == k / 2 + 1) n_c++;
        end
      end
    end
    @(negedge clk) in_valid = 1'b0;
    cal_en = 1'b0;
    repeat (4) @(negedge clk);
    latency_check();
    repeat (4) @(negedge clk);
    checks += 2;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
    if (n_c < share_sum - 60 || n_c > share_sum + 60) begin
      failures++; $display("FAIL share %0d exp %f", n_c, share_sum);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
