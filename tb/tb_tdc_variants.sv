// tb_tdc_variants: runs the code-density and calibration flow on the three
// other converters the RTL can be set to, each with its own channel:
//   WU TDC   : wave union, C taps only, compensation on the ideal grid
//              (calibration must reduce sigma_DNL);
//   DS TDC   : dual sampling, no wave union (hit fed directly);
//   DSWU TDC : wave union and dual sampling, compensation without binning.
// The binned DSWU converter is covered by tb_tdc_top.
module tb_tdc_variants;
  timeunit 1ps; timeprecision 1fs;

  logic done_wu, done_ds, done_dswu;
  int   c_wu, f_wu, c_ds, f_ds, c_dswu, f_dswu;

  tdc_flow_bench #(.USE_WU(1'b1), .USE_DS(1'b0), .BIN_MERGE(1), .N_HITS(20000), .EXPECT_GAIN(1'b1), .NAME("WU"))
    b_wu (.done(done_wu), .checks(c_wu), .failures(f_wu));
  tdc_flow_bench #(.USE_WU(1'b0), .USE_DS(1'b1), .BIN_MERGE(1), .N_HITS(20000), .EXPECT_GAIN(1'b0), .NAME("DS"))
    b_ds (.done(done_ds), .checks(c_ds), .failures(f_ds));
  tdc_flow_bench #(.USE_WU(1'b1), .USE_DS(1'b1), .BIN_MERGE(1), .N_HITS(20000), .EXPECT_GAIN(1'b0), .NAME("DSWU"))
    b_dswu (.done(done_dswu), .checks(c_dswu), .failures(f_dswu));

  initial begin
    wait (done_wu && done_ds && done_dswu);
    $display("TB_RESULT checks=%0d failures=%0d", c_wu + c_ds + c_dswu, f_wu + f_ds + f_dswu);
    $finish;
  end

  initial begin
    #2ms;
    $display("TB_RESULT checks=%0d failures=%0d", c_wu + c_ds + c_dswu, f_wu + f_ds + f_dswu + 1);
    $finish;
  end
endmodule
