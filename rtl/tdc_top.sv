// tdc_top: one channel of the binned dual-sampling wave-union (DSWU)
// sub-TDL time-to-digital converter.
//
// Data path, following the paper's block diagram (Fig. 1(a) with the
// dual-sampling sub-TDL of Fig. 1(b)):
//   hit -> wave-union launcher (negative pulse) -> 60-cell CARRY8 delay
//   line, S and C taps registered on clk -> rising and falling sub-TDL
//   encoders, summed -> calibration (bin compensation, or binning when the
//   table targets merged bins) -> histogram in block RAM; the coarse counter
//   stamps each event with the clock cycle it was sampled in.
// The launcher and delay line are behavioural models (vendor LUT/CARRY8
// timing); everything after the sampling flip-flops is synthesizable.
//
// Host side (the PC link itself is outside this design): cal_en selects
// raw or calibrated codes, tbl_* writes the calibration table, hist_clr /
// hist_rd_* clear and read the histogram, and ev_* gives each event's
// coarse stamp, raw and calibrated fine code.
// Timing: an event appears on ev_valid 5 cycles after the clock edge that
// sampled it (3 in the fine path, 2 in calibration) and is counted in the
// histogram 2 cycles later.
// The other three converters of the paper are parameter settings:
//   USE_DS = 0, USE_WU = 1 : WU TDC (8 taps per CARRY8, two edges)
//   USE_DS = 1, USE_WU = 0 : DS TDC (16 taps per CARRY8, hit fed directly)
//   USE_DS = 1, USE_WU = 1 : DSWU TDC (binned or not: only the table differs)
// The separate rising and falling codes, the running coarse count and its
// stamp strobe are connected but not used here; the event path carries
// the summed code and the stamp aligned with it instead.
module tdc_top
  import tdc_pkg::*;
#(
  parameter int unsigned N_CARRY8 = 60,
  parameter bit          USE_DS   = 1'b1,
  parameter bit          USE_WU   = 1'b1,
  parameter int unsigned COARSE_W = 16,
  parameter int unsigned COUNT_W  = 32,
  parameter int unsigned TDL_SEED = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                hit,
  // calibration control
  input  logic                cal_en,
  input  logic                tbl_we,
  input  code_t               tbl_addr,
  input  cal_entry_t          tbl_wdata,
  // histogram host port
  input  logic                hist_clr,
  output logic                hist_busy,
  output logic                hist_sat,
  input  code_t               hist_rd_addr,
  output logic [COUNT_W-1:0]  hist_rd_data,
  // event stream
  output logic                ev_valid,
  output logic [COARSE_W-1:0] ev_coarse,
  output code_t               ev_raw,
  output code_t               ev_code,
  output logic                coarse_wrap
);
  timeunit 1ps; timeprecision 1fs;

  localparam int unsigned FINE_LAT = 3;

  logic wu;
  if (USE_WU) begin : g_launcher
    wu_launcher u_launcher (.hit, .wu_out(wu));
  end else begin : g_direct
    assign wu = hit;      // non-WU variant: the hit enters the line directly
  end

  logic [N_CARRY8-1:0][7:0] c_q, s_q;
  tdl_carry8 #(.N_CARRY8(N_CARRY8), .SEED(TDL_SEED), .IDLE(USE_WU)) u_tdl (
    .clk, .sig_in(wu), .c_q, .s_q);

  logic  f_valid;
  code_t fine, rise_code, fall_code;
  wu_fine_code #(.N_CARRY8(N_CARRY8), .USE_DS(USE_DS), .USE_WU(USE_WU)) u_fine (
    .clk, .rst_n, .c_taps(c_q), .s_taps(s_q),
    .valid(f_valid), .fine, .rise_code, .fall_code);

  logic [COARSE_W-1:0] count, stamp;
  logic                stamp_valid;
  coarse_counter #(.COARSE_W(COARSE_W), .LAT(FINE_LAT)) u_coarse (
    .clk, .rst_n, .capture(f_valid), .count, .stamp, .stamp_valid, .wrap(coarse_wrap));

  logic  c_valid;
  code_t c_code;
  bin_calibration u_cal (
    .clk, .rst_n, .cal_en, .in_valid(f_valid), .raw(fine),
    .out_valid(c_valid), .code(c_code),
    .tbl_we, .tbl_addr, .tbl_wdata);

  // Align the coarse stamp and the raw code with the calibrated code.
  code_t               raw_d1, raw_d2;
  logic [COARSE_W-1:0] stamp_d1;
  always_ff @(posedge clk) begin
    raw_d1   <= fine;
    raw_d2   <= raw_d1;
    stamp_d1 <= stamp;
  end

  assign ev_valid  = c_valid;
  assign ev_coarse = stamp_d1;
  assign ev_raw    = raw_d2;
  assign ev_code   = c_code;

  histogram #(.ADDR_W(CODE_W), .COUNT_W(COUNT_W)) u_hist (
    .clk, .rst_n, .in_valid(c_valid), .in_bin(c_code),
    .hist_clr, .busy(hist_busy), .sat(hist_sat),
    .rd_addr(hist_rd_addr), .rd_data(hist_rd_data));
endmodule
