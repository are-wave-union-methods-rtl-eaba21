// tdc_pkg: types and constants shared by the wave-union / dual-sampling
// sub-TDL time-to-digital converter.
//
// The delay line is built from cascaded CARRY8 cells (8 carry outputs C and
// 8 sum outputs S each). With dual sampling (DS) every CARRY8 gives 16 taps,
// without it 8. A wave-union (WU) signal carries two edges, so the fine code
// is the sum of a rising-edge and a falling-edge code (at most
// 2 * 16 * 60 = 1920 for the 60-cell line), which fits the 11-bit CODE_W.
// The calibration table entry (cal_entry_t) holds the main and compensation
// bin factors BCF_m / BCF_c of one raw code and the share of hits that go to
// BCF_c; that share field is this design's own addition.
package tdc_pkg;
  timeunit 1ps; timeprecision 1fs;

  localparam int unsigned CODE_W      = 11;   // raw and calibrated fine code width
  localparam int unsigned SPLIT_W     = 8;    // resolution of the BCF_c share

  typedef logic [CODE_W-1:0] code_t;

  // Which transition of the wave-union signal an encoder measures.
  typedef enum logic {EDGE_RISING = 1'b0, EDGE_FALLING = 1'b1} edge_e;

  // One calibration table word (one per raw fine code).
  typedef struct packed {
    code_t               bcf_m;    // main ideal bin
    code_t               bcf_c;    // compensation ideal bin (if c_valid)
    logic                c_valid;  // BCF_c exists for this raw bin
    logic [SPLIT_W-1:0]  split;    // share of hits sent to bcf_c, in 1/256
  } cal_entry_t;
endpackage
