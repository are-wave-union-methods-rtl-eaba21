// bin_calibration: bin-compensation / binning remapper for raw fine codes.
//
// Each raw bin of the delay line is uneven. From a code-density test the
// host works out, for every raw code, the ideal bin that receives most of it
// (BCF_m, main factor) and, if the raw bin straddles an ideal boundary, the
// next ideal bin (BCF_c, compensation factor), and writes them into this
// table. With binning the ideal bins are pairs of merged bins, so the same
// table simply targets the merged grid; the hardware is identical.
// The paper gives BCF_m / BCF_c and says a proportion of the raw bin's
// counts goes to BCF_c; how that proportion is applied per hit is this
// design's choice: the table also stores the share (split / 256) and a
// 16-bit LFSR decides, hit by hit, whether the code goes to BCF_c
// (when lfsr[7:0] < split) or to BCF_m. The table starts as the identity
// map; with cal_en low the raw code passes through unchanged.
//
// Interface: in_valid/raw in; out_valid/code out. Table write port
// (tbl_we, tbl_addr, tbl_wdata) for the host, usable at any time; cal_en
// is taken together with the code it applies to.
// Timing: two cycles from in_valid to out_valid, one code per cycle.
module bin_calibration
  import tdc_pkg::*;
#(
  parameter int unsigned DEPTH = 2 ** CODE_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cal_en,
  input  logic                     in_valid,
  input  code_t                    raw,
  output logic                     out_valid,
  output code_t                    code,
  input  logic                     tbl_we,
  input  logic [$clog2(DEPTH)-1:0] tbl_addr,
  input  cal_entry_t               tbl_wdata
);
  timeunit 1ps; timeprecision 1fs;

  localparam int unsigned AW = $clog2(DEPTH);

  cal_entry_t tbl [DEPTH];
  initial begin
    for (int unsigned i = 0; i < DEPTH; i++)
      tbl[i] = '{bcf_m: code_t'(i), bcf_c: code_t'(i), c_valid: 1'b0, split: '0};
  end

  always_ff @(posedge clk) if (tbl_we) tbl[tbl_addr] <= tbl_wdata;

  // Stage 1: table read.
  cal_entry_t ent_q;
  code_t      raw_q;
  logic       v_q, en_q;
  always_ff @(posedge clk) begin
    ent_q <= tbl[raw[AW-1:0]];
    raw_q <= raw;
    en_q  <= cal_en;
  end

  logic [15:0] lfsr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q       <= 1'b0;
      out_valid <= 1'b0;
      lfsr      <= 16'hACE1;
    end else begin
      v_q       <= in_valid;
      out_valid <= v_q;
      if (v_q) lfsr <= {1'b0, lfsr[15:1]} ^ (lfsr[0] ? 16'hB400 : 16'h0000);
    end
  end

  // Stage 2: choose main or compensation bin.
  always_ff @(posedge clk) begin
    if (!en_q)                                     code <= raw_q;
    else if (ent_q.c_valid && lfsr[7:0] < ent_q.split) code <= ent_q.bcf_c;
    else                                           code <= ent_q.bcf_m;
  end
endmodule
