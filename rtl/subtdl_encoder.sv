// subtdl_encoder: sub-TDL split and encoder for one wave-union edge
// ("Sub-TDL Rising" + "Encoder (R)", or the falling pair).
//
// The sampled taps of the N_CARRY8-cell line are regrouped into sub-TDLs,
// one per CARRY8 output position: with dual sampling (USE_DS = 1) 16 of them,
// ordered S[0], C[0], S[1], C[1] ... S[7], C[7]; without it 8 (C[0]..C[7]).
// Bit k of each sub-TDL comes from CARRY8[k]. Each sub-TDL goes through
// TM2OH and OH2BIN, and the fine code of the edge is the sum of these
// binary codes, as the paper describes: the averaged line is rebuilt by
// summing, and bubbles between neighbouring taps never meet in one code.
//
// Timing: two register stages. Taps at cycle t give code at cycle t+2.
// Range: 0 .. NSUB * N_CARRY8 (960 for the default DS line).
module subtdl_encoder
  import tdc_pkg::*;
#(
  parameter int unsigned N_CARRY8 = 60,
  parameter bit          USE_DS   = 1'b1,
  parameter edge_e       EDGE     = EDGE_RISING
) (
  input  logic                     clk,
  input  logic [N_CARRY8-1:0][7:0] c_taps,
  input  logic [N_CARRY8-1:0][7:0] s_taps,
  output code_t                    code
);
  timeunit 1ps; timeprecision 1fs;

  localparam int unsigned NSUB = USE_DS ? 16 : 8;
  localparam int unsigned BW   = $clog2(N_CARRY8 + 1);

  logic [NSUB-1:0][N_CARRY8-1:0] sub;      // the sub-thermometer codes
  logic [NSUB-1:0][BW-1:0]       sub_bin;  // their binary codes
  logic [NSUB-1:0][BW-1:0]       sub_bin_q;

  always_comb begin
    for (int unsigned q = 0; q < NSUB; q++)
      for (int unsigned k = 0; k < N_CARRY8; k++)
        if (USE_DS) sub[q][k] = q[0] ? c_taps[k][q/2] : s_taps[k][q/2];
        else        sub[q][k] = c_taps[k][q];
  end

  for (genvar q = 0; q < NSUB; q++) begin : g_sub
    logic [N_CARRY8:0] oh;
    tm2oh  #(.N(N_CARRY8), .EDGE(EDGE)) u_tm2oh (.therm(sub[q]), .onehot(oh));
    oh2bin #(.NIN(N_CARRY8 + 1), .W(BW)) u_oh2bin (.onehot(oh), .bin(sub_bin[q]));
  end

  always_ff @(posedge clk) sub_bin_q <= sub_bin;

  always_ff @(posedge clk) begin
    code_t acc;
    acc = '0;
    for (int unsigned q = 0; q < NSUB; q++) acc += code_t'(sub_bin_q[q]);
    code <= acc;
  end
endmodule
