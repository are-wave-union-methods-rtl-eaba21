// tdl_carry8 -- BEHAVIOURAL MODEL of the CARRY8 tapped delay line and its
// sampling flip-flops (a vendor carry chain cannot be written as portable RTL).
//
// The line is N_CARRY8 cascaded CARRY8 cells, 8 carry elements each. Every
// element j of cell k has a carry output C[j] and, ahead of the carry mux, a
// sum output S[j]; both are registered on the rising edge of the sampling
// clock, giving 16 taps per cell (dual sampling). The model keeps the time
// and value of the last HIST edges on sig_in and, at each clock edge, gives
// every tap the value of the newest edge that has already reached it. Each
// element's delay is C_PS scaled by a fixed pseudo-random factor in
// [1-SPREAD, 1+SPREAD] (seeded by SEED) so the bins are uneven, as in a real
// chain, and a falling edge travels FALL_SCALE times slower than a rising
// edge, which is the speed difference the paper reports between the two
// wave-union edges. The S tap of element j sits S_FRAC of the way through
// that element. The cell count (60) is the paper's; all delays are this
// model's own choices, set so the 2 x 960 tap line spans about 2.4 ns.
//
// Interface: clk, sig_in (the wave-union signal), c_q / s_q [cell][element]
// registered taps. Timing: taps are valid one clock after the edge they
// sample. With SEED = 0 all elements are equal (used by unit tests).
module tdl_carry8 #(
  parameter int unsigned N_CARRY8   = 60,
  parameter real         C_PS       = 5.0,
  parameter real         S_FRAC     = 0.5,
  parameter real         SPREAD     = 0.6,
  parameter real         FALL_SCALE = 1.03,
  parameter int unsigned SEED       = 1,
  parameter logic        IDLE       = 1'b1
) (
  input  logic                         clk,
  input  logic                         sig_in,
  output logic [N_CARRY8-1:0][7:0]     c_q,
  output logic [N_CARRY8-1:0][7:0]     s_q
);
  timeunit 1ps; timeprecision 1fs;

  localparam int unsigned NE   = 8 * N_CARRY8;
  localparam int unsigned HIST = 4;

  real  c_arr_r [NE];   // arrival time of a rising edge at C[e]
  real  s_arr_r [NE];   // arrival time of a rising edge at S[e]
  real  t_hist  [HIST]; // input edge times, index 0 newest
  logic v_hist  [HIST]; // value after each edge
  int   n_hist;
  logic base_val;       // input value before the oldest stored edge

  function automatic real elem_scale(int unsigned e);
    int unsigned x;
    if (SEED == 0) return 1.0;
    x = (e + 1) * 32'd1103515245 + SEED * 32'd12345;
    x = x ^ (x >> 13);
    x = x * 32'd2654435761;
    x = x ^ (x >> 16);
    return 1.0 + SPREAD * (2.0 * real'(x & 32'hFFFF) / 65536.0 - 1.0);
  endfunction

  initial begin
    real acc, d;
    acc = 0.0;
    for (int unsigned e = 0; e < NE; e++) begin
      d = C_PS * elem_scale(e);
      s_arr_r[e] = acc + S_FRAC * d;
      acc += d;
      c_arr_r[e] = acc;
    end
    n_hist   = 0;
    base_val = IDLE;
    for (int h = 0; h < HIST; h++) begin
      t_hist[h] = 0.0;
      v_hist[h] = IDLE;
    end
  end

  always @(sig_in) begin
    if (n_hist == HIST) base_val = v_hist[HIST-1];
    for (int h = HIST - 1; h > 0; h--) begin
      t_hist[h] = t_hist[h-1];
      v_hist[h] = v_hist[h-1];
    end
    t_hist[0] = $realtime;
    v_hist[0] = sig_in;
    if (n_hist < HIST) n_hist++;
  end

  // Value seen at a tap whose rising-edge arrival offset is dr.
  function automatic logic tap_at(real now, real dr);
    for (int h = 0; h < HIST; h++) begin
      if (h < n_hist) begin
        if (t_hist[h] + (v_hist[h] ? dr : dr * FALL_SCALE) <= now) return v_hist[h];
      end
    end
    return base_val;
  endfunction

  always @(posedge clk) begin
    real now;
    now = $realtime;
    for (int unsigned e = 0; e < NE; e++) begin
      c_q[e/8][e%8] <= tap_at(now, c_arr_r[e]);
      s_q[e/8][e%8] <= tap_at(now, s_arr_r[e]);
    end
  end
endmodule
