// histogram: code-density histogram in block RAM.
//
// One COUNT_W-bit counter per code, held in a dual-port memory. An incoming
// code is read on the first cycle and written back plus one on the second;
// when two events for the same code arrive back to back, the second takes
// the value just written (one-deep forwarding), so one code per cycle can be
// accepted. Counters saturate at all-ones and raise the sticky sat flag.
// hist_clr starts a sweep that zeroes every counter (busy high, DEPTH
// cycles); events during the sweep are dropped. The host reads a counter at
// rd_addr on the second port with one cycle of latency. The paper says the
// histogram is built in block RAM and sent to the PC; the pipeline,
// clearing and saturation are this design's choices.
module histogram #(
  parameter int unsigned ADDR_W  = 11,
  parameter int unsigned COUNT_W = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [ADDR_W-1:0]  in_bin,
  input  logic               hist_clr,
  output logic               busy,
  output logic               sat,
  input  logic [ADDR_W-1:0]  rd_addr,
  output logic [COUNT_W-1:0] rd_data
);
  timeunit 1ps; timeprecision 1fs;

  localparam int unsigned DEPTH = 2 ** ADDR_W;

  logic [COUNT_W-1:0] mem [DEPTH];

  logic [ADDR_W-1:0]  clr_addr;
  logic               v1, v2;
  logic [ADDR_W-1:0]  a1, a2;
  logic [COUNT_W-1:0] q1, w2;

  // Port A read (stage 1).
  always_ff @(posedge clk) begin
    q1 <= mem[in_bin];
    a1 <= in_bin;
  end

  logic [COUNT_W-1:0] base, next;
  always_comb begin
    base = (v2 && a2 == a1) ? w2 : q1;
    next = (&base) ? base : base + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; busy <= 1'b0; clr_addr <= '0; sat <= 1'b0;
      a2 <= '0; w2 <= '0;
    end else begin
      v1 <= in_valid & ~busy & ~hist_clr;
      v2 <= v1;
      a2 <= a1;
      w2 <= next;
      if (hist_clr) begin
        busy <= 1'b1; clr_addr <= '0; sat <= 1'b0; v1 <= 1'b0; v2 <= 1'b0;
      end else if (busy) begin
        clr_addr <= clr_addr + 1'b1;
        if (&clr_addr) busy <= 1'b0;
      end else if (v1 && &base) begin
        sat <= 1'b1;
      end
    end
  end

  // Port A write (stage 2, issued at the end of stage 1) or clear sweep.
  always_ff @(posedge clk) begin
    if (busy)    mem[clr_addr] <= '0;
    else if (v1) mem[a1] <= next;
  end

  // Port B: host read.
  always_ff @(posedge clk) rd_data <= mem[rd_addr];
endmodule
