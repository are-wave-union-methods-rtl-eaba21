// tb_tdc_top: end-to-end test of the full-size binned DSWU TDC channel
// (top-level parameters left at their defaults: 60 CARRY8 cells, dual
// sampling, wave union). The sampling clock runs at 500 MHz.
//
// Phase A, code-density test on raw codes: N_HITS hits arrive at random
// phases (uncorrelated with the clock). Each must give exactly one event,
// stamped with the clock edge that sampled it, with a raw code that grows
// with the time between hit and sampling edge (checked bucket by bucket) and
// is near the value an even line would give.
// The histogram is read back, and a calibration table is computed from it
// with the bin-compensation rule on merged ideal bins (binning, two ideal
// bins per output bin) and written into the design.
// Phase B, calibrated: the same kind of run with cal_en set; every
// calibrated code must be the BCF_m or BCF_c of its raw code, and the
// spread of the DNL over the merged bins must be smaller than that of the
// raw DNL. Mechanisms counted (each must occur): events, pulses seen in two
// samples, raw mode, calibrated mode, compensation-bin picks, table writes,
// histogram clears and coarse-counter wraps.
module tb_tdc_top;
  timeunit 1ps; timeprecision 1fs;
  import tdc_pkg::*;

  localparam int  N_HITS    = 40000;
  localparam int  BIN_MERGE = 2;
  localparam real TCLK      = 2000.0;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, hit = 1'b0;
  always #(TCLK / 2) clk = ~clk;

  logic        cal_en = 1'b0, tbl_we = 1'b0, hist_clr = 1'b0;
  code_t       tbl_addr = '0, hist_rd_addr = '0;
  cal_entry_t  tbl_wdata = '0;
  logic        hist_busy, hist_sat, ev_valid, coarse_wrap;
  logic [31:0] hist_rd_data;
  logic [15:0] ev_coarse;
  code_t       ev_raw, ev_code;

  tdc_top dut (.clk, .rst_n, .hit, .cal_en, .tbl_we, .tbl_addr, .tbl_wdata,
    .hist_clr, .hist_busy, .hist_sat, .hist_rd_addr, .hist_rd_data,
    .ev_valid, .ev_coarse, .ev_raw, .ev_code, .coarse_wrap);

  // ---- clock-edge bookkeeping (same origin as the coarse counter) ----
  int edges = 0;
  always @(posedge clk) if (rst_n) edges++;
  // time of the posedge after which 'edges' equals n (edges counted from t0)
  realtime t0;

  // ---- expected events ----
  typedef struct { int edge_n; real delta; } hit_t;
  hit_t pend[$];
  cal_entry_t tbl_ref [2048];

  int n_events = 0, n_two_samples = 0, n_raw_ev = 0, n_cal_ev = 0, n_cpick = 0;
  int n_tbl_wr = 0, n_clr = 0, n_wraps = 0;
  int bmin [100], bmax [100];   // raw code range per 20 ps bucket of delta

  always @(posedge clk) if (coarse_wrap) n_wraps++;

  always @(posedge clk) begin
    #100;
    if (ev_valid) begin
      hit_t h;
      real ideal;
      n_events++;
      checks++;
      if (pend.size() == 0) begin failures++; $display("FAIL event without hit"); end
      else begin
        h = pend.pop_front();
        checks += 2;
        if (ev_coarse != 16'(h.edge_n)) begin
          failures++; $display("FAIL coarse %0d exp %0d", ev_coarse, 16'(h.edge_n));
        end
        ideal = (h.delta - 140.0) / 5.0 * 2.0 + (h.delta - 20.0) / (5.0 * 1.03) * 2.0;
        if (real'(ev_raw) < ideal - 80.0 || real'(ev_raw) > ideal + 80.0) begin
          failures++; $display("FAIL raw %0d far from %f (delta %f)", ev_raw, ideal, h.delta);
        end
        begin
          int b;
          b = int'((h.delta - 140.0) / 20.0);
          if (b >= 0 && b < 100) begin
            if (int'(ev_raw) < bmin[b]) bmin[b] = int'(ev_raw);
            if (int'(ev_raw) > bmax[b]) bmax[b] = int'(ev_raw);
          end
        end
        checks++;
        if (!cal_en) begin
          n_raw_ev++;
          if (ev_code != ev_raw) begin failures++; $display("FAIL raw mode code %0d != %0d", ev_code, ev_raw); end
        end else begin
          cal_entry_t e;
          n_cal_ev++;
          e = tbl_ref[ev_raw];
          if (ev_code == e.bcf_m) ;
          else if (e.c_valid && ev_code == e.bcf_c) n_cpick++;
          else begin failures++; $display("FAIL cal code %0d for raw %0d", ev_code, ev_raw); end
        end
      end
    end
  end

  // ---- hit generator ----
  task automatic run_hits(int n);
    int target;
    target = edges + 3;
    for (int i = 0; i < n; i++) begin
      real delta, t_hit;
      delta = 150.0 + real'($urandom % 1990000) / 1000.0;   // ps before the edge
      t_hit = t0 + TCLK * real'(target) - delta;
      #(t_hit - $realtime);
      hit = 1'b1;
      pend.push_back('{target, delta});
      if (delta < 250.0) n_two_samples++;
      #600 hit = 1'b0;
      target += 3 + $urandom % 3;
    end
    #(t0 + TCLK * real'(target + 8) - $realtime);
  endtask

  task automatic clear_hist();
    @(negedge clk) hist_clr = 1'b1;
    @(negedge clk) hist_clr = 1'b0;
    while (hist_busy) @(negedge clk);
    n_clr++;
  endtask

  int h_raw [2048];
  task automatic read_hist(output int total);
    total = 0;
    for (int a = 0; a < 2048; a++) begin
      @(negedge clk) hist_rd_addr = code_t'(a);
      @(negedge clk);
      h_raw[a] = int'(hist_rd_data);
      total += h_raw[a];
    end
  endtask

  // DNL spread over the occupied codes, end bins excluded.
  task automatic dnl_stats(input real w_ideal, output real sd, output real pkpk);
    int lo, hi, n;
    real s, s2, mn, mx, d;
    lo = -1; hi = -1;
    for (int a = 0; a < 2048; a++) if (h_raw[a] > 0) begin if (lo < 0) lo = a; hi = a; end
    s = 0; s2 = 0; n = 0; mn = 1e9; mx = -1e9;
    for (int a = lo + 2; a <= hi - 2; a++) begin
      d = real'(h_raw[a]) / w_ideal - 1.0;
      s += d; s2 += d * d; n++;
      if (d < mn) mn = d;
      if (d > mx) mx = d;
    end
    sd = $sqrt(s2 / n - (s / n) * (s / n));
    pkpk = mx - mn;
  endtask

  // Bin compensation on a merged ideal grid: for raw bin k spanning
  // [left, right) of the cumulative histogram, j is the merged bin holding
  // its right edge. If the bin starts in j too, everything goes to j;
  // otherwise BCF_m = j-1 and BCF_c = j receives the part beyond j's start.
  task automatic build_table(int total);
    int nb;
    real wi, wm, left, right;
    nb = 0;
    foreach (h_raw[a]) if (h_raw[a] > 0) nb++;
    wi = real'(total) / real'(nb);
    wm = wi * BIN_MERGE;
    left = 0.0;
    for (int k = 0; k < 2048; k++) begin
      cal_entry_t e;
      int j, jl;
      right = left + real'(h_raw[k]);
      jl = int'($floor(left / wm));
      j  = (h_raw[k] == 0) ? jl : int'($ceil(right / wm)) - 1;
      if (j < jl) j = jl;
      e.bcf_m = code_t'(j); e.bcf_c = code_t'(j); e.c_valid = 1'b0; e.split = '0;
      if (jl < j) begin
        real share;
        share = (right - real'(j) * wm) / real'(h_raw[k]);
        e.bcf_m = code_t'(j - 1);
        e.c_valid = 1'b1;
        e.split = (share >= 255.0 / 256.0) ? 8'd255 : 8'(int'(share * 256.0));
      end
      tbl_ref[k] = e;
      @(negedge clk) tbl_we = 1'b1; tbl_addr = code_t'(k); tbl_wdata = e;
      n_tbl_wr++;
      left = right;
    end
    @(negedge clk) tbl_we = 1'b0;
  endtask

  initial begin
    int total;
    real sd_raw, pk_raw, sd_cal, pk_cal;
    foreach (bmin[b]) begin bmin[b] = 1 << 30; bmax[b] = -1; end
    foreach (tbl_ref[k]) tbl_ref[k] = '{bcf_m: code_t'(k), bcf_c: code_t'(k), c_valid: 1'b0, split: '0};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    t0 = $realtime + TCLK / 2 - TCLK;   // edge n (edges == n) is at t0 + n * TCLK
    clear_hist();

    // Phase A: raw code density
    run_hits(N_HITS);
    read_hist(total);
    checks++;
    if (total != N_HITS) begin failures++; $display("FAIL raw histogram total %0d", total); end
    dnl_stats(real'(total) / real'(count_used()), sd_raw, pk_raw);
    $display("raw: %0d codes used, sigma_DNL %f, DNL pk-pk %f", count_used(), sd_raw, pk_raw);
    for (int b = 0; b + 1 < 100; b++) if (bmax[b] >= 0 && bmax[b + 1] >= 0) begin
      checks++;
      if (bmax[b] > bmin[b + 1]) begin failures++; $display("FAIL monotonic bucket %0d", b); end
    end

    // Calibration table from the code-density histogram
    build_table(total);
    clear_hist();

    // Phase B: calibrated and binned
    cal_en = 1'b1;
    run_hits(N_HITS);
    read_hist(total);
    checks++;
    if (total != N_HITS) begin failures++; $display("FAIL calibrated histogram total %0d", total); end
    dnl_stats(real'(total) / real'(count_used()), sd_cal, pk_cal);
    $display("binned: %0d codes used, sigma_DNL %f, DNL pk-pk %f", count_used(), sd_cal, pk_cal);
    checks++;
    if (!(sd_cal < sd_raw)) begin failures++; $display("FAIL calibration did not reduce sigma_DNL"); end

    checks += 3;
    if (n_events != 2 * N_HITS) begin failures++; $display("FAIL events %0d", n_events); end
    if (pend.size() != 0) begin failures++; $display("FAIL %0d hits without event", pend.size()); end
    if (hist_sat) begin failures++; $display("FAIL histogram saturated"); end
    $display("mechanisms: events %0d, two-sample pulses %0d, raw %0d, calibrated %0d, BCF_c picks %0d, table writes %0d, clears %0d, coarse wraps %0d",
             n_events, n_two_samples, n_raw_ev, n_cal_ev, n_cpick, n_tbl_wr, n_clr, n_wraps);
    checks += 8;
    if (n_events == 0)      failures++;
    if (n_two_samples == 0) failures++;
    if (n_raw_ev == 0)      failures++;
    if (n_cal_ev == 0)      failures++;
    if (n_cpick == 0)       failures++;
    if (n_tbl_wr == 0)      failures++;
    if (n_clr == 0)         failures++;
    if (n_wraps == 0)       failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int count_used();
    int n;
    n = 0;
    foreach (h_raw[a]) if (h_raw[a] > 0) n++;
    return n;
  endfunction

  initial begin
    #(TCLK * 1.0e6);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
