// tb_wu_fine_code: feeds sequences of line samples to the fine-code stage
// (60 cells, dual sampling) and checks that (a) exactly one event is
// reported per pulse, on the first sample in which the pulse's rising edge
// has entered the line, three cycles after that sample; (b) its fine code is
// rise + fall, where rise/fall are the taps each edge has passed; (c) a pulse
// whose rising edge has not yet entered, idle samples and a second sample of
// the same pulse give no event. A second instance without wave union
// (USE_WU = 0) must report the same events with the rising code alone.
module tb_wu_fine_code;
  timeunit 1ps; timeprecision 1fs;
  import tdc_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1000 clk = ~clk;

  logic [59:0][7:0] c_t, s_t;
  logic  valid;
  code_t fine, rc, fc;

  wu_fine_code #(.N_CARRY8(60), .USE_DS(1'b1)) dut (
    .clk, .rst_n, .c_taps(c_t), .s_taps(s_t), .valid, .fine, .rise_code(rc), .fall_code(fc));

  // Non-WU variant on the same taps: fine code is the rising code alone.
  logic  valid_nw;
  code_t fine_nw, rc_nw, fc_nw;
  wu_fine_code #(.N_CARRY8(60), .USE_DS(1'b1), .USE_WU(1'b0)) dut_nw (
    .clk, .rst_n, .c_taps(c_t), .s_taps(s_t), .valid(valid_nw), .fine(fine_nw),
    .rise_code(rc_nw), .fall_code(fc_nw));

  task automatic put(int r, int f);   // taps [r,f) low, line order
    for (int p = 0; p < 960; p++)
      if (p % 2 == 0) s_t[p/16][(p%16)/2] = !(p >= r && p < f);
      else            c_t[p/16][(p%16)/2] = !(p >= r && p < f);
  endtask

  // expected event per applied sample (-1: none); sample s is applied
  // before clock edge s+1 and its event is due after edge s+3.
  int exp_r[$], exp_f[$];
  int pc = 0, n_events = 0, n_expected = 0;

  always @(posedge clk) if (exp_r.size() > 0) begin
    pc++;
    #100;
    if (pc >= 3 && pc - 3 < exp_r.size()) begin
      int er, ef;
      er = exp_r[pc-3]; ef = exp_f[pc-3];
      checks++;
      if (valid !== (er >= 0)) begin failures++; $display("FAIL valid=%b exp %0d at sample %0d", valid, er, pc - 3); end
      if (valid) begin
        n_events++;
        checks += 2;
        if (fine != code_t'(er + ef)) begin failures++; $display("FAIL fine %0d exp %0d", fine, er + ef); end
        if (rc != code_t'(er) || fc != code_t'(ef)) begin failures++; $display("FAIL parts %0d %0d", rc, fc); end
      end
      checks++;
      if (valid_nw !== valid || (valid && (fine_nw != code_t'(er) || fc_nw != '0))) begin
        failures++; $display("FAIL non-WU variant valid=%b fine=%0d exp %0d", valid_nw, fine_nw, er);
      end
    end
  end

  task automatic sample(int r, int f, bit ev);
    put(r, f);
    exp_r.push_back(ev ? r : -1); exp_f.push_back(f);
    n_expected += ev;
    @(negedge clk);
  endtask

  initial begin
    put(0, 0);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 200; n++) begin
      int r, f, mode;
      mode = n % 4;
      repeat (1 + $urandom % 3) sample(0, 0, 0);           // idle
      r = 1 + $urandom % 700; f = r + 40 + $urandom % 100;
      if (mode == 1) begin                                 // leading edge only first
        sample(0, 30 + $urandom % 200, 0);
        sample(r, f, 1);
      end else if (mode == 2) begin                        // same pulse seen twice
        sample(r, f, 1);
        sample(r + 100 < 960 ? r + 100 : 959, 960, 0);
      end else begin
        sample(r, f, 1);
      end
    end
    repeat (6) sample(0, 0, 0);
    checks++;
    if (n_events != n_expected) begin failures++; $display("FAIL events %0d exp %0d", n_events, n_expected); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
