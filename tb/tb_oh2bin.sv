// tb_oh2bin: self-checking test of the one-hot to binary encoder: every
// single-hot input of a 61-bit vector, the all-zero input, and two hot bits
// (result must be the OR of the two indices).
module tb_oh2bin;
  timeunit 1ps; timeprecision 1fs;
  int checks = 0, failures = 0;
  logic [60:0] oh;
  logic [5:0]  b;
  oh2bin #(.NIN(61)) dut (.onehot(oh), .bin(b));
  initial begin
    for (int i = 0; i < 61; i++) begin
      oh = '0; oh[i] = 1'b1; #1;
      checks++;
      if (b !== 6'(i)) begin failures++; $display("FAIL i=%0d got %0d", i, b); end
    end
    oh = '0; #1; checks++;
    if (b !== 0) begin failures++; $display("FAIL zero got %0d", b); end
    oh = '0; oh[5] = 1'b1; oh[10] = 1'b1; #1; checks++;
    if (b !== 6'(5 | 10)) begin failures++; $display("FAIL double got %0d", b); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
