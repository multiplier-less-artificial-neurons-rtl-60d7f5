// tb_asm_adder: random quartet partial products for the 8-bit (two
// quartets) and 12-bit (three quartets) multipliers; the output must be
// the sum of pp[q] * 16^q, negated when the weight is negative.
module tb_asm_adder;
  int checks = 0, failures = 0;
  logic [14:0] pp8  [2];
  logic [18:0] pp12 [3];
  logic        n8, n12;
  logic signed [15:0] p8;
  logic signed [23:0] p12;

  asm_adder #(.IN_W(8),  .WT_W(8))  d8  (.i_pp(pp8),  .i_neg(n8),  .o_prod(p8));
  asm_adder #(.IN_W(12), .WT_W(12)) d12 (.i_pp(pp12), .i_neg(n12), .o_prod(p12));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    for (int t = 0; t < 300; t++) begin
      // keep within the range a real weight magnitude x input can reach
      pp8[0]  = 15'($urandom % (15 * 256));
      pp8[1]  = 15'($urandom % (7 * 256));
      pp12[0] = 19'($urandom % (15 * 4096));
      pp12[1] = 19'($urandom % (15 * 4096));
      pp12[2] = 19'($urandom % (7 * 4096));
      n8  = 1'($urandom);
      n12 = 1'($urandom);
      #1;
      e = int'(pp8[0]) + 16 * int'(pp8[1]);
      if (n8) e = -e;
      checks++;
      if (int'(p8) != e) begin failures++; $display("FAIL 8-bit got %0d exp %0d", p8, e); end
      e = int'(pp12[0]) + 16 * int'(pp12[1]) + 256 * int'(pp12[2]);
      if (n12) e = -e;
      checks++;
      if (int'(p12) != e) begin failures++; $display("FAIL 12-bit got %0d exp %0d", p12, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
