// tb_asm_multiplier: three multipliers, 8-bit with {1,3,5,7}, 8-bit
// multiplier-less ({1}) and 12-bit with {1,3}, fed by alphabets computed
// here with '*'. Random weights whose quartets the set supports must give
// the exact product W*I; the worked example 01001010 x M = 74M is checked,
// and weights with an unsupported quartet must raise o_unsup.
module tb_asm_multiplier;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [7:0]  i8;
  logic [11:0] i12;
  logic [11:0] al4 [4];
  logic [11:0] al1 [1];
  logic [15:0] al2 [2];
  logic signed [7:0]  w4, w1;
  logic signed [11:0] w2;
  logic signed [15:0] p4, p1;
  logic signed [23:0] p2;
  logic u4, u1, u2;

  asm_multiplier #(.IN_W(8),  .WT_W(8),  .NUM_ALPHA(4)) d4 (.i_alpha(al4), .i_w(w4), .o_prod(p4), .o_unsup(u4));
  asm_multiplier #(.IN_W(8),  .WT_W(8),  .NUM_ALPHA(1)) d1 (.i_alpha(al1), .i_w(w1), .o_prod(p1), .o_unsup(u1));
  asm_multiplier #(.IN_W(12), .WT_W(12), .NUM_ALPHA(2)) d2 (.i_alpha(al2), .i_w(w2), .o_prod(p2), .o_unsup(u2));

  always_comb begin
    for (int k = 0; k < 4; k++) al4[k] = 12'((2 * k + 1) * int'(i8));
    al1[0] = 12'(i8);
    for (int k = 0; k < 2; k++) al2[k] = 16'((2 * k + 1) * int'(i12));
  end

  task automatic chk(input string tag, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", tag, got, exp); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // worked example of the 8-bit 4-alphabet ASM
    i8 = 8'd37; w4 = 8'sb01001010; #1;
    chk("example 74*37", int'(p4), 74 * 37);
    for (int t = 0; t < 500; t++) begin
      i8  = 8'($urandom);
      i12 = 12'($urandom);
      w4  = 8'(rand_supported_weight(8, 4, 2));
      w1  = 8'(rand_supported_weight(8, 1, 2));
      w2  = 12'(rand_supported_weight(12, 2, 2));
      #1;
      chk("na4", int'(p4), int'(w4) * int'(i8));
      chk("na1", int'(p1), int'(w1) * int'(i8));
      chk("na2", int'(p2), int'(w2) * int'(i12));
      checks++;
      if (u4 || u1 || u2) begin failures++; $display("FAIL unsup on supported weight"); end
    end
    // most negative weight is taken as -(2^(WT_W-1)-1); 0x7F has quartet 15
    i8 = 8'd3; w4 = 8'sh80; #1;
    checks++;
    if (!u4) begin failures++; $display("FAIL -128 not flagged"); end
    // unsupported quartets must be flagged: 9 for {1,3,5,7}, 3 for {1}, 5 for {1,3}
    w4 = 8'sh09; w1 = 8'sh03; w2 = 12'sh050; #1;
    checks++;
    if (!u4 || !u1 || !u2) begin failures++; $display("FAIL unsupported not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
