// tb_alphabet_select: random alphabets on a four-entry bus; every select
// value must pass the matching entry. The single-alphabet form must pass
// its only input.
module tb_alphabet_select;
  int checks = 0, failures = 0;
  logic [11:0] a4 [4];
  logic [11:0] a1 [1];
  logic [1:0]  s4;
  logic [0:0]  s1;
  logic [11:0] y4, y1;

  alphabet_select #(.NUM_ALPHA(4), .AL_W(12)) d4 (.i_alpha(a4), .i_sel(s4), .o_alpha(y4));
  alphabet_select #(.NUM_ALPHA(1), .AL_W(12)) d1 (.i_alpha(a1), .i_sel(s1), .o_alpha(y1));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int k = 0; k < 4; k++) a4[k] = 12'($urandom);
      a1[0] = 12'($urandom);
      s4 = 2'($urandom);
      s1 = 1'($urandom);
      #1;
      checks++;
      if (y4 != a4[s4]) begin failures++; $display("FAIL sel=%0d", s4); end
      checks++;
      if (y1 != a1[0]) begin failures++; $display("FAIL single"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
