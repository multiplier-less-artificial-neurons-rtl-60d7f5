// tb_precomputer_bank: checks the alphabets (2k+1)*I of a full eight-entry
// bank, a four-entry {1,3,5,7} bank and the single-alphabet bank of the
// multiplier-less neuron, for random and corner inputs, against '*'.
module tb_precomputer_bank;
  int checks = 0, failures = 0;
  logic [7:0]  i8;
  logic [11:0] i12;
  logic [11:0] a8_4  [4];
  logic [15:0] a12_8 [8];
  logic [11:0] a8_1  [1];

  precomputer_bank #(.IN_W(8),  .NUM_ALPHA(4)) dut4  (.i_in(i8),  .o_alpha(a8_4));
  precomputer_bank #(.IN_W(12), .NUM_ALPHA(8)) dut8  (.i_in(i12), .o_alpha(a12_8));
  precomputer_bank #(.IN_W(8),  .NUM_ALPHA(1)) dut1  (.i_in(i8),  .o_alpha(a8_1));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      i8  = (t == 0) ? 8'hFF : (t == 1) ? 8'h00 : 8'($urandom);
      i12 = (t == 0) ? 12'hFFF : (t == 1) ? 12'h000 : 12'($urandom);
      #1;
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (int'(a8_4[k]) != (2 * k + 1) * int'(i8)) begin
          failures++; $display("FAIL 4-bank k=%0d I=%0d got %0d", k, i8, a8_4[k]);
        end
      end
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (int'(a12_8[k]) != (2 * k + 1) * int'(i12)) begin
          failures++; $display("FAIL 8-bank k=%0d I=%0d got %0d", k, i12, a12_8[k]);
        end
      end
      checks++;
      if (int'(a8_1[0]) != int'(i8)) begin failures++; $display("FAIL 1-bank"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
