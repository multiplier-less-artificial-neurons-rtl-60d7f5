// tb_cshm_unit: one shared bank and four ASMs. For a multiplier-less
// unit and for the default four-alphabet unit, random inputs and four
// random supported weights must give four exact products.
module tb_cshm_unit;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [7:0] i;
  logic signed [7:0]  w1 [4], w4 [4];
  logic signed [15:0] p1 [4], p4 [4];
  logic [3:0] u1, u4;

  cshm_unit #(.NUM_ALPHA(1))  d1 (.i_in(i), .i_w(w1), .o_prod(p1), .o_unsup(u1));
  cshm_unit                   d4 (.i_in(i), .i_w(w4), .o_prod(p4), .o_unsup(u4));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      i = 8'($urandom);
      for (int l = 0; l < 4; l++) begin
        w1[l] = 8'(rand_supported_weight(8, 1, 2));
        w4[l] = 8'(rand_supported_weight(8, 4, 2));
      end
      #1;
      for (int l = 0; l < 4; l++) begin
        checks++;
        if (int'(p1[l]) != int'(w1[l]) * int'(i)) begin
          failures++; $display("FAIL MAN lane %0d: %0d*%0d got %0d", l, w1[l], i, p1[l]);
        end
        checks++;
        if (int'(p4[l]) != int'(w4[l]) * int'(i)) begin
          failures++; $display("FAIL ASM4 lane %0d: %0d*%0d got %0d", l, w4[l], i, p4[l]);
        end
      end
      checks++;
      if (u1 != 0 || u4 != 0) begin failures++; $display("FAIL unsup"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
