// tb_quartet_shifter: random alphabets and shifts 0..3, including the
// largest alphabet value, against multiplication by 2^shift; the zero
// input must force a zero partial product.
module tb_quartet_shifter;
  int checks = 0, failures = 0;
  logic [11:0] a;
  logic [1:0]  sh;
  logic        z;
  logic [14:0] pp;

  quartet_shifter #(.AL_W(12)) dut (.i_alpha(a), .i_shift(sh), .i_zero(z), .o_pp(pp));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      a  = (t < 4) ? 12'hFFF : 12'($urandom);
      sh = (t < 4) ? 2'(t) : 2'($urandom);
      z  = (t >= 4) && ($urandom % 5 == 0);
      #1;
      checks++;
      if (int'(pp) != (z ? 0 : int'(a) * (1 << sh))) begin
        failures++; $display("FAIL a=%0d sh=%0d z=%0d pp=%0d", a, sh, z, pp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
