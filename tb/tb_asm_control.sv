// tb_asm_control: exhaustive check of the quartet decoder for the
// alphabet sets {1}, {1,3} and {1,3,5,7}: every supported value must be
// rebuilt exactly as alphabet << shift, zero must raise o_zero, and every
// unsupported value must raise o_unsup.
module tb_asm_control;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [3:0] q;
  logic [0:0] sel1;  logic [1:0] sh1; logic z1, u1;
  logic [0:0] sel2;  logic [1:0] sh2; logic z2, u2;
  logic [1:0] sel4;  logic [1:0] sh4; logic z4, u4;

  asm_control #(.NUM_ALPHA(1)) d1 (.i_q(q), .o_sel(sel1), .o_shift(sh1), .o_zero(z1), .o_unsup(u1));
  asm_control #(.NUM_ALPHA(2)) d2 (.i_q(q), .o_sel(sel2), .o_shift(sh2), .o_zero(z2), .o_unsup(u2));
  asm_control #(.NUM_ALPHA(4)) d4 (.i_q(q), .o_sel(sel4), .o_shift(sh4), .o_zero(z4), .o_unsup(u4));

  task automatic check(input int na, input int v, input int sel, input int sh, input bit z, input bit u);
    checks++;
    if (v == 0) begin
      if (!z || u) begin failures++; $display("FAIL na=%0d v=0 zero=%0d unsup=%0d", na, z, u); end
    end else if (ref_supported(v, na)) begin
      if (z || u || ((2 * sel + 1) << sh) != v) begin
        failures++; $display("FAIL na=%0d v=%0d sel=%0d sh=%0d", na, v, sel, sh);
      end
    end else begin
      if (!u || z) begin failures++; $display("FAIL na=%0d v=%0d not flagged", na, v); end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      q = 4'(v);
      #1;
      check(1, v, int'(sel1), int'(sh1), z1, u1);
      check(2, v, int'(sel2), int'(sh2), z2, u2);
      check(4, v, int'(sel4), int'(sh4), z4, u4);
    end
    // Paper example: 1010 -> alphabet 5 shifted by 1; 0100 -> alphabet 1 shifted by 2
    q = 4'b1010; #1; checks++;
    if (sel4 != 2'd2 || sh4 != 2'd1) begin failures++; $display("FAIL 1010 decode"); end
    q = 4'b0100; #1; checks++;
    if (sel4 != 2'd0 || sh4 != 2'd2) begin failures++; $display("FAIL 0100 decode"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
