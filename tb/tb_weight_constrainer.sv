// tb_weight_constrainer: all 256 8-bit weights for the sets {1}, {1,3}
// and {1,3,5,7}, and random 12-bit weights for {1,3}, against a separately
// written nearest-value rounding. Each output must have only supported
// quartets, supported weights must pass unchanged, and the rounding
// examples of the {1,3} set (9 -> 8, 10 -> 12, 11 -> 12) are checked.
module tb_weight_constrainer;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic signed [7:0]  w8, o1, o2, o4;
  logic signed [11:0] w12, o12;
  logic c1, c2, c4, c12;

  weight_constrainer #(.WT_W(8),  .NUM_ALPHA(1)) d1  (.i_w(w8),  .o_w(o1),  .o_changed(c1));
  weight_constrainer #(.WT_W(8),  .NUM_ALPHA(2)) d2  (.i_w(w8),  .o_w(o2),  .o_changed(c2));
  weight_constrainer #(.WT_W(8),  .NUM_ALPHA(4)) d4  (.i_w(w8),  .o_w(o4),  .o_changed(c4));
  weight_constrainer #(.WT_W(12), .NUM_ALPHA(2)) d12 (.i_w(w12), .o_w(o12), .o_changed(c12));

  function automatic bit all_supported(input int w, input int wt_w, input int na);
    int m, nq;
    m  = (w < 0) ? -w : w;
    nq = (wt_w - 1 + 3) / 4;
    for (int q = 0; q < nq; q++)
      if (!ref_supported((m >> (4 * q)) & 15, na)) return 0;
    return 1;
  endfunction

  task automatic chk(input int na, input int wt_w, input int w, input int o, input bit c);
    int e;
    e = ref_constrain(w, wt_w, na);
    checks++;
    if (o != e || c != (o != w) || !all_supported(o, wt_w, na)) begin
      failures++; $display("FAIL na=%0d w=%0d got %0d exp %0d changed=%0d", na, w, o, e, c);
    end
    if (all_supported(w, wt_w, na) && w != -(1 << (wt_w - 1))) begin
      checks++;
      if (o != w) begin failures++; $display("FAIL supported weight %0d changed", w); end
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -128; v < 128; v++) begin
      w8 = 8'(v);
      #1;
      chk(1, 8, v, int'(o1), c1);
      chk(2, 8, v, int'(o2), c2);
      chk(4, 8, v, int'(o4), c4);
    end
    for (int t = 0; t < 2000; t++) begin
      w12 = 12'($urandom);
      #1;
      chk(2, 12, int'(w12), int'(o12), c12);
    end
    // {1,3}: supported 8 and 12, threshold 10
    w12 = 12'h090; #1; checks++; if (o12 != 12'h080) begin failures++; $display("FAIL 9->8"); end
    w12 = 12'h0A0; #1; checks++; if (o12 != 12'h0C0) begin failures++; $display("FAIL 10->12"); end
    w12 = 12'h0B0; #1; checks++; if (o12 != 12'h0C0) begin failures++; $display("FAIL 11->12"); end
    // R = 15 rounds up to 16: carries into Q
    w12 = 12'h01F; #1; checks++; if (o12 != 12'h020) begin failures++; $display("FAIL carry"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
