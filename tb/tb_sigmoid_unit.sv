// tb_sigmoid_unit: sweeps the weighted sum over -8..8 (12 fractional
// bits) and checks the 8-bit activation against the true logistic function
// (within the 0.02 error of the PLAN curve plus one output step), against
// the PLAN segments evaluated in real arithmetic (within one step), and for
// monotonicity and saturation at both ends. PLAN steps down by 1/256 where
// its second and third segments meet (x = 2.375), so a one-step drop is
// allowed there.
module tb_sigmoid_unit;
  int checks = 0, failures = 0;
  logic signed [31:0] x;
  logic [7:0] y;
  int prev;

  sigmoid_unit #(.ACC_W(32), .FRAC(12), .OUT_W(8)) dut (.i_x(x), .o_y(y));

  function automatic real plan(input real v);
    real a, r;
    a = (v < 0) ? -v : v;
    if (a >= 5.0)        r = 1.0;
    else if (a >= 2.375) r = a / 32.0 + 0.84375;
    else if (a >= 1.0)   r = a / 8.0 + 0.625;
    else                 r = a / 4.0 + 0.5;
    return (v < 0) ? 1.0 - r : r;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real xv, ys, yp, yo;
    prev = -1;
    for (int v = -8 * 4096; v <= 8 * 4096; v += 7) begin
      x = 32'(v);
      #1;
      xv = real'(v) / 4096.0;
      ys = 1.0 / (1.0 + $exp(-xv));
      yp = plan(xv);
      yo = real'(y) / 256.0;
      checks++;
      if (yo - ys > 0.024 || ys - yo > 0.024) begin
        failures++; $display("FAIL x=%f y=%f sigmoid=%f", xv, yo, ys);
      end
      checks++;
      if (yo - yp > 1.0 / 256.0 + 1e-9 || yp - yo > 1.0 / 256.0 + 1e-9) begin
        failures++; $display("FAIL x=%f y=%f plan=%f", xv, yo, yp);
      end
      checks++;
      if (int'(y) < prev - 1) begin failures++; $display("FAIL not monotonic at x=%f", xv); end
      prev = int'(y);
    end
    x = 32'sh7fff_0000; #1; checks++;
    if (y != 8'hFF) begin failures++; $display("FAIL high saturation"); end
    x = -32'sh7fff_0000; #1; checks++;
    if (y != 8'h00) begin failures++; $display("FAIL low saturation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
