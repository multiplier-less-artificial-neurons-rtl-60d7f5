// tb_activation_buffer: writes random data to random addresses of a
// 256-entry buffer while keeping a copy, and checks reads of written
// addresses against the copy, including a read of the address just written.
module tb_activation_buffer;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic we;
  logic [7:0] waddr, raddr, wdata, rdata;
  logic [7:0] model [256];
  bit   valid [256];
  int cycles = 0;

  activation_buffer #(.DEPTH(256), .W(8)) dut (.clk, .i_we(we), .i_waddr(waddr), .i_wdata(wdata),
                                               .i_raddr(raddr), .o_rdata(rdata));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 100000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr = 0;
    foreach (valid[a]) valid[a] = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      we    = ($urandom % 2 == 0);
      waddr = 8'($urandom);
      wdata = 8'($urandom);
      @(posedge clk);
      if (we) begin model[waddr] = wdata; valid[waddr] = 1; end
      #1;
      raddr = (t % 3 == 0) ? waddr : 8'($urandom);
      #1;
      if (valid[raddr]) begin
        checks++;
        if (rdata != model[raddr]) begin failures++; $display("FAIL addr %0d", raddr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
