// tb_neuron_accumulator: random sequences of bias loads, products and idle
// cycles against a running sum kept here; the sum must appear one cycle
// after each operation.
module tb_neuron_accumulator;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic load, en;
  logic signed [31:0] bias, acc;
  logic signed [15:0] prod;
  longint model;
  int cycles = 0;

  neuron_accumulator dut (.clk, .rst, .i_load(load), .i_bias(bias), .i_en(en), .i_prod(prod), .o_acc(acc));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 100000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; en = 0; bias = 0; prod = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    model = 0;
    @(negedge clk);
    checks++;
    if (acc != 0) begin failures++; $display("FAIL reset value"); end
    for (int t = 0; t < 2000; t++) begin
      load = ($urandom % 50 == 0);
      en   = ($urandom % 4 != 0);
      bias = 32'($signed(16'($urandom)));
      prod = 16'($urandom);
      @(negedge clk);
      if (load)    model = bias;
      else if (en) model = model + prod;
      checks++;
      if (longint'(acc) != model) begin failures++; $display("FAIL t=%0d acc=%0d exp=%0d", t, acc, model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
