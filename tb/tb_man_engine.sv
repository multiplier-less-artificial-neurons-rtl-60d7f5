// tb_man_engine: end-to-end test of the processing engine at its default
// parameters (8-bit multiplier-less neurons, four lanes, 4096-entry
// buffers).
//
// Each run builds a random fully connected network, streams its weights
// and biases in the engine's order, and compares every output of the last
// layer with a reference forward pass computed here: weights rounded by a
// separately written reference of the constraint rule, exact integer
// products and sums, and the PLAN activation. Runs:
//   1. a 3-layer 13-7-5-3 network with random stalls on the weight stream
//      and one weight in eight drawn outside the alphabet set;
//   2. the same shape with no stalls, where the cycle count must equal
//      sum over groups of (1 + inputs + lanes written);
//   3. the 1024-100-10 shape of the 8-bit MNIST perceptron and the
//      1024-100-2 shape of the face detector, with stalls;
//   4. a 6-layer 1024-700-280-220-220-130-10 network with no stalls and a
//      cycle check. The house-number perceptron is given only as 6 layers,
//      1560 neurons and 1054260 synapses; this is one shape with exactly
//      those totals, the hidden sizes being this test's own choice.
// Mechanisms counted, each of which must occur: weight-stream stalls,
// weights rounded by the constrainer, groups of fewer than four neurons,
// layer-to-layer buffer swaps, activations saturated at 0 or 1, and
// activations strictly between.
module tb_man_engine;
  import tb_ref_pkg::*;

  localparam int IN_W = 8, WT_W = 8, NA = 1, FRAC = IN_W + WT_W - 4, LANES = 4;

  int checks = 0, failures = 0;
  int cycles = 0;
  logic clk = 0, rst = 1;

  logic              cfg_we;
  logic [2:0]        cfg_layer;
  logic [12:0]       cfg_n_in, cfg_n_out;
  logic [1:0]        cfg_alpha;
  logic [3:0]        num_layers;
  logic              in_we;
  logic [11:0]       in_addr;
  logic [IN_W-1:0]   in_data;
  logic              start, busy, done;
  logic              w_valid, w_ready;
  logic signed [WT_W-1:0] w_data [LANES];
  logic [11:0]       rd_addr;
  logic [IN_W-1:0]   rd_data;
  logic              w_adjusted, unsup;

  man_engine dut (
    .clk, .rst,
    .i_cfg_we(cfg_we), .i_cfg_layer(cfg_layer), .i_cfg_n_in(cfg_n_in), .i_cfg_n_out(cfg_n_out), .i_cfg_alpha(cfg_alpha),
    .i_num_layers(num_layers),
    .i_in_we(in_we), .i_in_addr(in_addr), .i_in_data(in_data),
    .i_start(start), .o_busy(busy), .o_done(done),
    .i_w_valid(w_valid), .o_w_ready(w_ready), .i_w_data(w_data),
    .i_rd_addr(rd_addr), .o_rd_data(rd_data),
    .o_w_adjusted(w_adjusted), .o_unsup(unsup)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  // ---------------- network under test ----------------
  int n_layers;
  int n_in  [8];
  int n_out [8];
  int alog  [8];   // log2 of each layer's alphabet count
  int woff  [8], boff[8];
  int wts   [$];   // raw weights, layer by layer, neuron-major
  int bias  [$];
  int x0    [$];   // input pattern
  logic [LANES*WT_W-1:0] beats [$];

  // ---------------- weight stream driver ----------------
  int  bidx;
  bit  running;
  bit  stall_r;
  int  stall_pct;
  always_ff @(posedge clk) begin
    if (rst || !running) bidx <= 0;
    else if (w_valid && w_ready) bidx <= bidx + 1;
    stall_r <= (int'($urandom % 100) < stall_pct);
  end
  always_comb begin
    w_valid = running && !stall_r && (bidx < beats.size());
    for (int l = 0; l < LANES; l++)
      w_data[l] = (bidx < beats.size()) ? beats[bidx][WT_W*l +: WT_W] : '0;
  end

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_adjust = 0, n_partial = 0, n_swap = 0, n_sat = 0, n_mid = 0;
  always @(posedge clk) begin
    if (busy && w_ready && !w_valid) n_stall++;
    if (w_adjusted) n_adjust++;
    if (unsup) begin failures++; $display("FAIL unsupported quartet reached a multiplier"); end
  end

  initial begin
    wait (cycles == 3000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rand_weight(input int odd_pct, input int na);
    if (int'($urandom % 100) < odd_pct) return int'($signed(WT_W'($urandom)));
    return rand_supported_weight(WT_W, na, 8);
  endfunction

  task automatic build(input int nl, input int sizes[9], input int odd_pct, input int al[8]);
    int g, ng;
    logic [LANES*WT_W-1:0] b;
    n_layers = nl;
    wts.delete(); bias.delete(); x0.delete(); beats.delete();
    for (int i = 0; i < sizes[0]; i++) x0.push_back($urandom % (1 << IN_W));
    for (int l = 0; l < nl; l++) begin
      n_in[l]  = sizes[l];
      n_out[l] = sizes[l + 1];
      alog[l]  = al[l];
      woff[l]  = wts.size();
      boff[l]  = bias.size();
      for (int n = 0; n < n_out[l]; n++) begin
        bias.push_back(int'($urandom % 33) - 16);
        for (int i = 0; i < n_in[l]; i++) wts.push_back(rand_weight(odd_pct, 1 << alog[l]));
      end
      ng = (n_out[l] + LANES - 1) / LANES;
      for (g = 0; g < ng; g++) begin
        for (int ln = 0; ln < LANES; ln++)
          b[WT_W*ln +: WT_W] = (4*g + ln < n_out[l]) ? WT_W'(bias[boff[l] + 4*g + ln]) : WT_W'($urandom);
        beats.push_back(b);
        for (int i = 0; i < n_in[l]; i++) begin
          for (int ln = 0; ln < LANES; ln++)
            b[WT_W*ln +: WT_W] = (4*g + ln < n_out[l]) ? WT_W'(wts[woff[l] + (4*g + ln) * n_in[l] + i])
                                                       : WT_W'($urandom);
          beats.push_back(b);
        end
        if (4*g + LANES > n_out[l]) n_partial++;
      end
    end
  endtask

  // expected cycles from start to done with an uninterrupted stream
  function automatic int expected_cycles();
    int c, ng, lanes;
    c = 0;
    for (int l = 0; l < n_layers; l++) begin
      ng = (n_out[l] + LANES - 1) / LANES;
      for (int g = 0; g < ng; g++) begin
        lanes = (n_out[l] - 4*g < LANES) ? n_out[l] - 4*g : LANES;
        c += 1 + n_in[l] + lanes;
      end
    end
    return c;
  endfunction

  task automatic run(input string tag, input int pct, input bit check_cycles);
    int cur[$], nxt[$];
    longint acc;
    int measured, e;
    stall_pct = pct;
    // configure and load
    @(negedge clk);
    num_layers = 4'(n_layers);
    for (int l = 0; l < n_layers; l++) begin
      cfg_we = 1; cfg_layer = 3'(l); cfg_n_in = 13'(n_in[l]); cfg_n_out = 13'(n_out[l]); cfg_alpha = 2'(alog[l]);
      @(negedge clk);
    end
    cfg_we = 0;
    for (int i = 0; i < x0.size(); i++) begin
      in_we = 1; in_addr = 12'(i); in_data = IN_W'(x0[i]);
      @(negedge clk);
    end
    in_we = 0;
    running = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    measured = 0;
    while (!done) begin
      @(negedge clk);
      measured++;
    end
    running = 0;
    n_swap += n_layers - 1;
    // reference forward pass
    cur = x0;
    for (int l = 0; l < n_layers; l++) begin
      nxt.delete();
      for (int n = 0; n < n_out[l]; n++) begin
        acc = longint'(bias[boff[l] + n]) <<< IN_W;
        for (int i = 0; i < n_in[l]; i++)
          acc += longint'(ref_constrain(wts[woff[l] + n * n_in[l] + i], WT_W, 1 << alog[l])) * cur[i];
        nxt.push_back(ref_plan(acc, FRAC, IN_W));
      end
      cur = nxt;
    end
    // compare
    for (int n = 0; n < cur.size(); n++) begin
      rd_addr = 12'(n);
      #1;
      checks++;
      if (int'(rd_data) != cur[n]) begin
        failures++; $display("FAIL %s output %0d: got %0d exp %0d", tag, n, rd_data, cur[n]);
      end
      if (cur[n] == 0 || cur[n] == (1 << IN_W) - 1) n_sat++; else n_mid++;
    end
    if (check_cycles) begin
      e = expected_cycles();
      checks++;
      if (measured != e) begin failures++; $display("FAIL %s cycles %0d, expected %0d", tag, measured, e); end
      else $display("%s: %0d cycles as expected", tag, measured);
    end
    $display("%s: done after %0d cycles, %0d outputs checked", tag, measured, cur.size());
  endtask

  initial begin
    int s1[9] = '{13, 7, 5, 3, 0, 0, 0, 0, 0};
    int s2[9] = '{1024, 100, 10, 0, 0, 0, 0, 0, 0};
    int s3[9] = '{1024, 100, 2, 0, 0, 0, 0, 0, 0};
    int s4[9] = '{1024, 700, 280, 220, 220, 130, 10, 0, 0};
    int a0[8] = '{default: 0};   // every layer multiplier-less
    cfg_we = 0; cfg_alpha = 0; cfg_layer = 0; cfg_n_in = 0; cfg_n_out = 0; num_layers = 0;
    in_we = 0; in_addr = 0; in_data = 0; start = 0; rd_addr = 0;
    running = 0; stall_pct = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    build(3, s1, 12, a0);
    run("small with stalls", 25, 0);
    build(3, s1, 12, a0);
    run("small no stalls", 0, 1);
    build(2, s2, 2, a0);
    run("mnist 1024-100-10", 10, 0);
    build(2, s3, 2, a0);
    run("face 1024-100-2", 0, 1);
    build(6, s4, 2, a0);
    run("6-layer 1024-700-280-220-220-130-10", 0, 1);

    $display("mechanisms: stalls=%0d adjusted_beats=%0d partial_groups=%0d buffer_swaps=%0d saturated=%0d midrange=%0d",
             n_stall, n_adjust, n_partial, n_swap, n_sat, n_mid);
    if (n_stall == 0)   begin failures++; $display("FAIL no stall happened"); end
    if (n_adjust == 0)  begin failures++; $display("FAIL no weight was constrained"); end
    if (n_partial == 0) begin failures++; $display("FAIL no partial group"); end
    if (n_swap == 0)    begin failures++; $display("FAIL no buffer swap"); end
    if (n_sat == 0)     begin failures++; $display("FAIL no saturated activation"); end
    if (n_mid == 0)     begin failures++; $display("FAIL no mid-range activation"); end
    checks += 6;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
