// man_engine: feedforward neural network processing engine built on
// multiplier-less (or alphabet set) neurons.
//
// The engine evaluates a fully connected feedforward network layer by
// layer. One processing unit computes LANES = 4 neurons at a time: each
// cycle one input activation is read, the shared pre-computer bank turns
// it into alphabets, four ASMs multiply it by the four neurons' weights and
// four accumulators add the products. When a group's inputs are exhausted
// the four sums pass through sigmoid units and are written, one per cycle,
// to the activation buffer of the next layer. Two activation buffers
// alternate between layers. With NUM_ALPHA = 1 (the default) the
// multipliers are pure shift-and-add: the multiplier-less neuron.
//
// Every weight passes a weight_constrainer before its multiplier, so a
// weight that the alphabet set cannot form is rounded to the nearest one
// it can; weights produced by constrained retraining pass unchanged. Each
// layer names the alphabet set its weights were trained for ({1}, {1,3},
// {1,3,5,7} or all eight, at most the NUM_ALPHA built): a network can use
// the multiplier-less set in its large early layers and a richer set in
// its small final layers, and the engine rounds each layer's weights to
// that layer's set. The multipliers themselves are built for NUM_ALPHA
// alphabets and are exact for every smaller set.
//
// Operation:
//  1. While idle, write the layer table (i_cfg_we with layer number, input
//     count 1..ACT_DEPTH, neuron count 1..ACT_DEPTH and i_cfg_alpha, the
//     log2 of the layer's alphabet count, clamped to the built set), set
//     i_num_layers,
//     and write the input pattern into buffer 0 (i_in_we/addr/data).
//  2. Pulse i_start. The engine then pulls weights over a valid/ready
//     stream, LANES words per beat, in this order: for each layer, for each
//     group of four neurons (neurons 4g .. 4g+3), first one beat of the four
//     biases, then one beat per input i holding w[4g+l][i] in lane l. Lanes
//     past the layer's last neuron are ignored.
//  3. o_done pulses when the last layer is written; read the outputs with
//     i_rd_addr / o_rd_data (combinational) while idle.
// Formats: activations are unsigned IN_W-bit fractions of 1; weights and
// biases are signed WT_W-bit numbers with WT_FRAC fractional bits.
//
// Timing, with a weight beat offered every cycle: a group takes 1 (bias) +
// n_in (multiply-accumulate) + n_lanes (write-back) cycles, and o_done
// rises in the cycle after the last write.
//
// The four-neuron unit with a shared pre-computer bank, the quartet ASMs,
// the sigmoid neuron, the offline-constrained weights and the use of
// different alphabet sets in different layers are the paper's; there the
// rounding happens during retraining, here it is repeated in hardware.
// The paper does not describe the engine around the unit: the weight
// stream, the buffers, the layer table, the number formats and the
// sequencing are this design's choices.
module man_engine #(
  parameter int unsigned IN_W       = man_pkg::DEF_IN_W,
  parameter int unsigned WT_W       = man_pkg::DEF_WT_W,
  parameter int unsigned WT_FRAC    = WT_W - 4,
  parameter int unsigned NUM_ALPHA  = man_pkg::DEF_NUM_ALPHA,
  parameter int unsigned LANES      = man_pkg::DEF_LANES,
  parameter int unsigned ACT_DEPTH  = 4096,
  // wide enough that no layer that fits the buffers can overflow the sum
  parameter int unsigned ACC_W      = IN_W + WT_W + $clog2(ACT_DEPTH),
  parameter int unsigned MAX_LAYERS = 8,
  localparam int unsigned AW        = $clog2(ACT_DEPTH),
  localparam int unsigned CW        = AW + 1,
  localparam int unsigned LW        = (MAX_LAYERS > 1) ? $clog2(MAX_LAYERS) : 1,
  localparam int unsigned LNW       = (LANES > 1) ? $clog2(LANES) : 1,
  localparam int unsigned PROD_W    = IN_W + WT_W,
  localparam int unsigned NSETS     = $clog2(NUM_ALPHA) + 1
) (
  input  logic                   clk,
  input  logic                   rst,
  // layer table
  input  logic                   i_cfg_we,
  input  logic [LW-1:0]          i_cfg_layer,
  input  logic [CW-1:0]          i_cfg_n_in,
  input  logic [CW-1:0]          i_cfg_n_out,
  input  logic [1:0]             i_cfg_alpha,
  input  logic [LW:0]            i_num_layers,
  // input pattern load
  input  logic                   i_in_we,
  input  logic [AW-1:0]          i_in_addr,
  input  logic [IN_W-1:0]        i_in_data,
  // run control
  input  logic                   i_start,
  output logic                   o_busy,
  output logic                   o_done,
  // weight and bias stream
  input  logic                   i_w_valid,
  output logic                   o_w_ready,
  input  logic signed [WT_W-1:0] i_w_data [LANES],
  // result read-out
  input  logic [AW-1:0]          i_rd_addr,
  output logic [IN_W-1:0]        o_rd_data,
  // status
  output logic                   o_w_adjusted,
  output logic                   o_unsup
);

  typedef enum logic [1:0] {S_IDLE, S_BIAS, S_MAC, S_WRITE} state_t;

  state_t          state;
  logic [CW-1:0]   n_in_tab  [MAX_LAYERS];
  logic [CW-1:0]   n_out_tab [MAX_LAYERS];
  logic [1:0]      alpha_tab [MAX_LAYERS];
  logic [LW:0]     num_layers;
  logic [LW-1:0]   layer;
  logic [CW-1:0]   grp_base;
  logic [CW-1:0]   in_idx;
  logic [LNW-1:0]  lane_idx;
  logic            cur_buf, res_buf;

  logic [CW-1:0]   n_in_cur, n_out_cur, lanes_left;
  logic [1:0]      alpha_cur;
  logic            last_lane, last_group, last_layer;
  logic            bias_fire, mac_fire;

  // ---------------------------------------------------------------------
  // Layer table
  // ---------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (rst) begin
      num_layers <= '0;
      for (int i = 0; i < MAX_LAYERS; i++) begin
        n_in_tab[i]  <= CW'(1);
        n_out_tab[i] <= CW'(1);
        alpha_tab[i] <= '0;
      end
    end else if (state == S_IDLE) begin
      num_layers <= i_num_layers;
      if (i_cfg_we) begin
        n_in_tab[i_cfg_layer]  <= i_cfg_n_in;
        n_out_tab[i_cfg_layer] <= i_cfg_n_out;
        alpha_tab[i_cfg_layer] <= (int'(i_cfg_alpha) < NSETS) ? i_cfg_alpha : 2'(NSETS - 1);
      end
    end
  end

  assign n_in_cur   = n_in_tab[layer];
  assign n_out_cur  = n_out_tab[layer];
  assign alpha_cur  = alpha_tab[layer];
  assign lanes_left = n_out_cur - grp_base;
  assign last_lane  = (CW'(lane_idx) == lanes_left - 1) || (lane_idx == LNW'(LANES - 1));
  assign last_group = (lanes_left <= CW'(LANES));
  assign last_layer = ((LW+1)'(layer) == num_layers - 1);

  assign o_w_ready = (state == S_BIAS) || (state == S_MAC);
  assign bias_fire = (state == S_BIAS) && i_w_valid;
  assign mac_fire  = (state == S_MAC)  && i_w_valid;
  assign o_busy    = (state != S_IDLE);

  // ---------------------------------------------------------------------
  // Sequencer
  // ---------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      layer    <= '0;
      grp_base <= '0;
      in_idx   <= '0;
      lane_idx <= '0;
      cur_buf  <= 1'b0;
      res_buf  <= 1'b0;
      o_done   <= 1'b0;
    end else begin
      o_done <= 1'b0;
      unique case (state)
        S_IDLE: if (i_start && i_num_layers != 0) begin
          layer    <= '0;
          grp_base <= '0;
          cur_buf  <= 1'b0;
          state    <= S_BIAS;
        end
        S_BIAS: if (bias_fire) begin
          in_idx <= '0;
          state  <= S_MAC;
        end
        S_MAC: if (mac_fire) begin
          if (in_idx == n_in_cur - 1) begin
            lane_idx <= '0;
            state    <= S_WRITE;
          end else begin
            in_idx <= in_idx + 1'b1;
          end
        end
        S_WRITE: begin
          lane_idx <= lane_idx + 1'b1;
          if (last_lane) begin
            if (!last_group) begin
              grp_base <= grp_base + CW'(LANES);
              state    <= S_BIAS;
            end else if (!last_layer) begin
              layer    <= layer + 1'b1;
              grp_base <= '0;
              cur_buf  <= ~cur_buf;
              state    <= S_BIAS;
            end else begin
              res_buf  <= ~cur_buf;
              o_done   <= 1'b1;
              state    <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------------
  // Activation buffers (ping-pong)
  // ---------------------------------------------------------------------
  logic [IN_W-1:0] buf_rdata [2];
  logic [IN_W-1:0] act_in, act_out;
  logic [AW-1:0]   buf_raddr;

  assign buf_raddr = o_busy ? AW'(in_idx) : i_rd_addr;
  assign act_in    = buf_rdata[cur_buf];
  assign o_rd_data = buf_rdata[res_buf];

  for (genvar b = 0; b < 2; b++) begin : g_buf
    logic            we;
    logic [AW-1:0]   waddr;
    logic [IN_W-1:0] wdata;
    always_comb begin
      we    = 1'b0;
      waddr = i_in_addr;
      wdata = i_in_data;
      if (state == S_WRITE && cur_buf != 1'(b)) begin
        we    = 1'b1;
        waddr = AW'(grp_base + CW'(lane_idx));
        wdata = act_out;
      end else if (state == S_IDLE && i_in_we && b == 0) begin
        we    = 1'b1;
      end
    end
    activation_buffer #(.DEPTH(ACT_DEPTH), .W(IN_W)) u_buf (
      .clk    (clk),
      .i_we   (we),
      .i_waddr(waddr),
      .i_wdata(wdata),
      .i_raddr(buf_raddr),
      .o_rdata(buf_rdata[b])
    );
  end

  // ---------------------------------------------------------------------
  // Processing unit: constrainers, shared-alphabet multipliers, neurons
  // ---------------------------------------------------------------------
  logic signed [WT_W-1:0]   w_con   [LANES];
  logic [LANES-1:0]         w_chg;
  logic signed [PROD_W-1:0] prod    [LANES];
  logic [LANES-1:0]         unsup;
  logic signed [ACC_W-1:0]  acc     [LANES];
  logic [IN_W-1:0]          act     [LANES];

  // One constrainer per alphabet set {1}, {1,3}, ... up to the built set;
  // the layer's entry in the table picks which rounding applies.
  for (genvar l = 0; l < LANES; l++) begin : g_con
    logic signed [WT_W-1:0] w_set   [NSETS];
    logic [NSETS-1:0]       chg_set;
    for (genvar s = 0; s < NSETS; s++) begin : g_set
      weight_constrainer #(.WT_W(WT_W), .NUM_ALPHA(1 << s)) u_con (
        .i_w      (i_w_data[l]),
        .o_w      (w_set[s]),
        .o_changed(chg_set[s])
      );
    end
    always_comb begin
      w_con[l] = w_set[0];
      w_chg[l] = chg_set[0];
      for (int s = 1; s < NSETS; s++)
        if (int'(alpha_cur) == s) begin
          w_con[l] = w_set[s];
          w_chg[l] = chg_set[s];
        end
    end
  end

  cshm_unit #(.IN_W(IN_W), .WT_W(WT_W), .NUM_ALPHA(NUM_ALPHA), .LANES(LANES)) u_cshm (
    .i_in   (act_in),
    .i_w    (w_con),
    .o_prod (prod),
    .o_unsup(unsup)
  );

  for (genvar l = 0; l < LANES; l++) begin : g_neuron
    logic signed [ACC_W-1:0] bias;
    assign bias = ACC_W'(i_w_data[l]) <<< IN_W;

    neuron_accumulator #(.PROD_W(PROD_W), .ACC_W(ACC_W)) u_acc (
      .clk   (clk),
      .rst   (rst),
      .i_load(bias_fire),
      .i_bias(bias),
      .i_en  (mac_fire),
      .i_prod(prod[l]),
      .o_acc (acc[l])
    );

    sigmoid_unit #(.ACC_W(ACC_W), .FRAC(IN_W + WT_FRAC), .OUT_W(IN_W)) u_sig (
      .i_x(acc[l]),
      .o_y(act[l])
    );
  end

  assign act_out      = act[lane_idx];
  assign o_w_adjusted = mac_fire && (|w_chg);
  assign o_unsup      = mac_fire && (|unsup);

  // Layer table entries must describe a layer the buffers can hold.
  a_cfg_sizes: assert property (@(posedge clk) disable iff (rst)
      (i_cfg_we && state == S_IDLE) |->
        (i_cfg_n_in != 0 && i_cfg_n_in <= CW'(ACT_DEPTH) &&
         i_cfg_n_out != 0 && i_cfg_n_out <= CW'(ACT_DEPTH)))
    else $error("man_engine: layer size outside 1..ACT_DEPTH");

  // A run may not ask for more layers than the table holds.
  a_num_layers: assert property (@(posedge clk) disable iff (rst)
      (i_start && state == S_IDLE) |-> (i_num_layers <= (LW+1)'(MAX_LAYERS)))
    else $error("man_engine: more layers than MAX_LAYERS");

  // A constrained weight always decodes onto the alphabet set.
  a_no_unsup: assert property (@(posedge clk) disable iff (rst) !o_unsup)
    else $error("man_engine: unsupported quartet reached a multiplier");

endmodule
