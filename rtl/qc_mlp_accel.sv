// qc_mlp_accel: quantised neural-network accelerator that predicts the pulse
// parameters of a single-qubit X rotation.
//
// Given the rotation angle beta, the network returns the 20 B-spline pulse
// amplitudes alpha that an optimal-control solver would otherwise have to compute.
// It is a multi-layer perceptron 1-4-8-11-11-11-11-20 (783 weights and biases) built
// as seven dense_layer stages in a chain; every multiplier exists in hardware, so one
// inference enters and one leaves every clock cycle. Each stage takes 5 cycles, so
// alpha appears TOTAL_LAT = 35 cycles after beta (175 ns at the 5 ns clock).
//
// Interface
//   in_valid/in_beta     beta/pi in ap_fixed<14,2> (range [-2,2), 12 fraction bits);
//                        accepted every cycle, there is no ready signal.
//   out_valid/out_alpha  20 values in ap_fixed<12,0> (range [-0.5,0.5)), 35 cycles on.
//   busy                 inferences are in flight; the parameters must not be
//                        written while busy or in_valid is high (asserted below).
//   sat_any              some neuron on the path of the vector now at the output was
//                        clipped to its format's range (diagnostic).
//   cfg_we/addr/wdata    writes parameter word cfg_addr (0..782, layer after layer,
//                        each neuron's weights then its bias, see layer_params) with
//                        the low bits of cfg_wdata; load all words after reset and
//                        before the first inference.
//
// Follows the published final implementation: the layer sizes, word widths
// 14/12/10/10/10/10/12 with a two-bit integer part (none in the output layer),
// initiation interval 1 and 35-cycle latency. This design's own choices: the input
// encoding, loading the trained parameters over a configuration port instead of
// compiling them in as constants, ReLU hidden activations, truncation with
// saturation, and the even 5-cycle split of the latency.
module qc_mlp_accel
  import qc_mlp_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cfg_we,
  input  logic [CFG_ADDR_W-1:0]       cfg_addr,
  input  logic [CFG_DATA_W-1:0]       cfg_wdata,
  input  logic                        in_valid,
  input  logic signed [IN_W-1:0]      in_beta,
  output logic                        out_valid,
  output logic signed [OUT_W-1:0]     out_alpha [OUT_N],
  output logic                        sat_any,
  output logic                        busy
);

  cfg_wr_t cfg;
  assign cfg = '{we: cfg_we, addr: cfg_addr, data: cfg_wdata};

  // layer 0 is the network input, layer l the output of dense layer l
  for (genvar l = 0; l <= N_LAYERS; l++) begin : g_layer
    localparam int N = LAYER_N[l];
    localparam int W = LAYER_W[l];
    logic signed [W-1:0] y [N];
    logic                vld;
    logic                sat_aligned;   // a saturation here, delayed to the output

    if (l == 0) begin : g_in
      assign y[0]        = in_beta;
      assign vld         = in_valid;
      assign sat_aligned = 1'b0;
    end else begin : g_dense
      logic [N-1:0] sat;
      dense_layer #(
        .N_IN (LAYER_N[l-1]),
        .N_OUT(N),
        .W_IN (LAYER_W[l-1]),
        .F_IN (layer_frac(l-1)),
        .W    (W),
        .RELU (l != N_LAYERS),
        .LAT  (LAYER_LAT),
        .BASE (layer_base(l))
      ) u_dense (
        .clk, .rst_n, .cfg,
        .in_valid (g_layer[l-1].vld),
        .x        (g_layer[l-1].y),
        .out_valid(vld),
        .y        (y),
        .sat      (sat),
        .clamp    ()
      );

      // the result of layer l reaches the output (N_LAYERS-l)*LAYER_LAT cycles later
      localparam int D = (N_LAYERS - l) * LAYER_LAT;
      if (D == 0) begin : g_nodly
        assign sat_aligned = |sat;
      end else begin : g_dly
        logic [D-1:0] sr;
        always_ff @(posedge clk) begin
          if (!rst_n) sr <= '0;
          else        sr <= {sr[D-2:0], |sat};
        end
        assign sat_aligned = sr[D-1];
      end
    end
  end

  logic [N_LAYERS:0] sat_vec;
  for (genvar l = 0; l <= N_LAYERS; l++) begin : g_sat
    assign sat_vec[l] = g_layer[l].sat_aligned;
  end

  assign out_valid = g_layer[N_LAYERS].vld;
  assign out_alpha = g_layer[N_LAYERS].y;
  assign sat_any   = |sat_vec;

  // in-flight count: up to TOTAL_LAT inferences are in the pipeline at once
  localparam int CNT_W = $clog2(TOTAL_LAT + 2);
  logic [CNT_W-1:0] inflight;

  always_ff @(posedge clk) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + CNT_W'(in_valid) - CNT_W'(out_valid);
  end

  assign busy = (inflight != '0);

  // configuration bus rules
  a_cfg_idle: assert property (@(posedge clk) disable iff (!rst_n)
    cfg_we |-> !busy && !in_valid)
    else $error("parameter write while inferences are in flight");
  a_cfg_addr: assert property (@(posedge clk) disable iff (!rst_n)
    cfg_we |-> int'(cfg_addr) < N_PARAMS)
    else $error("parameter write to unmapped address %0d", cfg_addr);
  a_inflight: assert property (@(posedge clk) disable iff (!rst_n)
    int'(inflight) <= TOTAL_LAT + 1)
    else $error("in-flight count out of range");

endmodule
