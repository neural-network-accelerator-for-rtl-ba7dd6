// dense_layer: one fully-connected layer of the MLP, fully parallel and pipelined.
//
// Every neuron o computes y[o] = act( sum_i x[i]*w[o][i] + b[o] ) with one multiplier
// per weight (hls4ml reuse factor 1), so a new input vector can enter every cycle.
// The pipeline is LAT registers deep:
//   cycle 1      all N_OUT*N_IN products and the aligned biases are registered;
//   cycles 2..   an adder_tree per neuron, LAT-2 registers deep, sums N_IN+1 terms;
//   cycle LAT    requant_act truncates and saturates the sum to the layer's format,
//                applies ReLU (hidden layers) and the result is registered.
// Inputs are in a W_IN-bit format with F_IN fraction bits; weights, biases and
// outputs share the layer's W-bit format, whose fraction width F only the caller
// needs to know: the sum carries F_IN+F fraction bits and loses F_IN of them.
// Products keep all
// fraction bits, the bias is shifted left by F_IN to match, and nothing is
// lost before the final requantisation. sat/clamp report, per neuron, whether the
// output now on y was clipped to range or zeroed by the ReLU.
//
// There is no stall: out_valid follows in_valid exactly LAT cycles later. Weights are
// held in layer_params and written over the cfg bus. The published design gives the
// layer sizes, word widths and the 35-cycle total latency; the 5-cycle share per
// layer, the register placement, the arithmetic modes and the activation are this
// design's choices.
module dense_layer
  import qc_mlp_pkg::*;
#(
  parameter int N_IN  = 11,
  parameter int N_OUT = 11,
  parameter int W_IN  = 10,
  parameter int F_IN  = 8,
  parameter int W     = 10,
  parameter bit RELU  = 1'b1,
  parameter int LAT   = 5,
  parameter int BASE  = 0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  cfg_wr_t                cfg,
  input  logic                   in_valid,
  input  logic signed [W_IN-1:0] x [N_IN],
  output logic                   out_valid,
  output logic signed [W-1:0]    y [N_OUT],
  output logic [N_OUT-1:0]       sat,
  output logic [N_OUT-1:0]       clamp
);

  localparam int NT    = N_IN + 1;                  // products plus bias
  localparam int ACC_W = W_IN + W + $clog2(NT);

  if (LAT < 3) begin : g_bad_lat
    $error("dense_layer: LAT must be at least 3");
  end
  if (W + F_IN > W_IN + W) begin : g_bad_fmt
    $error("dense_layer: bias does not fit the product format");
  end

  logic signed [W-1:0] wt [N_OUT][N_IN];
  logic signed [W-1:0] bs [N_OUT];

  layer_params #(.N_IN(N_IN), .N_OUT(N_OUT), .W(W), .BASE(BASE)) u_params (
    .clk, .rst_n, .cfg, .w(wt), .b(bs)
  );

  // stage 1: products and aligned bias
  logic signed [ACC_W-1:0] term_q [N_OUT][NT];
  logic                    term_vld;

  always_ff @(posedge clk) begin
    if (!rst_n) term_vld <= 1'b0;
    else        term_vld <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int o = 0; o < N_OUT; o++) begin
        for (int i = 0; i < N_IN; i++)
          term_q[o][i] <= ACC_W'(x[i] * wt[o][i]);
        term_q[o][N_IN] <= ACC_W'(bs[o]) <<< F_IN;
      end
    end
  end

  // stages 2..LAT-1: one adder tree per neuron
  logic signed [ACC_W-1:0] acc   [N_OUT];
  logic [N_OUT-1:0]        acc_vld;
  logic signed [W-1:0]     y_d   [N_OUT];
  logic [N_OUT-1:0]        sat_d, clamp_d;

  for (genvar o = 0; o < N_OUT; o++) begin : g_neuron
    adder_tree #(.N(NT), .W(ACC_W), .REGS(LAT - 2)) u_tree (
      .clk, .rst_n,
      .in_valid (term_vld),
      .terms    (term_q[o]),
      .out_valid(acc_vld[o]),
      .sum      (acc[o])
    );
    requant_act #(.IN_W(ACC_W), .SHIFT(F_IN), .OUT_W(W), .RELU(RELU)) u_act (
      .acc  (acc[o]),
      .y    (y_d[o]),
      .sat  (sat_d[o]),
      .clamp(clamp_d[o])
    );
  end

  // stage LAT: registered output
  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= &acc_vld;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sat   <= '0;
      clamp <= '0;
    end else if (&acc_vld) begin
      sat   <= sat_d;
      clamp <= clamp_d;
    end
  end

  always_ff @(posedge clk) begin
    if (&acc_vld) y <= y_d;
  end

endmodule
