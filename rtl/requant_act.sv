// requant_act: converts one neuron's full-precision sum into the layer's output
// format and applies the activation.
//
// The input acc is a signed sum with SHIFT more fraction bits than the output. The
// value is shifted right arithmetically (truncation toward minus infinity, hls4ml's
// default AP_TRN), then saturated to the signed OUT_W-bit range. With RELU set, a
// negative result becomes zero (hidden layers); with RELU clear the layer is linear
// (output layer). Two flags tell which of the two limits acted: sat when the value
// was clipped to the range, clamp when the ReLU zeroed it.
//
// Purely combinational; dense_layer registers the result. The word widths come from
// the published model; truncation, saturation and ReLU are this design's choice, as
// the rounding mode, overflow mode and activation function are not published.
module requant_act #(
  parameter int IN_W  = 32,
  parameter int SHIFT = 8,
  parameter int OUT_W = 10,
  parameter bit RELU  = 1'b1
) (
  input  logic signed [IN_W-1:0]  acc,
  output logic signed [OUT_W-1:0] y,
  output logic                    sat,
  output logic                    clamp
);

  localparam logic signed [IN_W-1:0] MAXV = IN_W'((64'sd1 <<< (OUT_W-1)) - 1);
  localparam logic signed [IN_W-1:0] MINV = IN_W'(-(64'sd1 <<< (OUT_W-1)));

  logic signed [IN_W-1:0] shifted;

  always_comb begin
    shifted = acc >>> SHIFT;
    sat     = 1'b0;
    clamp   = 1'b0;
    if (RELU && shifted < 0) begin
      y     = '0;
      clamp = 1'b1;
    end else if (shifted > MAXV) begin
      y   = MAXV[OUT_W-1:0];
      sat = 1'b1;
    end else if (shifted < MINV) begin
      y   = MINV[OUT_W-1:0];
      sat = 1'b1;
    end else begin
      y = shifted[OUT_W-1:0];
    end
  end

endmodule
