// layer_params: weight and bias registers of one dense layer.
//
// Neuron o of the layer owns N_IN+1 consecutive words of the configuration address
// space starting at BASE + o*(N_IN+1): its weights for inputs 0..N_IN-1, then its
// bias. A write (cfg.we) whose address falls in the layer's range stores the low W
// bits of cfg.data, a two's complement value in the layer's fixed-point format, and
// is visible on w/b from the next clock edge. Reset clears every parameter.
//
// The published design compiles the trained values into the logic as constants;
// since those values are not published, this design holds them in registers loaded
// at start-up. The bus, the address map and the reset value are this design's own.
module layer_params
  import qc_mlp_pkg::*;
#(
  parameter int N_IN  = 11,
  parameter int N_OUT = 11,
  parameter int W     = 10,
  parameter int BASE  = 0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_wr_t             cfg,
  output logic signed [W-1:0] w [N_OUT][N_IN],
  output logic signed [W-1:0] b [N_OUT]
);

  localparam int STRIDE = N_IN + 1;

  for (genvar o = 0; o < N_OUT; o++) begin : g_o
    for (genvar i = 0; i <= N_IN; i++) begin : g_i
      localparam logic [CFG_ADDR_W-1:0] A = CFG_ADDR_W'(BASE + o*STRIDE + i);
      logic signed [W-1:0] r;
      always_ff @(posedge clk) begin
        if (!rst_n)                       r <= '0;
        else if (cfg.we && cfg.addr == A) r <= cfg.data[W-1:0];
      end
      if (i < N_IN) begin : g_w
        assign w[o][i] = r;
      end else begin : g_b
        assign b[o] = r;
      end
    end
  end

endmodule
