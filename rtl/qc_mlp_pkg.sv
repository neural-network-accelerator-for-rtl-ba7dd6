// qc_mlp_pkg: shared constants and types of the quantum-control MLP accelerator.
//
// The network maps one gate angle beta to the 20 pulse parameters alpha of an
// X-rotation. Its shape, 1-4-8-11-11-11-11-20 (six hidden layers, 783 weights and
// biases), and its per-layer word widths follow the published final FPGA version of
// the model. Index 0 of each table describes the network input; index l (1..7) the
// output of dense layer l. A format is two's complement fixed point with W bits,
// I of them integer bits counting the sign (hls4ml's ap_fixed<W,I> notation), so the
// fraction has W-I bits.
//
// Paper: layer sizes, word widths 14/12/10/10/10/10/12, integer bits 2 (0 for the
// output), 35-cycle total latency. This design's own: the input format, the even
// 5-cycle split of the latency over the layers, and the configuration bus through
// which the trained parameters are loaded (cfg_wr_t and the address map below).
package qc_mlp_pkg;

  localparam int N_LAYERS = 7;

  // neurons per layer: input, six hidden layers, output
  localparam int LAYER_N [N_LAYERS+1] = '{1, 4, 8, 11, 11, 11, 11, 20};
  // word width of each layer's weights, biases and outputs
  localparam int LAYER_W [N_LAYERS+1] = '{14, 14, 12, 10, 10, 10, 10, 12};
  // integer bits, sign included
  localparam int LAYER_I [N_LAYERS+1] = '{2, 2, 2, 2, 2, 2, 2, 0};

  localparam int LAYER_LAT   = 5;                    // cycles per dense layer
  localparam int TOTAL_LAT   = LAYER_LAT * N_LAYERS; // 35 cycles = 175 ns at 5 ns

  localparam int IN_W        = LAYER_W[0];
  localparam int OUT_N       = LAYER_N[N_LAYERS];
  localparam int OUT_W       = LAYER_W[N_LAYERS];

  // parameter configuration bus
  localparam int CFG_ADDR_W  = 10;
  localparam int CFG_DATA_W  = 16;

  typedef struct packed {
    logic                  we;
    logic [CFG_ADDR_W-1:0] addr;
    logic [CFG_DATA_W-1:0] data;
  } cfg_wr_t;

  // number of parameter words of dense layer l (1..N_LAYERS)
  function automatic int layer_params_count(int l);
    return LAYER_N[l] * (LAYER_N[l-1] + 1);
  endfunction

  // first parameter word address of dense layer l
  function automatic int layer_base(int l);
    int a = 0;
    for (int k = 1; k < l; k++) a += layer_params_count(k);
    return a;
  endfunction

  localparam int N_PARAMS = layer_base(N_LAYERS + 1);  // 783

  // fraction bits of a layer format
  function automatic int layer_frac(int l);
    return LAYER_W[l] - LAYER_I[l];
  endfunction

endpackage
