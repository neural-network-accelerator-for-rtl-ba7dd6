// tb_dense_layer: three dense_layer instances on one configuration bus, shaped like
// the network's first layer (1 -> 4, 14-bit input and weights, ReLU), a hidden layer
// (11 -> 11, 10-bit, ReLU; the module's defaults) and the output layer (11 -> 20,
// 10-bit input, 12-bit weights, linear). All parameters are loaded with random
// values, then random input vectors are streamed, back to back at first and with
// random gaps later. Each output is compared with a reference computed from the
// loaded values, and must appear exactly 5 cycles after its input. The test also
// requires that saturation and ReLU clamping each occurred.
module tb_dense_layer;
  import qc_mlp_pkg::*;
  import mlp_ref_pkg::*;

  localparam int LAT = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #2.5 clk = ~clk;

  cfg_wr_t cfg;
  int checks = 0, failures = 0, cycle = 0;
  int n_sat = 0, n_clamp = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  `define DENSE_HARNESS(NAME, NI, NO, WI, FI, WW, RL, BS) \
    logic NAME``_iv, NAME``_ov; \
    logic signed [WI-1:0] NAME``_x [NI]; \
    logic signed [WW-1:0] NAME``_y [NO]; \
    logic [NO-1:0] NAME``_sat, NAME``_clamp; \
    longint NAME``_w [NO][NI+1]; \
    longint NAME``_xs [1024][NI]; int NAME``_cs [1024]; int NAME``_wp = 0, NAME``_rp = 0; \
    dense_layer #(.N_IN(NI), .N_OUT(NO), .W_IN(WI), .F_IN(FI), .W(WW), .RELU(RL), \
                  .LAT(LAT), .BASE(BS)) NAME ( \
      .clk(clk), .rst_n(rst_n), .cfg(cfg), .in_valid(NAME``_iv), .x(NAME``_x), \
      .out_valid(NAME``_ov), .y(NAME``_y), .sat(NAME``_sat), .clamp(NAME``_clamp)); \
    always @(posedge clk) if (rst_n && NAME``_iv) begin \
      for (int i = 0; i < NI; i++) NAME``_xs[NAME``_wp % 1024][i] = longint'(NAME``_x[i]); \
      NAME``_cs[NAME``_wp % 1024] = cycle; \
      NAME``_wp++; \
    end \
    always @(negedge clk) if (rst_n && NAME``_ov) begin \
      if (NAME``_rp == NAME``_wp) begin \
        checks++; failures++; $display("FAIL %s: spurious output", `"NAME`"); \
      end else begin \
        automatic int slot = NAME``_rp % 1024; \
        automatic int c = NAME``_cs[slot]; \
        checks++; \
        if (cycle - c != LAT) begin \
          failures++; $display("FAIL %s: latency %0d", `"NAME`", cycle - c); \
        end \
        for (int o = 0; o < NO; o++) begin \
          automatic longint acc = NAME``_w[o][NI] * (longint'(1) << FI); \
          automatic bit es, ec; \
          automatic longint e; \
          for (int i = 0; i < NI; i++) acc += NAME``_xs[slot][i] * NAME``_w[o][i]; \
          e = requant(acc, FI, WW, RL, es, ec); \
          n_sat += es; n_clamp += ec; \
          checks++; \
          if (longint'(NAME``_y[o]) != e || NAME``_sat[o] != es || NAME``_clamp[o] != ec) begin \
            failures++; \
            $display("FAIL %s: neuron %0d y=%0d exp %0d sat %0b/%0b clamp %0b/%0b", \
                     `"NAME`", o, NAME``_y[o], e, NAME``_sat[o], es, NAME``_clamp[o], ec); \
          end \
        end \
        NAME``_rp++; \
      end \
    end

  `DENSE_HARNESS(l1, 1, 4, 14, 12, 14, 1'b1, 0)
  `DENSE_HARNESS(lh, 11, 11, 10, 8, 10, 1'b1, 40)
  `DENSE_HARNESS(lo, 11, 20, 10, 8, 12, 1'b0, 200)

  `define LOAD(NAME, NI, NO, WW, BS, BIG) \
    for (int o = 0; o < NO; o++) for (int i = 0; i <= NI; i++) begin \
      NAME``_w[o][i] = rand_signed(WW, BIG); \
      cfg <= '{we: 1'b1, addr: CFG_ADDR_W'(BS + o*(NI+1) + i), data: CFG_DATA_W'(NAME``_w[o][i])}; \
      @(posedge clk); \
    end

  `define DRIVE(NAME, NI, WI, PCT) \
    NAME``_iv <= ($urandom % 100) < PCT; \
    for (int i = 0; i < NI; i++) NAME``_x[i] <= WI'(rand_signed(WI, 30));

  initial begin
    cfg = '0;
    l1_iv = 0; lh_iv = 0; lo_iv = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    `LOAD(l1, 1, 4, 14, 0, 30)
    `LOAD(lh, 11, 11, 10, 40, 20)
    `LOAD(lo, 11, 20, 12, 200, 20)
    cfg <= '0;
    @(posedge clk);
    for (int n = 0; n < 600; n++) begin
      automatic int pct = (n < 50) ? 100 : 60;
      `DRIVE(l1, 1, 14, pct)
      `DRIVE(lh, 11, 10, pct)
      `DRIVE(lo, 11, 10, pct)
      @(posedge clk);
    end
    l1_iv <= 0; lh_iv <= 0; lo_iv <= 0;
    repeat (LAT + 3) @(posedge clk);
    if (l1_rp != l1_wp || lh_rp != lh_wp || lo_rp != lo_wp) begin
      failures++; $display("FAIL: outputs missing");
    end
    $display("saturations=%0d clamps=%0d", n_sat, n_clamp);
    if (n_sat == 0 || n_clamp == 0) begin
      failures++; $display("FAIL: saturation or ReLU clamp never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
