// tb_layer_params: a 4-input, 3-neuron parameter block at base address 100 is
// written in random order, including addresses just outside its range, which must
// be ignored. After every write the whole register set is compared with a model of
// the address map (neuron o: weights at BASE+o*5+i, bias at BASE+o*5+4). A reset at
// the end must clear everything.
module tb_layer_params;
  import qc_mlp_pkg::*;
  import mlp_ref_pkg::*;

  localparam int N_IN = 4, N_OUT = 3, W = 12, BASE = 100;

  logic clk = 1'b0, rst_n = 1'b0;
  always #2.5 clk = ~clk;

  cfg_wr_t cfg;
  logic signed [W-1:0] w [N_OUT][N_IN];
  logic signed [W-1:0] b [N_OUT];
  longint ew [N_OUT][N_IN];
  longint eb [N_OUT];
  int checks = 0, failures = 0;

  layer_params #(.N_IN(N_IN), .N_OUT(N_OUT), .W(W), .BASE(BASE)) dut (
    .clk, .rst_n, .cfg, .w, .b);

  task automatic compare(string what);
    for (int o = 0; o < N_OUT; o++) begin
      for (int i = 0; i < N_IN; i++) begin
        checks++;
        if (longint'(w[o][i]) != ew[o][i]) begin
          failures++;
          $display("FAIL %s w[%0d][%0d]=%0d exp %0d", what, o, i, w[o][i], ew[o][i]);
        end
      end
      checks++;
      if (longint'(b[o]) != eb[o]) begin
        failures++;
        $display("FAIL %s b[%0d]=%0d exp %0d", what, o, b[o], eb[o]);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    foreach (ew[o, i]) ew[o][i] = 0;
    foreach (eb[o]) eb[o] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    compare("after reset");
    for (int n = 0; n < 300; n++) begin
      automatic int a   = BASE - 2 + ($urandom % (N_OUT * (N_IN + 1) + 4));
      automatic int dat = $urandom;
      automatic bit we  = ($urandom % 5) != 0;
      cfg <= '{we: we, addr: CFG_ADDR_W'(a), data: CFG_DATA_W'(dat)};
      @(posedge clk);
      cfg.we <= 1'b0;
      if (we && a >= BASE && a < BASE + N_OUT * (N_IN + 1)) begin
        automatic int o = (a - BASE) / (N_IN + 1);
        automatic int i = (a - BASE) % (N_IN + 1);
        if (i == N_IN) eb[o] = sext(longint'(dat), W);
        else           ew[o][i] = sext(longint'(dat), W);
      end
      @(negedge clk);
      compare("after write");
    end
    rst_n <= 1'b0;
    @(posedge clk);
    @(negedge clk);
    foreach (ew[o, i]) ew[o][i] = 0;
    foreach (eb[o]) eb[o] = 0;
    compare("after second reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
