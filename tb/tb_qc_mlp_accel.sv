// tb_qc_mlp_accel: end-to-end test of the accelerator at its default size.
//
// After reset all 783 parameter words are loaded with random values of each layer's
// format, scaled down so that most vectors stay in range. Then:
//   phase 1  the evaluation grid: beta = -pi + 2*pi*k/100, k = 1..100 (the -pi sample
//            dropped), entered back to back, one per cycle, as beta/pi with 12
//            fraction bits;
//   phase 2  600 random angles with random gaps between them;
//   phase 3  a new, full-range parameter set is loaded and the grid is run again.
// Every output vector is compared with a bit-true reference forward pass of the
// 1-4-8-11-11-11-11-20 network and must appear exactly 35 cycles after its input.
// The test counts how often each mechanism occurred and fails if one never did:
// back-to-back outputs (initiation interval 1), gaps in the input stream,
// saturation (sat_any, checked against the reference), ReLU clamping, and a
// parameter reload between inferences. It also requires that most outputs differ
// from the one before, so that the network is not trivially dead, and checks the
// busy output against the number of inferences in flight every cycle.
module tb_qc_mlp_accel;
  import qc_mlp_pkg::*;
  import mlp_ref_pkg::*;

  localparam int NL = 7;
  // the network as published; kept separate from the RTL package on purpose
  localparam int SZ [NL+1] = '{1, 4, 8, 11, 11, 11, 11, 20};
  localparam int WD [NL+1] = '{14, 14, 12, 10, 10, 10, 10, 12};
  localparam int FR [NL+1] = '{12, 12, 10, 8, 8, 8, 8, 12};
  localparam int LATENCY   = 35;
  localparam int DEPTH     = 1024;

  logic clk = 1'b0, rst_n = 1'b0;
  always #2.5 clk = ~clk;       // 5 ns clock

  logic                 cfg_we = 1'b0;
  logic [9:0]           cfg_addr = '0;
  logic [15:0]          cfg_wdata = '0;
  logic                 in_valid = 1'b0;
  logic signed [13:0]   in_beta = '0;
  logic                 out_valid;
  logic signed [11:0]   out_alpha [20];
  logic                 sat_any;
  logic                 busy;
  int                   n_busy = 0;

  qc_mlp_accel dut (.*);

  longint wt [NL+1][20][12];       // [layer][neuron][input], index SZ[l-1] = bias
  longint bin [DEPTH];
  int     cin [DEPTH];
  int     wp = 0, rp = 0;
  int     checks = 0, failures = 0, cycle = 0;
  int     n_sent = 0;
  int     n_b2b = 0, n_gap = 0, n_sat = 0, n_clamp = 0, n_reload = 0, n_words = 0;
  logic   prev_out_valid = 1'b0, prev_in_valid = 1'b0;
  longint prev_alpha [20];
  int     n_varied = 0;      // outputs that differ from the previous output

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference forward pass; returns the 20 outputs and whether anything saturated
  task automatic forward(longint beta, output longint alpha [20], output bit any_sat,
                         output int clamps);
    longint a [20];
    longint nx [20];
    a[0] = beta;
    any_sat = 1'b0;
    clamps = 0;
    for (int l = 1; l <= NL; l++) begin
      for (int o = 0; o < SZ[l]; o++) begin
        bit s, c;
        longint acc = wt[l][o][SZ[l-1]] * (longint'(1) << FR[l-1]);
        for (int i = 0; i < SZ[l-1]; i++) acc += a[i] * wt[l][o][i];
        nx[o] = requant(acc, FR[l-1], WD[l], l != NL, s, c);
        any_sat |= s;
        clamps += c;
      end
      for (int o = 0; o < SZ[l]; o++) a[o] = nx[o];
    end
    alpha = a;
  endtask

  task automatic load_params(int big_pct, int div);
    int addr = 0;
    for (int l = 1; l <= NL; l++)
      for (int o = 0; o < SZ[l]; o++)
        for (int i = 0; i <= SZ[l-1]; i++) begin
          wt[l][o][i] = rand_signed(WD[l], big_pct) / div;
          // positive hidden biases keep part of each ReLU layer active
          if (i == SZ[l-1] && l != NL && wt[l][o][i] < 0) wt[l][o][i] = -wt[l][o][i];
          cfg_we    <= 1'b1;
          cfg_addr  <= 10'(addr);
          cfg_wdata <= 16'(wt[l][o][i]);
          addr++;
          n_words++;
          @(posedge clk);
        end
    cfg_we <= 1'b0;
    @(posedge clk);
    if (addr != 783) begin
      failures++;
      $display("FAIL: %0d parameter words, expected 783", addr);
    end
  endtask

  // record inputs
  always @(posedge clk) if (rst_n) begin
    if (in_valid) begin
      bin[wp % DEPTH] = longint'(in_beta);
      cin[wp % DEPTH] = cycle;
      wp++;
    end
    if (prev_in_valid && !in_valid) n_gap++;
    prev_in_valid <= in_valid;
  end

  // check outputs
  always @(negedge clk) if (rst_n) begin
    checks++;
    if (busy != (wp != rp)) begin
      failures++;
      $display("FAIL: busy=%0b with %0d inferences in flight", busy, wp - rp);
    end
    n_busy += int'(busy);
    if (out_valid) begin
      if (rp == wp) begin
        checks++; failures++;
        $display("FAIL: output without input");
      end else begin
        automatic longint e [20];
        automatic bit es;
        automatic int ec;
        automatic int slot = rp % DEPTH;
        forward(bin[slot], e, es, ec);
        n_sat += es;
        n_clamp += ec;
        checks++;
        if (cycle - cin[slot] != LATENCY) begin
          failures++;
          $display("FAIL: latency %0d cycles, expected %0d", cycle - cin[slot], LATENCY);
        end
        checks++;
        if (sat_any != es) begin
          failures++;
          $display("FAIL: sample %0d sat_any=%0b expected %0b", rp, sat_any, es);
        end
        for (int o = 0; o < 20; o++) begin
          checks++;
          if (longint'(out_alpha[o]) != e[o]) begin
            failures++;
            $display("FAIL: sample %0d beta=%0d alpha[%0d]=%0d expected %0d",
                     rp, bin[slot], o, out_alpha[o], e[o]);
          end
        end
        if (rp > 0 && e != prev_alpha) n_varied++;
        prev_alpha = e;
        rp++;
      end
      if (prev_out_valid) n_b2b++;
    end
    prev_out_valid <= out_valid;
  end

  task automatic run_grid();
    for (int k = 1; k <= 100; k++) begin
      // beta/pi = -1 + k/50 with 12 fraction bits
      in_valid <= 1'b1;
      in_beta  <= 14'(-4096 + (k * 4096) / 50);
      n_sent++;
      @(posedge clk);
    end
    in_valid <= 1'b0;
  endtask

  task automatic drain();
    repeat (LATENCY + 4) @(posedge clk);
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    load_params(5, 2);
    run_grid();
    for (int n = 0; n < 600; n++) begin
      automatic bit v = ($urandom % 100) < 70;
      in_valid <= v;
      n_sent += int'(v);
      in_beta  <= 14'(int'($urandom % 8193) - 4096);
      @(posedge clk);
    end
    in_valid <= 1'b0;
    drain();
    load_params(40, 1);
    n_reload++;
    run_grid();
    drain();

    if (rp != wp || rp != n_sent) begin
      failures++;
      $display("FAIL: %0d inputs, %0d outputs, expected %0d", wp, rp, n_sent);
    end
    $display("mechanisms: back_to_back=%0d input_gaps=%0d saturated_vectors=%0d relu_clamps=%0d reloads=%0d param_words=%0d varied=%0d",
             n_b2b, n_gap, n_sat, n_clamp, n_reload, n_words, n_varied);
    if (n_b2b == 0)   begin failures++; $display("FAIL: no back-to-back outputs"); end
    if (n_gap == 0)   begin failures++; $display("FAIL: no gaps in the input"); end
    if (n_sat == 0)   begin failures++; $display("FAIL: no saturation"); end
    if (n_sat == rp)  begin failures++; $display("FAIL: every vector saturated"); end
    if (n_clamp == 0) begin failures++; $display("FAIL: no ReLU clamping"); end
    if (n_varied < rp / 2) begin failures++; $display("FAIL: outputs hardly depend on beta"); end
    if (n_busy == 0) begin failures++; $display("FAIL: busy never set"); end
    if (n_reload == 0) begin failures++; $display("FAIL: no parameter reload"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
