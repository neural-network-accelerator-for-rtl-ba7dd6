// tb_adder_tree: three adder_tree instances (12 terms / 3 registers, the layer
// default; 5 terms / 2 registers; 2 terms / 3 registers, which needs surplus delay
// registers) receive random terms with random gaps in in_valid. Each expected sum is
// queued with the cycle it entered; every out_valid must pop a sum that entered
// exactly REGS cycles earlier, and no sum may be lost.
module tb_adder_tree;
  localparam int W = 24;

  logic clk = 1'b0, rst_n = 1'b0;
  always #2.5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one generic harness per configuration
  `define TREE_HARNESS(NAME, NN, RR) \
    logic NAME``_iv, NAME``_ov; \
    logic signed [W-1:0] NAME``_t [NN]; \
    logic signed [W-1:0] NAME``_s; \
    longint NAME``_q [$]; int NAME``_qc [$]; \
    adder_tree #(.N(NN), .W(W), .REGS(RR)) NAME (.clk(clk), .rst_n(rst_n), \
      .in_valid(NAME``_iv), .terms(NAME``_t), .out_valid(NAME``_ov), .sum(NAME``_s)); \
    always @(posedge clk) if (rst_n) begin \
      if (NAME``_iv) begin \
        automatic longint e = 0; \
        for (int k = 0; k < NN; k++) e += longint'(NAME``_t[k]); \
        NAME``_q.push_back(e); NAME``_qc.push_back(cycle); \
      end \
    end \
    always @(negedge clk) if (rst_n && NAME``_ov) begin \
      checks++; \
      if (NAME``_q.size() == 0) begin failures++; $display("FAIL %s: spurious output", `"NAME`"); end \
      else begin \
        automatic longint e = NAME``_q.pop_front(); automatic int c = NAME``_qc.pop_front(); \
        if (longint'(NAME``_s) != e || cycle - c != RR) begin \
          failures++; \
          $display("FAIL %s: sum %0d exp %0d latency %0d exp %0d", `"NAME`", NAME``_s, e, cycle - c, RR); \
        end \
      end \
    end

  `TREE_HARNESS(t12, 12, 3)
  `TREE_HARNESS(t5, 5, 2)
  `TREE_HARNESS(t2, 2, 3)

  task automatic drive();
    t12_iv <= ($urandom % 4) != 0;
    t5_iv  <= ($urandom % 3) != 0;
    t2_iv  <= ($urandom % 2) != 0;
    for (int k = 0; k < 12; k++) t12_t[k] <= W'($signed($urandom) >>> 12);
    for (int k = 0; k < 5; k++)  t5_t[k]  <= W'($signed($urandom) >>> 10);
    for (int k = 0; k < 2; k++)  t2_t[k]  <= W'($signed($urandom) >>> 9);
  endtask

  initial begin
    t12_iv = 0; t5_iv = 0; t2_iv = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // a burst of back-to-back valid cycles, then random traffic
    for (int i = 0; i < 2000; i++) begin
      @(posedge clk);
      drive();
      if (i < 20) begin t12_iv <= 1'b1; t5_iv <= 1'b1; t2_iv <= 1'b1; end
    end
    @(posedge clk);
    t12_iv <= 0; t5_iv <= 0; t2_iv <= 0;
    repeat (8) @(posedge clk);
    if (t12_q.size() || t5_q.size() || t2_q.size()) begin
      failures++;
      $display("FAIL: sums lost");
    end
    if (checks < 1000) begin failures++; $display("FAIL: too few outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
