// tb_requant_act: checks requant_act against the reference arithmetic, for a ReLU
// (hidden-layer) and a linear (output-layer) instance, on directed edge values and
// random sums. Combinational block: every check is taken 1 ns after the input.
module tb_requant_act;
  import mlp_ref_pkg::*;

  localparam int IN_W = 32, SHIFT = 8, OUT_W = 10;

  logic signed [IN_W-1:0]  acc;
  logic signed [OUT_W-1:0] y_r, y_l;
  logic sat_r, clamp_r, sat_l, clamp_l;
  int checks = 0, failures = 0;
  int n_sat = 0, n_clamp = 0;

  requant_act #(.IN_W(IN_W), .SHIFT(SHIFT), .OUT_W(OUT_W), .RELU(1'b1)) dut_relu (
    .acc(acc), .y(y_r), .sat(sat_r), .clamp(clamp_r));
  requant_act #(.IN_W(IN_W), .SHIFT(SHIFT), .OUT_W(OUT_W), .RELU(1'b0)) dut_lin (
    .acc(acc), .y(y_l), .sat(sat_l), .clamp(clamp_l));

  task automatic check(longint a);
    bit es, ec;
    longint e;
    acc = IN_W'(a);
    #1;
    e = requant(longint'(acc), SHIFT, OUT_W, 1'b1, es, ec);
    checks++;
    if (longint'(y_r) != e || sat_r != es || clamp_r != ec) begin
      failures++;
      $display("FAIL relu acc=%0d y=%0d sat=%0b clamp=%0b exp %0d %0b %0b",
               acc, y_r, sat_r, clamp_r, e, es, ec);
    end
    n_sat += es; n_clamp += ec;
    e = requant(longint'(acc), SHIFT, OUT_W, 1'b0, es, ec);
    checks++;
    if (longint'(y_l) != e || sat_l != es || clamp_l != ec) begin
      failures++;
      $display("FAIL lin acc=%0d y=%0d sat=%0b clamp=%0b exp %0d %0b %0b",
               acc, y_l, sat_l, clamp_l, e, es, ec);
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
    // edges: around zero, around the positive and negative limits
    automatic longint lim = longint'(1) << (OUT_W - 1 + SHIFT);
    for (longint d = -3; d <= 3; d++) begin
      check(d);
      check(lim + d);
      check(-lim + d);
      check((longint'(1) << SHIFT) + d);
      check(-(longint'(1) << SHIFT) + d);
    end
    check(longint'(1) <<< (IN_W - 2));
    check(-(longint'(1) <<< (IN_W - 1)));
    for (int i = 0; i < 4000; i++) begin
      automatic longint a = sext({$urandom, $urandom}, IN_W);
      if (i % 2) a = floor_div_pow2(a, 12 + ($urandom % 12));
      check(a);
    end
    if (n_sat == 0 || n_clamp == 0) begin
      failures++;
      $display("FAIL: saturation or clamping never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
