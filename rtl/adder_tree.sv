// adder_tree: pipelined sum of N signed terms, one new set of terms per cycle.
//
// Level l of the tree adds pairs of level l-1 (an odd last element passes on
// unchanged), so there are ceil(log2 N) levels. REGS pipeline registers are spread
// evenly over those levels, a register following level l when floor(l*R/L) steps up
// (R = min(REGS, L)); if REGS exceeds the number of levels, the surplus registers
// follow the last level as plain delay. The sum is therefore valid exactly REGS
// cycles after its terms, with out_valid marking it. Data registers load only on a
// valid cycle; only the valid bits are reset.
//
// The caller makes W wide enough for the sum (the terms sign-extended by
// ceil(log2 N) bits). The paper states only that the network is fully parallel
// (reuse factor 1) with a 35-cycle pipeline; the tree and its register placement
// are this design's own.
module adder_tree #(
  parameter int N    = 12,
  parameter int W    = 32,
  parameter int REGS = 3
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] terms [N],
  output logic                out_valid,
  output logic signed [W-1:0] sum
);

  localparam int L  = (N <= 1) ? 0 : $clog2(N);
  localparam int RT = (REGS < L) ? REGS : L;    // registers placed inside the tree
  localparam int RX = REGS - RT;                // surplus delay registers at the end

  // element count of level l
  function automatic int cnt(int l);
    int c = N;
    for (int k = 0; k < l; k++) c = (c + 1) / 2;
    return c;
  endfunction

  // whether a register follows level l (1..L)
  function automatic bit reg_after(int l);
    return (L > 0) && ((l * RT) / L != ((l - 1) * RT) / L);
  endfunction

  for (genvar l = 0; l <= L; l++) begin : lvl
    localparam int C = cnt(l);
    logic signed [W-1:0] v [C];
    logic                vld;

    if (l == 0) begin : g_in
      assign v   = terms;
      assign vld = in_valid;
    end else begin : g_add
      localparam int CP = cnt(l - 1);
      logic signed [W-1:0] s [C];
      always_comb begin
        for (int j = 0; j < C; j++) begin
          if (2*j + 1 < CP) s[j] = lvl[l-1].v[2*j] + lvl[l-1].v[2*j+1];
          else              s[j] = lvl[l-1].v[2*j];
        end
      end
      if (reg_after(l)) begin : g_reg
        always_ff @(posedge clk) begin
          if (!rst_n) vld <= 1'b0;
          else        vld <= lvl[l-1].vld;
        end
        always_ff @(posedge clk) begin
          if (lvl[l-1].vld) v <= s;
        end
      end else begin : g_wire
        assign v   = s;
        assign vld = lvl[l-1].vld;
      end
    end
  end

  // surplus delay registers
  for (genvar d = 0; d <= RX; d++) begin : dly
    logic signed [W-1:0] v;
    logic                vld;
    if (d == 0) begin : g_src
      assign v   = lvl[L].v[0];
      assign vld = lvl[L].vld;
    end else begin : g_reg
      always_ff @(posedge clk) begin
        if (!rst_n) vld <= 1'b0;
        else        vld <= dly[d-1].vld;
      end
      always_ff @(posedge clk) begin
        if (dly[d-1].vld) v <= dly[d-1].v;
      end
    end
  end

  assign sum       = dly[RX].v;
  assign out_valid = dly[RX].vld;

endmodule
