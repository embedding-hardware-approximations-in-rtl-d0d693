// csa_adder_tree: multi-operand adder built from full-adder 3-to-2 reduction.
//
// The reduction runs in levels, one generate block g_level[lv] per level,
// each holding the rows left after lv levels. In a level the rows are taken
// three at a time;
// each group goes through a row of full adders (sum = a ^ b ^ c, carry =
// majority(a, b, c) moved one column to the left), which turns three rows
// into two. Rows left over (one or two) pass to the next level unchanged.
// When at most two rows remain, a carry-propagate adder produces the result.
// All arithmetic is modulo 2^W, so two's complement operands add correctly as
// long as the true sum fits in W signed bits.
//
// Operand bits that are constant 0 (bits removed by a neuron's masks, or the
// empty columns of a shifted term) make their full adders degenerate, and
// logic synthesis deletes them: the number of full adders left is what the
// design's area estimate counts, column by column.
//
// Interface: ops (N_OPS x W) in, sum (W) out. Purely combinational; depth is
// about log_1.5(N_OPS) full-adder levels plus the final adder.
//
// Follows the paper: FA-only 3-to-2 reduction until two rows remain.
// Own choices: reduction on whole rows (carry-save form) rather than a
// column-wise schedule, and a plain '+' as the final adder.
module csa_adder_tree #(
  parameter int N_OPS = 17,
  parameter int W     = 16
) (
  input  logic [N_OPS-1:0][W-1:0] ops,
  output logic [W-1:0]            sum
);

  // Number of rows left after lv reduction levels.
  function automatic int rows_after(int n, int lv);
    int r = n;
    for (int t = 0; t < lv; t++)
      if (r > 2) r = 2 * (r / 3) + r % 3;
    return r;
  endfunction

  function automatic int n_levels(int n);
    int r = n;
    int c = 0;
    while (r > 2) begin
      r = 2 * (r / 3) + r % 3;
      c++;
    end
    return c;
  endfunction

  localparam int LV = n_levels(N_OPS);

  for (genvar lv = 0; lv <= LV; lv++) begin : g_level
    localparam int NC = rows_after(N_OPS, lv);
    logic [NC-1:0][W-1:0] rows;

    if (lv == 0) begin : g_in
      assign rows = ops;
    end else begin : g_reduce
      localparam int NP = rows_after(N_OPS, lv - 1);
      localparam int NG = NP / 3;    // full-adder rows in this level
      localparam int NR = NP % 3;    // rows passed through
      for (genvar g = 0; g < NG; g++) begin : g_fa_row
        logic [W-1:0] a, b, c;
        assign a = g_level[lv-1].rows[3*g];
        assign b = g_level[lv-1].rows[3*g+1];
        assign c = g_level[lv-1].rows[3*g+2];
        assign rows[2*g]   = a ^ b ^ c;
        assign rows[2*g+1] = ((a & b) | (a & c) | (b & c)) << 1;
      end
      for (genvar r = 0; r < NR; r++) begin : g_pass
        assign rows[2*NG+r] = g_level[lv-1].rows[3*NG+r];
      end
    end
  end

  if (rows_after(N_OPS, LV) >= 2) begin : g_final2
    assign sum = g_level[LV].rows[0] + g_level[LV].rows[1];
  end else begin : g_final1
    assign sum = g_level[LV].rows[0];
  end

endmodule
