// pow2_masked_term: one multiplier-free summand of a bespoke approximate neuron.
//
// The weight of the summand is w = s * 2^k and is fixed at design time, so
// the product x * w needs no multiplier: the masked input (x AND m) is placed
// k columns to the left, which is only wiring. Input bits whose mask bit is 0
// are tied to constant 0 and vanish from the adder tree after synthesis. For
// s = -1 the shifted value is bitwise inverted; the +1 that would complete
// the two's complement negation is not added here but folded, together with
// the bias, into the neuron's single constant row (see approx_neuron). A zero
// mask removes the summand completely: the output is then 0 and the neuron
// counts no +1 for it.
//
// Interface: x (X_W-bit unsigned activation) in, term (ACC_W bits, to be
// summed modulo 2^ACC_W) out. Purely combinational, no clock.
//
// Follows the paper: pow2 weights, bit masks applied as x AND m, inversion
// plus folded constant for negative weights, removal on a zero mask.
// Own choices: the gene encoding (see mlp_pkg) and the accumulator width.
module pow2_masked_term
  import mlp_pkg::*;
#(
  parameter int    X_W   = 4,
  parameter int    ACC_W = 16,
  parameter gene_t GENE  = GENE_EXACT
) (
  input  logic [X_W-1:0]   x,
  output logic [ACC_W-1:0] term
);

  localparam logic [X_W-1:0] M = GENE.m[X_W-1:0];

  if (X_W + K_MAX > ACC_W) begin : g_width_check
    $error("pow2_masked_term: ACC_W too small for X_W + K_MAX");
  end

  logic [ACC_W-1:0] shifted;

  always_comb begin
    shifted = ACC_W'(x & M) << GENE.k;
    if (M == '0)
      term = '0;
    else if (GENE.neg)
      term = ~shifted;
    else
      term = shifted;
  end

endmodule
