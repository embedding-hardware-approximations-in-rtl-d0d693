// approx_neuron: bespoke hardware-approximated neuron.
//
// Computes  acc = sum_i s_i * ((x_i AND m_i) << k_i) + b  and, if USE_QRELU
// is set, act = QReLU(acc). All coefficients are parameters, so the circuit
// is specific to one trained neuron: every summand is a pow2_masked_term
// (wiring plus inverters), and one extra constant row carries the bias plus
// one '1' for every negative, non-removed summand (the missing +1 of each
// two's complement negation). The N_IN summands and the constant row are
// added by a full-adder tree (csa_adder_tree).
//
// Interface: x (N_IN x X_W unsigned) in; acc (ACC_W signed sum) and act
// (A_W-bit activation, 0 when USE_QRELU = 0) out. Purely combinational.
//
// Follows the paper: the neuron equation, hard-wired pow2 weights and
// masks, the folded negation constant and the FA reduction. Own choices:
// bias width BIAS_W and its alignment at the least significant bit, and the
// accumulator width, which is sized so no sum can overflow.
module approx_neuron
  import mlp_pkg::*;
#(
  parameter int                    N_IN        = 16,
  parameter int                    X_W         = 4,
  parameter int                    A_W         = 8,
  parameter int                    BIAS_W      = 8,
  parameter int                    ACC_W       = acc_width(N_IN, X_W, BIAS_W),
  parameter bit                    USE_QRELU   = 1'b1,
  parameter int                    QRELU_SHIFT = 0,
  parameter gene_t [N_IN-1:0]      GENES       = {N_IN{GENE_EXACT}},
  parameter logic [BIAS_W-1:0]     BIAS        = '0
) (
  input  logic [N_IN-1:0][X_W-1:0] x,
  output logic [ACC_W-1:0]         acc,
  output logic [A_W-1:0]           act
);

  // Number of negative summands that are not removed by a zero mask.
  function automatic int count_neg();
    int n = 0;
    for (int i = 0; i < N_IN; i++)
      if (GENES[i].neg && (GENES[i].m[X_W-1:0] != '0)) n++;
    return n;
  endfunction

  localparam logic [ACC_W-1:0] KCONST =
      ACC_W'($signed(BIAS)) + ACC_W'(count_neg());

  logic [N_IN:0][ACC_W-1:0] ops;

  for (genvar i = 0; i < N_IN; i++) begin : g_term
    pow2_masked_term #(
      .X_W  (X_W),
      .ACC_W(ACC_W),
      .GENE (GENES[i])
    ) u_term (
      .x   (x[i]),
      .term(ops[i])
    );
  end
  assign ops[N_IN] = KCONST;

  csa_adder_tree #(
    .N_OPS(N_IN + 1),
    .W    (ACC_W)
  ) u_tree (
    .ops(ops),
    .sum(acc)
  );

  if (USE_QRELU) begin : g_qrelu
    qrelu #(
      .IN_W (ACC_W),
      .OUT_W(A_W),
      .SHIFT(QRELU_SHIFT)
    ) u_qrelu (
      .acc(acc),
      .act(act)
    );
  end else begin : g_no_qrelu
    assign act = '0;
  end

endmodule
