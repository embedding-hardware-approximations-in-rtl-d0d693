// approx_layer: one fully connected layer of bespoke approximate neurons.
//
// N_OUT approx_neuron instances share the N_IN layer inputs. Neuron j takes
// its genes from GENES[j] (one gene per input: mask, sign, shift) and its
// bias from BIAS[j], the order in which the chromosome groups them.
//
// Interface: x (N_IN x X_W) in; acc (N_OUT x ACC_W signed sums) and act
// (N_OUT x A_W activations) out. Purely combinational.
//
// Follows the paper: per-neuron genes, a layer as a set of neurons.
// Own choices: none beyond those of approx_neuron.
module approx_layer
  import mlp_pkg::*;
#(
  parameter int                            N_IN        = 16,
  parameter int                            N_OUT       = 5,
  parameter int                            X_W         = 4,
  parameter int                            A_W         = 8,
  parameter int                            BIAS_W      = 8,
  parameter int                            ACC_W       = acc_width(N_IN, X_W, BIAS_W),
  parameter bit                            USE_QRELU   = 1'b1,
  parameter int                            QRELU_SHIFT = 0,
  parameter gene_t [N_OUT-1:0][N_IN-1:0]   GENES       = {N_OUT*N_IN{GENE_EXACT}},
  parameter logic  [N_OUT-1:0][BIAS_W-1:0] BIAS        = '0
) (
  input  logic [N_IN-1:0][X_W-1:0]   x,
  output logic [N_OUT-1:0][ACC_W-1:0] acc,
  output logic [N_OUT-1:0][A_W-1:0]   act
);

  for (genvar j = 0; j < N_OUT; j++) begin : g_neuron
    approx_neuron #(
      .N_IN       (N_IN),
      .X_W        (X_W),
      .A_W        (A_W),
      .BIAS_W     (BIAS_W),
      .ACC_W      (ACC_W),
      .USE_QRELU  (USE_QRELU),
      .QRELU_SHIFT(QRELU_SHIFT),
      .GENES      (GENES[j]),
      .BIAS       (BIAS[j])
    ) u_neuron (
      .x  (x),
      .acc(acc[j]),
      .act(act[j])
    );
  end

endmodule
