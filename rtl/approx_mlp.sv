// approx_mlp: bespoke hardware-approximated MLP classifier (top level).
//
// A two-layer perceptron whose trained coefficients are built into the
// circuit. Layer 0 (N_IN inputs of 4 bits, N_HID neurons) ends in QReLU and
// produces 8-bit activations; layer 1 (N_OUT neurons) produces signed
// scores, and argmax turns them into the predicted class. No neuron holds a
// multiplier: each weight is +-2^k, realised by wiring and inverters, and
// the bit masks remove individual input bits from the full-adder trees. The
// chromosome (L0_GENES, L0_BIAS, L1_GENES, L1_BIAS) is indexed
// [neuron][input], the grouping used by the genetic training: per weight
// (mask, sign, shift), then per neuron, then per layer.
//
// Timing: the features are sampled into an input register on a clock edge
// where in_valid is high; the whole network is one combinational path from
// that register to the output register, which takes the class on the next
// edge and raises out_valid. A sample presented before edge t is therefore
// at class_out after edge t+1: one inference per clock, latency one clock
// after sampling. The clock period must cover the full path (the source
// design is timed at 200 ms, 250 ms for the Pendigits network). Reset
// (rst_n, asynchronous, active low) clears both valid flags and the
// registers. The hidden-layer sums (hid_acc) are not used beyond QReLU.
//
// Follows the paper: neuron arithmetic, QReLU with 8-bit output, 4-bit
// inputs, the Pendigits topology (16,5,10) as default. Own choices: the
// input and output registers and reset, argmax with ties to the lowest
// index, no QReLU on the output layer, QReLU shift 0, and the default
// chromosome, which is a fixed pseudo-random one (mlp_pkg) because trained
// coefficients are not published.
module approx_mlp
  import mlp_pkg::*;
#(
  parameter int                                N_IN     = DEF_N_IN,
  parameter int                                N_HID    = DEF_N_HID,
  parameter int                                N_OUT    = DEF_N_OUT,
  parameter int                                L0_SHIFT = 0,
  parameter gene_t [N_HID-1:0][N_IN-1:0]       L0_GENES = default_l0_genes(),
  parameter logic  [N_HID-1:0][BIAS_BITS-1:0]     L0_BIAS  = default_l0_bias(),
  parameter gene_t [N_OUT-1:0][N_HID-1:0]      L1_GENES = default_l1_genes(),
  parameter logic  [N_OUT-1:0][BIAS_BITS-1:0]     L1_BIAS  = default_l1_bias(),
  parameter int                                CLS_W    = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [N_IN-1:0][FEAT_W-1:0]   x_in,
  output logic                       out_valid,
  output logic [CLS_W-1:0]           class_out
);

  localparam int ACC0_W = acc_width(N_IN, FEAT_W, BIAS_BITS);
  localparam int ACC1_W = acc_width(N_HID, ACT_W, BIAS_BITS);

  logic [N_IN-1:0][FEAT_W-1:0]    x_q;
  logic                        v_q;
  logic [N_HID-1:0][ACC0_W-1:0] hid_acc;
  logic [N_HID-1:0][ACT_W-1:0]    hid_act;
  logic [N_OUT-1:0][ACC1_W-1:0] out_acc;
  logic [N_OUT-1:0][ACT_W-1:0]    out_act_unused;
  logic [CLS_W-1:0]             cls;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q       <= '0;
      v_q       <= 1'b0;
      out_valid <= 1'b0;
      class_out <= '0;
    end else begin
      if (in_valid) x_q <= x_in;
      v_q       <= in_valid;
      out_valid <= v_q;
      if (v_q) class_out <= cls;
    end
  end

  approx_layer #(
    .N_IN       (N_IN),
    .N_OUT      (N_HID),
    .X_W        (FEAT_W),
    .A_W        (ACT_W),
    .BIAS_W     (BIAS_BITS),
    .ACC_W      (ACC0_W),
    .USE_QRELU  (1'b1),
    .QRELU_SHIFT(L0_SHIFT),
    .GENES      (L0_GENES),
    .BIAS       (L0_BIAS)
  ) u_hidden (
    .x  (x_q),
    .acc(hid_acc),
    .act(hid_act)
  );

  approx_layer #(
    .N_IN       (N_HID),
    .N_OUT      (N_OUT),
    .X_W        (ACT_W),
    .A_W        (ACT_W),
    .BIAS_W     (BIAS_BITS),
    .ACC_W      (ACC1_W),
    .USE_QRELU  (1'b0),
    .QRELU_SHIFT(0),
    .GENES      (L1_GENES),
    .BIAS       (L1_BIAS)
  ) u_output (
    .x  (hid_act),
    .acc(out_acc),
    .act(out_act_unused)
  );

  argmax #(
    .N    (N_OUT),
    .W    (ACC1_W),
    .IDX_W(CLS_W)
  ) u_argmax (
    .scores(out_acc),
    .idx   (cls)
  );

endmodule
