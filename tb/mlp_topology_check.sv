// mlp_topology_check: testbench helper that builds approx_mlp for one MLP
// topology (N_IN, N_HID, N_OUT) with a pseudo-random chromosome derived from
// SEED, streams N_SAMPLES random samples through it back to back, and
// compares every class with the integer reference model. It reports its
// counts on checks/failures and raises done when finished.
module mlp_topology_check
  import mlp_pkg::*;
  import mlp_ref_pkg::*;
#(
  parameter int N_IN      = 10,
  parameter int N_HID     = 3,
  parameter int N_OUT     = 2,
  parameter int SEED      = 1,
  parameter int N_SAMPLES = 500
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int CLS_W = (N_OUT > 1) ? $clog2(N_OUT) : 1;

  function automatic gene_t [N_HID-1:0][N_IN-1:0] mk_g0();
    gene_t [N_HID-1:0][N_IN-1:0] g;
    for (int j = 0; j < N_HID; j++)
      for (int i = 0; i < N_IN; i++) g[j][i] = default_gene(2 * SEED, j, i, FEAT_W);
    return g;
  endfunction
  function automatic gene_t [N_OUT-1:0][N_HID-1:0] mk_g1();
    gene_t [N_OUT-1:0][N_HID-1:0] g;
    for (int j = 0; j < N_OUT; j++)
      for (int i = 0; i < N_HID; i++) g[j][i] = default_gene(2 * SEED + 1, j, i, ACT_W);
    return g;
  endfunction
  function automatic logic [N_HID-1:0][BIAS_BITS-1:0] mk_b0();
    logic [N_HID-1:0][BIAS_BITS-1:0] b;
    for (int j = 0; j < N_HID; j++) b[j] = default_bias(2 * SEED, j);
    return b;
  endfunction
  function automatic logic [N_OUT-1:0][BIAS_BITS-1:0] mk_b1();
    logic [N_OUT-1:0][BIAS_BITS-1:0] b;
    for (int j = 0; j < N_OUT; j++) b[j] = default_bias(2 * SEED + 1, j);
    return b;
  endfunction

  localparam gene_t [N_HID-1:0][N_IN-1:0]          G0 = mk_g0();
  localparam gene_t [N_OUT-1:0][N_HID-1:0]         G1 = mk_g1();
  localparam logic  [N_HID-1:0][BIAS_BITS-1:0]     B0 = mk_b0();
  localparam logic  [N_OUT-1:0][BIAS_BITS-1:0]     B1 = mk_b1();

  logic in_valid;
  logic [N_IN-1:0][FEAT_W-1:0] x_in;
  logic out_valid;
  logic [CLS_W-1:0] class_out;
  int exp_q[$];

  approx_mlp #(
    .N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT),
    .L0_GENES(G0), .L0_BIAS(B0), .L1_GENES(G1), .L1_BIAS(B1)
  ) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x_in(x_in),
    .out_valid(out_valid), .class_out(class_out)
  );

  function automatic int model(logic [N_IN-1:0][FEAT_W-1:0] x);
    int xs[], hs[];
    gene_t gs0[], gs1[];
    longint sc[];
    xs = new[N_IN]; hs = new[N_HID]; gs0 = new[N_IN]; gs1 = new[N_HID]; sc = new[N_OUT];
    for (int i = 0; i < N_IN; i++) xs[i] = int'(x[i]);
    for (int j = 0; j < N_HID; j++) begin
      for (int i = 0; i < N_IN; i++) gs0[i] = G0[j][i];
      hs[j] = ref_qrelu(ref_neuron(xs, gs0, int'($signed(B0[j])), FEAT_W), 0, ACT_W);
    end
    for (int j = 0; j < N_OUT; j++) begin
      for (int i = 0; i < N_HID; i++) gs1[i] = G1[j][i];
      sc[j] = ref_neuron(hs, gs1, int'($signed(B1[j])), ACT_W);
    end
    return ref_argmax(sc);
  endfunction

  always @(posedge clk)
    if (rst_n && in_valid) exp_q.push_back(model(x_in));

  always @(negedge clk)
    if (rst_n && out_valid) begin
      int e;
      checks++;
      if (exp_q.size() == 0) failures++;
      else begin
        e = exp_q.pop_front();
        if (int'(class_out) != e) failures++;
      end
    end

  initial begin
    done = 1'b0;
    checks = 0;
    failures = 0;
    in_valid = 1'b0;
    x_in = '0;
    @(posedge rst_n);
    for (int k = 0; k < N_SAMPLES; k++) begin
      @(negedge clk);
      in_valid = 1'b1;
      for (int i = 0; i < N_IN; i++)
        x_in[i] = ($urandom_range(0, 5) < k % 6) ? FEAT_W'($urandom_range(0, 15)) : '0;
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (3) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    done = 1'b1;
  end

endmodule
