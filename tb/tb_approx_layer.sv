// tb_approx_layer: random check of a layer of 6 inputs (8-bit) and 4
// neurons with QReLU shift 2, each neuron with its own pseudo-random genes
// and bias, against the integer reference model. A wrong gene-to-neuron
// assignment or shared genes show up as mismatches.
module tb_approx_layer;
  import mlp_pkg::*;
  import mlp_ref_pkg::*;

  localparam int NI = 6;
  localparam int NO = 4;
  localparam int W  = acc_width(NI, 8, 8);

  function automatic gene_t [NO-1:0][NI-1:0] mk_genes();
    gene_t [NO-1:0][NI-1:0] g;
    for (int j = 0; j < NO; j++)
      for (int i = 0; i < NI; i++) g[j][i] = default_gene(5, j, i, 8);
    return g;
  endfunction

  function automatic logic [NO-1:0][7:0] mk_bias();
    logic [NO-1:0][7:0] b;
    for (int j = 0; j < NO; j++) b[j] = default_bias(5, j);
    return b;
  endfunction

  localparam gene_t [NO-1:0][NI-1:0] G = mk_genes();
  localparam logic  [NO-1:0][7:0]    B = mk_bias();

  int checks = 0, failures = 0;
  logic [NI-1:0][7:0] x;
  logic [NO-1:0][W-1:0] acc;
  logic [NO-1:0][7:0] act;

  approx_layer #(.N_IN(NI), .N_OUT(NO), .X_W(8), .QRELU_SHIFT(2), .GENES(G), .BIAS(B))
    dut (.x(x), .acc(acc), .act(act));

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xs[];
    gene_t gs[];
    longint e;
    xs = new[NI];
    gs = new[NI];
    for (int it = 0; it < 3000; it++) begin
      for (int i = 0; i < NI; i++) begin
        xs[i] = (it % 3 == 0) ? $urandom_range(0, 15) : $urandom_range(0, 255);
        x[i] = 8'(xs[i]);
      end
      #1;
      for (int j = 0; j < NO; j++) begin
        for (int i = 0; i < NI; i++) gs[i] = G[j][i];
        e = ref_neuron(xs, gs, int'($signed(B[j])), 8);
        checks += 2;
        if (longint'($signed(acc[j])) != e || int'(act[j]) != ref_qrelu(e, 2, 8)) begin
          failures++;
          if (failures < 20) $display("FAIL it=%0d neuron=%0d acc=%0d exp=%0d", it, j, $signed(acc[j]), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
