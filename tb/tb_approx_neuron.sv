// tb_approx_neuron: random check of the bespoke approximate neuron.
//
// Three neurons are built: a 16-input hidden-layer neuron (4-bit inputs,
// QReLU, pseudo-random genes), a 3-input neuron made of the chromosome
// figure's example genes (m = 1001, s = -1, k = 3, bias +010100) plus two
// more, and a 5-input output-layer neuron (8-bit inputs, no QReLU, shift 2
// when QReLU is on is checked on a fourth instance). Sums and activations are
// compared with the integer reference model. The test also requires that
// negative summands, partial masks, removed summands, and QReLU clipping at
// both ends each occurred.
module tb_approx_neuron;
  import mlp_pkg::*;
  import mlp_ref_pkg::*;

  localparam int NA = 16;
  localparam int NC = 5;

  function automatic gene_t [NA-1:0] genes_a();
    gene_t [NA-1:0] g;
    for (int i = 0; i < NA; i++) g[i] = default_gene(7, 1, i, 4);
    g[5].m = 8'h00;                                  // removed summand
    g[2] = '{m: 8'h0f, neg: 1'b0, k: 3'd6};          // large positive weights
    g[3] = '{m: 8'h0f, neg: 1'b0, k: 3'd6};
    return g;
  endfunction

  function automatic gene_t [NC-1:0] genes_c();
    gene_t [NC-1:0] g;
    for (int i = 0; i < NC; i++) g[i] = default_gene(8, 2, i, 8);
    g[0].neg = 1'b1;
    g[1].m = 8'hff;
    return g;
  endfunction

  localparam gene_t [NA-1:0] GA = genes_a();
  localparam gene_t [2:0]    GB = '{'{m: 8'b0000_0101, neg: 1'b0, k: 3'd0},
                                    '{m: 8'b0000_1101, neg: 1'b0, k: 3'd1},
                                    '{m: 8'b0000_1001, neg: 1'b1, k: 3'd3}};
  localparam gene_t [NC-1:0] GC = genes_c();
  localparam logic [7:0] BA = 8'd37;
  localparam logic [7:0] BB = 8'b0001_0100;
  localparam logic [7:0] BC = 8'hb3;            // -77

  localparam int WA = acc_width(NA, 4, 8);
  localparam int WB = acc_width(3, 4, 8);
  localparam int WC = acc_width(NC, 8, 8);

  int checks = 0, failures = 0;
  int n_lo = 0, n_hi = 0, n_mid = 0;

  logic [NA-1:0][3:0] xa;
  logic [2:0][3:0]    xb;
  logic [NC-1:0][7:0] xc;
  logic [WA-1:0] acc_a;  logic [7:0] act_a;
  logic [WB-1:0] acc_b;  logic [7:0] act_b;
  logic [WC-1:0] acc_c;  logic [7:0] act_c;
  logic [WC-1:0] acc_d;  logic [7:0] act_d;

  approx_neuron #(.N_IN(NA), .X_W(4), .GENES(GA), .BIAS(BA)) ua (.x(xa), .acc(acc_a), .act(act_a));
  approx_neuron #(.N_IN(3),  .X_W(4), .GENES(GB), .BIAS(BB)) ub (.x(xb), .acc(acc_b), .act(act_b));
  approx_neuron #(.N_IN(NC), .X_W(8), .GENES(GC), .BIAS(BC), .USE_QRELU(1'b0))
    uc (.x(xc), .acc(acc_c), .act(act_c));
  approx_neuron #(.N_IN(NC), .X_W(8), .GENES(GC), .BIAS(BC), .QRELU_SHIFT(2))
    ud (.x(xc), .acc(acc_d), .act(act_d));

  task automatic chk(string name, longint got, longint exp_val);
    checks++;
    if (got != exp_val) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0d exp=%0d", name, got, exp_val);
    end
  endtask

  task automatic count_act(int a);
    if (a == 0) n_lo++;
    else if (a == 255) n_hi++;
    else n_mid++;
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int x_a[], x_b[], x_c[];
    gene_t g_a[], g_b[], g_c[];
    longint e;
    x_a = new[NA]; x_b = new[3]; x_c = new[NC];
    g_a = new[NA]; g_b = new[3]; g_c = new[NC];
    for (int i = 0; i < NA; i++) g_a[i] = GA[i];
    for (int i = 0; i < 3; i++)  g_b[i] = GB[i];
    for (int i = 0; i < NC; i++) g_c[i] = GC[i];
    for (int it = 0; it < 4000; it++) begin
      int density;
      density = it % 5;        // 0: all zero ... 4: dense
      for (int i = 0; i < NA; i++) begin
        x_a[i] = ($urandom_range(0, 3) < density) ? $urandom_range(0, 15) : 0;
        if (density == 1) x_a[i] = x_a[i] % 4;
        xa[i] = 4'(x_a[i]);
      end
      for (int i = 0; i < 3; i++) begin
        x_b[i] = (it < 16) ? it : $urandom_range(0, 15);
        xb[i] = 4'(x_b[i]);
      end
      for (int i = 0; i < NC; i++) begin
        x_c[i] = ($urandom_range(0, 3) < density) ? $urandom_range(0, 255) : 0;
        xc[i] = 8'(x_c[i]);
      end
      #1;
      e = ref_neuron(x_a, g_a, int'($signed(BA)), 4);
      chk("a.acc", longint'($signed(acc_a)), e);
      chk("a.act", act_a, ref_qrelu(e, 0, 8));
      count_act(ref_qrelu(e, 0, 8));
      e = ref_neuron(x_b, g_b, int'($signed(BB)), 4);
      chk("b.acc", longint'($signed(acc_b)), e);
      chk("b.act", act_b, ref_qrelu(e, 0, 8));
      count_act(ref_qrelu(e, 0, 8));
      e = ref_neuron(x_c, g_c, int'($signed(BC)), 8);
      chk("c.acc", longint'($signed(acc_c)), e);
      chk("c.act", act_c, 0);
      chk("d.acc", longint'($signed(acc_d)), e);
      chk("d.act", act_d, ref_qrelu(e, 2, 8));
    end
    $display("events: neg=%0d partial=%0d removed=%0d shifted=%0d qrelu0=%0d qrelu255=%0d mid=%0d",
             n_neg_terms, n_partial_mask, n_zero_removed, n_shifted, n_lo, n_hi, n_mid);
    checks++;
    if (n_neg_terms == 0 || n_partial_mask == 0 || n_zero_removed == 0 || n_shifted == 0 ||
        n_lo == 0 || n_hi == 0 || n_mid == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
