// mlp_pkg: types, constants and elaboration-time helpers shared by the
// approximate printed MLP.
//
// A weight is a power of two with a sign, w = s * 2^k, and every weight has a
// bit mask m that decides which bits of its input activation reach the adder.
// gene_t packs these three values (m, s, k) in the order of the chromosome:
// mask, sign, shift. The widths follow the design's number formats: 4-bit
// input features, 8-bit QReLU activations (so masks are at most 8 bits wide)
// and k in [0, n-1) for n = 8 weight bits, i.e. k = 0..6.
//
// The encoding of the sign as a single bit (neg = 1 means s = -1), the bias
// width and the default chromosome are this design's choices. No trained
// coefficients are published for the evaluated data sets, so the default
// chromosome is a fixed pseudo-random one produced by default_gene() and
// default_bias() below; a trained chromosome is loaded by overriding the
// top-level parameters.
package mlp_pkg;

  localparam int FEAT_W  = 4;   // input feature width
  localparam int ACT_W   = 8;   // QReLU activation width
  localparam int W_BITS  = 8;   // weight bits n; k lies in [0, n-1)
  localparam int K_MAX   = W_BITS - 2;  // largest shift, 6
  localparam int K_W     = 3;   // bits of the k field
  localparam int MASK_W  = ACT_W; // mask field, wide enough for either layer
  localparam int BIAS_BITS = 8; // signed bias width

  // Default topology: Pendigits, (16,5,10).
  localparam int DEF_N_IN  = 16;
  localparam int DEF_N_HID = 5;
  localparam int DEF_N_OUT = 10;

  typedef struct packed {
    logic [MASK_W-1:0] m;    // 1 keeps an input bit, 0 removes it
    logic              neg;  // 1: s = -1, 0: s = +1
    logic [K_W-1:0]    k;    // left shift (weight magnitude 2^k)
  } gene_t;

  localparam int GENE_W = $bits(gene_t);

  // Exact pass-through weight: all bits kept, s = +1, k = 0.
  localparam gene_t GENE_EXACT = '{m: '1, neg: 1'b0, k: '0};

  // Width of a signed accumulator able to hold any sum of n_in terms of
  // x_w-bit inputs shifted by up to K_MAX, plus a bias_w-bit bias.
  function automatic int acc_width(int n_in, int x_w, int bias_w);
    longint maxmag;
    maxmag = longint'(n_in) * ((longint'(1) << x_w) - 1) * (longint'(1) << K_MAX)
           + (longint'(1) << (bias_w - 1));
    return $clog2(maxmag + 1) + 1;
  endfunction

  // Hash used to derive the default chromosome.
  function automatic logic [31:0] gene_hash(int layer, int neuron, int inp);
    logic [31:0] h;
    h = 32'(layer) * 32'd1000003 + 32'(neuron) * 32'd7919 + 32'(inp) * 32'd104729 + 32'd12345;
    h = h ^ (h >> 13);
    h = h * 32'h5bd1e995;
    h = h ^ (h >> 15);
    h = h * 32'h27d4eb2d;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Default gene of input inp of neuron of layer (layer 0 has x_w = 4 bit
  // inputs, layer 1 has 8 bit inputs). About one mask in eight is zero (the
  // summand is removed) and one in eight keeps every bit.
  function automatic gene_t default_gene(int layer, int neuron, int inp, int x_w);
    logic [31:0] h;
    gene_t g;
    logic [MASK_W-1:0] width_mask;
    h = gene_hash(layer, neuron, inp);
    width_mask = MASK_W'((1 << x_w) - 1);
    g.m   = (h[7:0] ^ h[23:16]) & width_mask;
    if (h[30:28] == 3'd0) g.m = '0;
    if (h[30:28] == 3'd1) g.m = width_mask;
    g.neg = h[11] ^ h[31] ^ h[27];
    g.k   = K_W'((h[26:24] ^ h[10:8]) % 3'(K_MAX + 1));
    if (h[15:12] == 4'hf) g.k = K_W'(K_MAX);
    return g;
  endfunction

  function automatic logic [BIAS_BITS-1:0] default_bias(int layer, int neuron);
    logic [31:0] h;
    h = gene_hash(layer, neuron, 99);
    return h[7:0] ^ h[15:8] ^ h[23:16] ^ h[31:24];
  endfunction

  function automatic logic [DEF_N_HID-1:0][DEF_N_IN-1:0][GENE_W-1:0] default_l0_genes();
    logic [DEF_N_HID-1:0][DEF_N_IN-1:0][GENE_W-1:0] g;
    for (int j = 0; j < DEF_N_HID; j++)
      for (int i = 0; i < DEF_N_IN; i++)
        g[j][i] = default_gene(0, j, i, FEAT_W);
    return g;
  endfunction

  function automatic logic [DEF_N_OUT-1:0][DEF_N_HID-1:0][GENE_W-1:0] default_l1_genes();
    logic [DEF_N_OUT-1:0][DEF_N_HID-1:0][GENE_W-1:0] g;
    for (int j = 0; j < DEF_N_OUT; j++)
      for (int i = 0; i < DEF_N_HID; i++)
        g[j][i] = default_gene(1, j, i, ACT_W);
    return g;
  endfunction

  function automatic logic [DEF_N_HID-1:0][BIAS_BITS-1:0] default_l0_bias();
    logic [DEF_N_HID-1:0][BIAS_BITS-1:0] b;
    for (int j = 0; j < DEF_N_HID; j++) b[j] = default_bias(0, j);
    return b;
  endfunction

  function automatic logic [DEF_N_OUT-1:0][BIAS_BITS-1:0] default_l1_bias();
    logic [DEF_N_OUT-1:0][BIAS_BITS-1:0] b;
    for (int j = 0; j < DEF_N_OUT; j++) b[j] = default_bias(1, j);
    return b;
  endfunction

endpackage
