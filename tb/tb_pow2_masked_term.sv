// tb_pow2_masked_term: exhaustive check of the multiplier-free summand.
//
// Five instances cover a positive weight with a partial mask, a negative
// weight with a shift (the example gene of the chromosome figure: m = 1001,
// s = -1, k = 3), a zero mask with negative sign, the largest shift with a
// full mask, and an 8-bit input. Every input value is applied; a positive
// term must equal (x AND m) * 2^k, a negative one plus 1 must equal the
// negated product modulo 2^ACC_W, and a zero mask must give 0.
module tb_pow2_masked_term;
  import mlp_pkg::*;

  localparam int ACC_W = 16;
  localparam int NI = 5;
  localparam gene_t G0 = '{m: 8'b0000_1011, neg: 1'b0, k: 3'd2};
  localparam gene_t G1 = '{m: 8'b0000_1001, neg: 1'b1, k: 3'd3};
  localparam gene_t G2 = '{m: 8'b0000_0000, neg: 1'b1, k: 3'd5};
  localparam gene_t G3 = '{m: 8'b0000_1111, neg: 1'b0, k: 3'd6};
  localparam gene_t G4 = '{m: 8'b1011_0110, neg: 1'b1, k: 3'd1};

  int checks = 0, failures = 0;
  logic [3:0] x4;
  logic [7:0] x8;
  logic [ACC_W-1:0] t [NI];

  pow2_masked_term #(.X_W(4), .ACC_W(ACC_W), .GENE(G0)) u0 (.x(x4), .term(t[0]));
  pow2_masked_term #(.X_W(4), .ACC_W(ACC_W), .GENE(G1)) u1 (.x(x4), .term(t[1]));
  pow2_masked_term #(.X_W(4), .ACC_W(ACC_W), .GENE(G2)) u2 (.x(x4), .term(t[2]));
  pow2_masked_term #(.X_W(4), .ACC_W(ACC_W), .GENE(G3)) u3 (.x(x4), .term(t[3]));
  pow2_masked_term #(.X_W(8), .ACC_W(ACC_W), .GENE(G4)) u4 (.x(x8), .term(t[4]));

  task automatic check_term(int idx, int x, gene_t g, int x_w);
    int m = int'(g.m) & ((1 << x_w) - 1);
    int v = (x & m) * (1 << g.k);
    int got = int'(t[idx]);
    int exp_val;
    if (m == 0) exp_val = 0;
    else if (g.neg) exp_val = ((1 << ACC_W) - v - 1) % (1 << ACC_W);
    else exp_val = v;
    checks++;
    if (got != exp_val) begin
      failures++;
      $display("FAIL term%0d x=%0d got=%0h exp=%0h", idx, x, got, exp_val);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 256; x++) begin
      x4 = 4'(x);
      x8 = 8'(x);
      #1;
      if (x < 16) begin
        check_term(0, x, G0, 4);
        check_term(1, x, G1, 4);
        check_term(2, x, G2, 4);
        check_term(3, x, G3, 4);
      end
      check_term(4, x, G4, 8);
    end
    // the figure's example: x = 1111 keeps bits 3 and 0, shifted by 3
    x4 = 4'b1111;
    #1;
    checks++;
    if (t[1] != ~(ACC_W'(9) << 3)) begin
      failures++;
      $display("FAIL figure example");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
