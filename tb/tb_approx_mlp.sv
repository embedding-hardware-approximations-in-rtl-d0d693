// tb_approx_mlp: end-to-end test of the MLP classifier at its default size
// (Pendigits topology 16-5-10, default chromosome, no parameter overrides).
//
// A stream of samples is sent with random idle cycles between them, with
// input densities from all-zero to dense so that hidden neurons are seen
// clipped at 0, saturated at 255 and in between. For every accepted sample
// the integer reference model computes the class; the result must appear
// exactly one clock after the sampling edge (out_valid on the following
// edge) and in order. A reset in the middle of the stream must clear
// out_valid and drop the sample in flight. At the end the test requires that
// each approximation mechanism occurred: a negative summand, a partial mask,
// a removed summand, a shifted summand, QReLU at 0, at 255 and in range,
// back-to-back samples, idle cycles, and the mid-stream reset.
module tb_approx_mlp;
  import mlp_pkg::*;
  import mlp_ref_pkg::*;

  localparam int NI = DEF_N_IN;
  localparam int NH = DEF_N_HID;
  localparam int NO = DEF_N_OUT;
  localparam int N_SAMPLES = 3000;

  localparam gene_t [NH-1:0][NI-1:0] G0 = default_l0_genes();
  localparam gene_t [NO-1:0][NH-1:0] G1 = default_l1_genes();
  localparam logic  [NH-1:0][BIAS_BITS-1:0] B0 = default_l0_bias();
  localparam logic  [NO-1:0][BIAS_BITS-1:0] B1 = default_l1_bias();

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [NI-1:0][FEAT_W-1:0] x_in = '0;
  logic out_valid;
  logic [3:0] class_out;

  approx_mlp dut (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .x_in     (x_in),
    .out_valid(out_valid),
    .class_out(class_out)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int unsigned cycle = 0;
  int exp_q[$];
  int unsigned cyc_q[$];
  int n_in = 0, n_out = 0;
  int n_q0 = 0, n_q255 = 0, n_qmid = 0, n_b2b = 0, n_idle = 0, n_reset = 0, n_ties = 0;
  int class_seen[NO];
  logic prev_valid = 1'b0;

  function automatic int model(logic [NI-1:0][FEAT_W-1:0] x);
    int xs[], hs[];
    gene_t gs0[], gs1[];
    longint sc[];
    longint e;
    int best_cnt;
    xs = new[NI]; hs = new[NH]; gs0 = new[NI]; gs1 = new[NH]; sc = new[NO];
    for (int i = 0; i < NI; i++) xs[i] = int'(x[i]);
    for (int j = 0; j < NH; j++) begin
      for (int i = 0; i < NI; i++) gs0[i] = G0[j][i];
      e = ref_neuron(xs, gs0, int'($signed(B0[j])), FEAT_W);
      hs[j] = ref_qrelu(e, 0, ACT_W);
      if (hs[j] == 0) n_q0++;
      else if (hs[j] == 255) n_q255++;
      else n_qmid++;
    end
    for (int j = 0; j < NO; j++) begin
      for (int i = 0; i < NH; i++) gs1[i] = G1[j][i];
      sc[j] = ref_neuron(hs, gs1, int'($signed(B1[j])), ACT_W);
    end
    best_cnt = 0;
    for (int j = 0; j < NO; j++) if (sc[j] == sc[ref_argmax(sc)]) best_cnt++;
    if (best_cnt > 1) n_ties++;
    return ref_argmax(sc);
  endfunction

  // Sampling edge: record what the design accepts.
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && in_valid) begin
      exp_q.push_back(model(x_in));
      cyc_q.push_back(cycle);
      n_in++;
      if (prev_valid) n_b2b++;
    end
    if (rst_n && !in_valid) n_idle++;
    prev_valid <= in_valid && rst_n;
  end

  // Check outputs half a cycle after each edge.
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL out_valid with nothing in flight at cycle %0d", cycle);
      end else begin
        int e;
        int unsigned c;
        e = exp_q.pop_front();
        c = cyc_q.pop_front();
        n_out++;
        class_seen[e]++;
        if (int'(class_out) != e) begin
          failures++;
          if (failures < 20) $display("FAIL class got=%0d exp=%0d", class_out, e);
        end
        checks++;
        if (cycle - c != 2) begin   // 'cycle' already counts the output edge
          failures++;
          if (failures < 20) $display("FAIL latency %0d cycles", cycle - c - 1);
        end
      end
    end
  end

  initial begin
    #(10 * (N_SAMPLES * 4 + 200));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic drive_sample(int k);
    int density;
    density = k % 6;
    for (int i = 0; i < NI; i++) begin
      if (density == 0) x_in[i] = '0;
      else if (density == 1) x_in[i] = FEAT_W'($urandom_range(0, 2));
      else if ($urandom_range(0, 4) < density) x_in[i] = FEAT_W'($urandom_range(0, 15));
      else x_in[i] = '0;
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    checks++;
    if (out_valid !== 1'b0) begin
      failures++;
      $display("FAIL out_valid during reset");
    end
    rst_n = 1'b1;
    for (int k = 0; k < N_SAMPLES; k++) begin
      @(negedge clk);
      if (k == N_SAMPLES / 2) begin
        // mid-stream reset: the sample accepted on the last edge is dropped
        in_valid = 1'b1;
        drive_sample(k);
        @(negedge clk);
        in_valid = 1'b0;
        rst_n = 1'b0;
        #1;
        checks++;
        if (out_valid !== 1'b0) begin
          failures++;
          $display("FAIL out_valid not cleared by reset");
        end
        exp_q.delete();
        cyc_q.delete();
        n_reset++;
        @(negedge clk);
        rst_n = 1'b1;
        @(negedge clk);
      end
      in_valid = ($urandom_range(0, 9) < 7);
      drive_sample(k);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (4) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", exp_q.size());
    end
    $display("samples in=%0d out=%0d", n_in, n_out);
    $display("events: neg=%0d partial=%0d removed=%0d shifted=%0d qrelu0=%0d qrelu255=%0d mid=%0d b2b=%0d idle=%0d reset=%0d ties=%0d",
             n_neg_terms, n_partial_mask, n_zero_removed, n_shifted, n_q0, n_q255, n_qmid,
             n_b2b, n_idle, n_reset, n_ties);
    for (int j = 0; j < NO; j++) $display("class %0d predicted %0d times", j, class_seen[j]);
    checks++;
    if (n_neg_terms == 0 || n_partial_mask == 0 || n_zero_removed == 0 || n_shifted == 0 ||
        n_q0 == 0 || n_q255 == 0 || n_qmid == 0 || n_b2b == 0 || n_idle == 0 || n_reset == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
