// tb_csa_adder_tree: random check of the full-adder reduction tree.
//
// Trees of 1, 2, 3, 4, 6 and 17 operands (16-bit) and one of 11 operands
// (20-bit) are driven with random operands, including all-ones rows; each
// sum is compared with an integer sum modulo 2^W.
module tb_csa_adder_tree;

  int checks = 0, failures = 0;

  logic [0:0][15:0]  o1;  logic [15:0] s1;
  logic [1:0][15:0]  o2;  logic [15:0] s2;
  logic [2:0][15:0]  o3;  logic [15:0] s3;
  logic [3:0][15:0]  o4;  logic [15:0] s4;
  logic [5:0][15:0]  o6;  logic [15:0] s6;
  logic [16:0][15:0] o17; logic [15:0] s17;
  logic [10:0][19:0] o11; logic [19:0] s11;

  csa_adder_tree #(.N_OPS(1),  .W(16)) u1  (.ops(o1),  .sum(s1));
  csa_adder_tree #(.N_OPS(2),  .W(16)) u2  (.ops(o2),  .sum(s2));
  csa_adder_tree #(.N_OPS(3),  .W(16)) u3  (.ops(o3),  .sum(s3));
  csa_adder_tree #(.N_OPS(4),  .W(16)) u4  (.ops(o4),  .sum(s4));
  csa_adder_tree #(.N_OPS(6),  .W(16)) u6  (.ops(o6),  .sum(s6));
  csa_adder_tree #(.N_OPS(17), .W(16)) u17 (.ops(o17), .sum(s17));
  csa_adder_tree #(.N_OPS(11), .W(20)) u11 (.ops(o11), .sum(s11));

  function automatic logic [19:0] rnd20(int mode);
    case (mode)
      0: return '1;
      1: return '0;
      default: return 20'($urandom);
    endcase
  endfunction

  task automatic chk(string name, longint got, longint exp_val);
    checks++;
    if (got != exp_val) begin
      failures++;
      $display("FAIL %s got=%0h exp=%0h", name, got, exp_val);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e;
    for (int it = 0; it < 2000; it++) begin
      int mode;
      mode = (it < 4) ? it % 2 : 2;
      foreach (o1[i])  o1[i]  = 16'(rnd20(mode));
      foreach (o2[i])  o2[i]  = 16'(rnd20(mode));
      foreach (o3[i])  o3[i]  = 16'(rnd20(mode));
      foreach (o4[i])  o4[i]  = 16'(rnd20(mode));
      foreach (o6[i])  o6[i]  = 16'(rnd20(mode));
      foreach (o17[i]) o17[i] = 16'(rnd20(mode));
      foreach (o11[i]) o11[i] = rnd20(mode);
      #1;
      e = 0; foreach (o1[i])  e += longint'(o1[i]);  chk("n1",  s1,  e % 65536);
      e = 0; foreach (o2[i])  e += longint'(o2[i]);  chk("n2",  s2,  e % 65536);
      e = 0; foreach (o3[i])  e += longint'(o3[i]);  chk("n3",  s3,  e % 65536);
      e = 0; foreach (o4[i])  e += longint'(o4[i]);  chk("n4",  s4,  e % 65536);
      e = 0; foreach (o6[i])  e += longint'(o6[i]);  chk("n6",  s6,  e % 65536);
      e = 0; foreach (o17[i]) e += longint'(o17[i]); chk("n17", s17, e % 65536);
      e = 0; foreach (o11[i]) e += longint'(o11[i]); chk("n11", s11, e % (1 << 20));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
