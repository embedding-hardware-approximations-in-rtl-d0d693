// tb_argmax: random check of the class decision over 10 signed 20-bit
// scores, with forced ties (the lowest index must win), all-equal scores and
// the extreme values.
module tb_argmax;
  import mlp_ref_pkg::*;

  localparam int N = 10;
  localparam int W = 20;

  int checks = 0, failures = 0;
  logic [N-1:0][W-1:0] scores;
  logic [3:0] idx;

  argmax #(.N(N), .W(W)) dut (.scores(scores), .idx(idx));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sc[];
    sc = new[N];
    for (int it = 0; it < 3000; it++) begin
      for (int i = 0; i < N; i++) begin
        case (it % 4)
          0: scores[i] = W'($urandom);
          1: scores[i] = W'($urandom_range(0, 7)) - W'(3);   // many ties
          2: scores[i] = (it % 8 == 2) ? W'(5) : {1'b1, {(W-1){1'b0}}};
          default: scores[i] = ($urandom_range(0, 1) != 0) ? {1'b0, {(W-1){1'b1}}} : W'($urandom);
        endcase
        sc[i] = longint'($signed(scores[i]));
      end
      #1;
      checks++;
      if (int'(idx) != ref_argmax(sc)) begin
        failures++;
        $display("FAIL it=%0d got=%0d exp=%0d", it, idx, ref_argmax(sc));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
