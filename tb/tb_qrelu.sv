// tb_qrelu: exhaustive check of the QReLU clip on a 16-bit sum.
//
// Two instances, SHIFT = 0 (plain clip to 0..255) and SHIFT = 3, see every
// 16-bit two's complement input; outputs are compared with the integer
// reference (negative -> 0, else min(v / 2^SHIFT, 255)).
module tb_qrelu;
  import mlp_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [15:0] acc;
  logic [7:0] a0, a3;

  qrelu #(.IN_W(16), .OUT_W(8), .SHIFT(0)) u0 (.acc(acc), .act(a0));
  qrelu #(.IN_W(16), .OUT_W(8), .SHIFT(3)) u3 (.acc(acc), .act(a3));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -32768; v < 32768; v++) begin
      acc = 16'(v);
      #1;
      checks += 2;
      if (int'(a0) != ref_qrelu(longint'(v), 0, 8)) begin
        failures++;
        if (failures < 10) $display("FAIL shift0 v=%0d got=%0d", v, a0);
      end
      if (int'(a3) != ref_qrelu(longint'(v), 3, 8)) begin
        failures++;
        if (failures < 10) $display("FAIL shift3 v=%0d got=%0d", v, a3);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
