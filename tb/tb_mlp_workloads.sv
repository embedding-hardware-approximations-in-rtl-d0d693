// tb_mlp_workloads: builds the classifier for each of the five evaluated
// MLP topologies (inputs, hidden neurons, classes): Breast Cancer (10,3,2),
// Cardio (21,3,3), Pendigits (16,5,10), Red Wine (11,2,6) and White Wine
// (11,4,7). Trained chromosomes are not available, so each instance gets its
// own pseudo-random chromosome; every predicted class is compared with the
// integer reference model.
module tb_mlp_workloads;

  localparam int NT = 5;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic [NT-1:0] done;
  int chk [NT];
  int fail [NT];

  always #5 clk = ~clk;

  mlp_topology_check #(.N_IN(10), .N_HID(3), .N_OUT(2),  .SEED(11)) u_bc (.clk, .rst_n, .done(done[0]), .checks(chk[0]), .failures(fail[0]));
  mlp_topology_check #(.N_IN(21), .N_HID(3), .N_OUT(3),  .SEED(12)) u_ca (.clk, .rst_n, .done(done[1]), .checks(chk[1]), .failures(fail[1]));
  mlp_topology_check #(.N_IN(16), .N_HID(5), .N_OUT(10), .SEED(13)) u_pd (.clk, .rst_n, .done(done[2]), .checks(chk[2]), .failures(fail[2]));
  mlp_topology_check #(.N_IN(11), .N_HID(2), .N_OUT(6),  .SEED(14)) u_rw (.clk, .rst_n, .done(done[3]), .checks(chk[3]), .failures(fail[3]));
  mlp_topology_check #(.N_IN(11), .N_HID(4), .N_OUT(7),  .SEED(15)) u_ww (.clk, .rst_n, .done(done[4]), .checks(chk[4]), .failures(fail[4]));

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (&done);
    #1;
    for (int t = 0; t < NT; t++) begin
      $display("topology %0d: checks=%0d failures=%0d", t, chk[t], fail[t]);
      checks += chk[t];
      failures += fail[t];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
