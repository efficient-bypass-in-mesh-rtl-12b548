// tb_nebb_noc: end-to-end test of the network at reduced size: a 4x4 mesh
// and a 4x4 torus (64 nodes each, all other parameters at their defaults)
// run bimodal uniform random traffic side by side through
// noc_traffic_env, which checks delivery and data and requires every
// bypass mechanism (and FBFC in the torus) to occur.
module tb_nebb_noc;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic done_m, done_t;
  int   checks_m, checks_t, fail_m, fail_t;

  noc_traffic_env #(.K(4), .TORUS(1'b0), .GEN_CYCLES(3000), .RATE_PCT(70), .SEED(11)) u_mesh (
    .clk(clk), .rst_n(rst_n), .done(done_m), .checks(checks_m), .failures(fail_m));
  noc_traffic_env #(.K(4), .TORUS(1'b1), .GEN_CYCLES(3000), .RATE_PCT(90), .SEED(12)) u_torus (
    .clk(clk), .rst_n(rst_n), .done(done_t), .checks(checks_t), .failures(fail_t));

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks_m + checks_t, fail_m + fail_t + 1);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    wait (done_m && done_t);
    $display("TB_RESULT checks=%0d failures=%0d", checks_m + checks_t, fail_m + fail_t);
    $finish;
  end
endmodule
