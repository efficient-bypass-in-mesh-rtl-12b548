// tb_nebb_noc_patterns: the synthetic traffic of the evaluation on the full
// 8x8, concentration-4 mesh (256 nodes). One network runs four phases of
// 100 cycles back to back: single-flit uniform random traffic, then bimodal
// (80% one-flit, 20% five-flit packets) bit-reversal, transpose and hotspot
// traffic (hotspots at nodes 0, 15, 240 and 255). noc_traffic_env checks
// that every packet reaches the right node intact and in order, and counts a
// failure for any bypass mechanism that never occurs. Loads are moderate and
// the run short: this tests that the workloads run correctly; it does not
// measure latency or the buffered-flit ratio over the paper's 50,000 cycles.
module tb_nebb_noc_patterns;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic done;
  int   checks, failures;

  noc_traffic_env #(.K(8), .PATTERN(4), .GEN_CYCLES(400), .DRAIN_CYCLES(2000),
                    .RATE_PCT(60), .SEED(22)) u_env (
    .clk(clk), .rst_n(rst_n), .done(done), .checks(checks), .failures(failures));

  initial begin
    repeat (4000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
