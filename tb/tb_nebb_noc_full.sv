// tb_nebb_noc_full: the network at its full default size (8x8 mesh,
// concentration 4: 256 nodes, 64 routers, 2 VCs, 12-flit shared buffers)
// with no parameter override, running a short burst of bimodal uniform
// random traffic through noc_traffic_env and draining it. Delivery, data
// and the occurrence of each bypass mechanism are checked.
module tb_nebb_noc_full;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic done;
  int   checks, failures;

  noc_traffic_env #(.K(8), .TORUS(1'b0), .USE_DEFAULTS(1'b1), .GEN_CYCLES(400),
                    .DRAIN_CYCLES(2000), .RATE_PCT(40), .SEED(5)) u_env (
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
