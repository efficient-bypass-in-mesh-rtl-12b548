// tb_la_arbiter: random test of the variable-priority LA arbiter. A
// maximum-priority request (the VCT-locked packet) must always win; without
// one the grant follows least-recently-granted order, and a maximum-priority
// grant leaves that order unchanged.
module tb_la_arbiter;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] req, max_req, gnt;

  la_arbiter #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  int order[$];
  int exp_w, n_max = 0;
  bit by_max;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = 0; max_req = 0;
    for (int i = 0; i < N; i++) order.push_back(i);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      req     = N'($urandom);
      max_req = 0;
      if ($urandom_range(0, 3) == 0) begin
        int m;
        m = $urandom_range(0, N - 1);
        req[m] = 1'b1;
        max_req[m] = 1'b1;
      end
      #1;
      by_max = max_req != 0;
      exp_w = -1;
      if (by_max) begin
        for (int i = 0; i < N; i++) if (max_req[i]) exp_w = i;
        n_max++;
      end else begin
        foreach (order[i]) if (exp_w < 0 && req[order[i]]) exp_w = order[i];
      end
      checks++;
      if ((exp_w < 0 && gnt != 0) || (exp_w >= 0 && gnt != N'(1) << exp_w)) begin
        failures++;
        $display("FAIL cyc %0d req %b max %b gnt %b expected %0d", cyc, req, max_req, gnt, exp_w);
      end
      @(posedge clk);
      if (!by_max && exp_w >= 0) begin
        foreach (order[i]) if (order[i] == exp_w) begin order.delete(i); break; end
        order.push_back(exp_w);
      end
    end
    checks++;
    if (n_max == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
