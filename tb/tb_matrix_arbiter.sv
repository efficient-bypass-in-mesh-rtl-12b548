// tb_matrix_arbiter: random test of the 8:1 least-recently-granted matrix
// arbiter against a reference that keeps an explicit priority order list
// (most recently granted at the end).
module tb_matrix_arbiter;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] req, gnt;
  logic update;

  matrix_arbiter #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  int order[$];   // order[0] has the highest priority
  int exp_w;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = 0; update = 0;
    for (int i = 0; i < N; i++) order.push_back(i);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      req    = N'($urandom);
      update = ($urandom_range(0, 3) != 0);
      #1;
      exp_w = -1;
      foreach (order[i]) if (exp_w < 0 && req[order[i]]) exp_w = order[i];
      checks++;
      if ((exp_w < 0 && gnt != 0) || (exp_w >= 0 && gnt != N'(1) << exp_w)) begin
        failures++;
        $display("FAIL cyc %0d req %b gnt %b expected %0d", cyc, req, gnt, exp_w);
      end
      @(posedge clk);
      if (update && exp_w >= 0) begin
        foreach (order[i]) if (order[i] == exp_w) begin order.delete(i); break; end
        order.push_back(exp_w);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
