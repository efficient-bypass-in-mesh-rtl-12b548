// tb_damq_buffer: random test of the DAMQ buffer against per-VC queues.
//
// Random writes and reads (also both in one cycle, to the same VC) keep the
// pool between empty and full; every cycle the front flit and count of each
// VC and the number of free slots are compared with a reference model made
// of plain SystemVerilog queues.
module tb_damq_buffer;
  localparam int SLOTS = 12, NV = 2, W = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               wr_valid, rd_valid;
  logic [0:0]         wr_vc, rd_vc;
  logic [W-1:0]       wr_data;
  logic [W-1:0]       front [NV];
  logic [3:0]         count [NV];
  logic [3:0]         free_slots;

  damq_buffer #(.SLOTS(SLOTS), .NUM_VCS(NV), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] q [NV][$];
  int total;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_valid = 0; rd_valid = 0; wr_vc = 0; rd_vc = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      // compare state
      total = 0;
      for (int v = 0; v < NV; v++) begin
        checks++;
        if (int'(count[v]) != q[v].size()) begin
          failures++;
          $display("FAIL cyc %0d vc %0d count %0d exp %0d", cyc, v, count[v], q[v].size());
        end
        if (q[v].size() > 0) begin
          checks++;
          if (front[v] !== q[v][0]) begin
            failures++;
            $display("FAIL cyc %0d vc %0d front %h exp %h", cyc, v, front[v], q[v][0]);
          end
        end
        total += q[v].size();
      end
      checks++;
      if (int'(free_slots) != SLOTS - total) begin
        failures++;
        $display("FAIL free slots %0d exp %0d", free_slots, SLOTS - total);
      end
      // new stimulus; bias toward filling in the first half of each 400 cycles
      rd_vc    = 1'($urandom_range(0, 1));
      rd_valid = q[rd_vc].size() > 0 && ($urandom_range(0, 99) < ((cyc % 400) < 200 ? 30 : 70));
      wr_vc    = 1'($urandom_range(0, 1));
      wr_valid = (total - int'(rd_valid) < SLOTS) && total < SLOTS &&
                 ($urandom_range(0, 99) < ((cyc % 400) < 200 ? 70 : 30));
      wr_data  = W'($urandom);
      @(posedge clk);
      #1;
      if (rd_valid) void'(q[rd_vc].pop_front());
      if (wr_valid) q[wr_vc].push_back(wr_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
