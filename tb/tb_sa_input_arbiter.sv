// tb_sa_input_arbiter: random test of the SA input arbiter with 4 VCs
// against a reference model: round robin from the VC after the last
// selected one, except that a VC whose non-tail flit advanced last time is
// selected again while it has a flit, and loses that priority once its
// selected flit fails to advance. Also checks that nothing is selected while
// the input is disabled.
module tb_sa_input_arbiter;
  localparam int NV = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NV-1:0] cand;
  logic enable, advanced, adv_tail, sel_valid;
  logic [1:0] sel_vc;

  sa_input_arbiter #(.NUM_VCS(NV)) dut (.*);

  int checks = 0, failures = 0;
  int ptr = 0, hold = -1, exp_v, n_hold = 0;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cand = 0; enable = 0; advanced = 0; adv_tail = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      cand   = NV'($urandom);
      enable = $urandom_range(0, 7) != 0;
      #1;
      exp_v = -1;
      if (enable) begin
        if (hold >= 0 && cand[hold]) begin
          exp_v = hold;
          n_hold++;
        end else begin
          for (int i = 0; i < NV; i++)
            if (exp_v < 0 && cand[(ptr + i) % NV]) exp_v = (ptr + i) % NV;
        end
      end
      checks++;
      if (sel_valid != (exp_v >= 0) || (exp_v >= 0 && int'(sel_vc) != exp_v)) begin
        failures++;
        $display("FAIL cyc %0d cand %b hold %0d ptr %0d sel %0d/%0d exp %0d",
                 cyc, cand, hold, ptr, sel_valid, sel_vc, exp_v);
      end
      advanced = sel_valid && ($urandom_range(0, 3) != 0);
      adv_tail = $urandom_range(0, 4) == 0;
      @(posedge clk);
      if (exp_v >= 0) begin
        ptr  = (exp_v + 1) % NV;
        hold = (advanced && !adv_tail) ? exp_v : -1;
      end
      #1 advanced = 0;
    end
    checks++;
    if (n_hold == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
