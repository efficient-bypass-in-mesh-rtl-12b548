// tb_credit_tracker: random test of the shared-buffer credit accounting
// (12 slots, 2 VCs, 1 private slot per VC). The stimulus mixes wormhole
// flits (1 slot), whole-packet reservations (5 slots, as for a VCT bypass
// or FBFC) with their 4 pre-reserved body flits (0 slots), and credit
// returns. The reference keeps per-VC occupancy and computes the room of a
// VC as its unused private slot plus the unused shared slots.
module tb_credit_tracker;
  localparam int NV = 2, SLOTS = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic consume_valid, credit_valid;
  logic [0:0] consume_vc, credit_vc;
  logic [3:0] consume_amt;
  logic [3:0] space [NV];
  logic [3:0] occ [NV];

  credit_tracker #(.NUM_VCS(NV), .SLOTS(SLOTS), .PRIV(1), .CW(4), .AW(4)) dut (.*);

  int checks = 0, failures = 0;
  int m_occ [NV];
  int exp_sp, shared_used, n_full = 0, n_resv = 0;

  function automatic int room(int v);
    int su;
    su = 0;
    for (int u = 0; u < NV; u++) if (m_occ[u] > 1) su += m_occ[u] - 1;
    return (SLOTS - NV) - su + (m_occ[v] == 0 ? 1 : 0);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    consume_valid = 0; credit_valid = 0; consume_vc = 0; credit_vc = 0; consume_amt = 0;
    m_occ[0] = 0; m_occ[1] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      for (int v = 0; v < NV; v++) begin
        checks++;
        if (int'(space[v]) != room(v) || int'(occ[v]) != m_occ[v]) begin
          failures++;
          $display("FAIL cyc %0d vc %0d space %0d exp %0d occ %0d exp %0d",
                   cyc, v, space[v], room(v), occ[v], m_occ[v]);
        end
        if (room(v) == 0) n_full++;
      end
      credit_vc    = 1'($urandom_range(0, 1));
      credit_valid = m_occ[credit_vc] > 0 && $urandom_range(0, 99) < ((cyc % 200) < 100 ? 25 : 70);
      consume_vc   = 1'($urandom_range(0, 1));
      consume_amt  = ($urandom_range(0, 4) == 0) ? 4'd5 : 4'd1;
      if ($urandom_range(0, 9) == 0) consume_amt = 4'd0;
      consume_valid = int'(consume_amt) <= room(consume_vc) &&
                      $urandom_range(0, 99) < ((cyc % 200) < 100 ? 70 : 25);
      if (consume_valid && consume_amt == 5) n_resv++;
      @(posedge clk);
      #1;
      if (consume_valid) m_occ[consume_vc] += int'(consume_amt);
      if (credit_valid) m_occ[credit_vc] -= 1;
    end
    checks++;
    if (n_full == 0 || n_resv == 0) begin
      failures++;
      $display("FAIL coverage: full %0d reservations %0d", n_full, n_resv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
