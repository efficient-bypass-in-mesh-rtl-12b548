// tb_vc_select: random test of highest-credit VC selection with 4 VCs:
// the chosen VC must be free, have room for `need` flits and have the most
// room among such VCs (lowest index on ties); `found` must be low exactly
// when no VC qualifies.
module tb_vc_select;
  localparam int NV = 4, CW = 4;
  logic [CW-1:0] space [NV];
  logic [NV-1:0] busy;
  logic [CW-1:0] need;
  logic found;
  logic [1:0] vc;

  vc_select #(.NUM_VCS(NV), .CW(CW)) dut (.*);

  int checks = 0, failures = 0;
  int best, bv;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 5000; it++) begin
      for (int v = 0; v < NV; v++) space[v] = CW'($urandom_range(0, 12));
      busy = NV'($urandom);
      need = CW'($urandom_range(1, 6));
      #1;
      best = -1; bv = -1;
      for (int v = 0; v < NV; v++)
        if (!busy[v] && space[v] >= need && int'(space[v]) > best) begin
          best = int'(space[v]);
          bv = v;
        end
      checks++;
      if (found != (bv >= 0) || (bv >= 0 && int'(vc) != bv)) begin
        failures++;
        $display("FAIL it %0d busy %b need %0d found %0d vc %0d exp %0d", it, busy, need, found, vc, bv);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
