// matrix_arbiter: N-input least-recently-granted matrix arbiter.
//
// A priority matrix holds, for every pair (i, j), whether requester i
// currently beats requester j. Request i is granted when no other active
// requester beats it. When `update` is high the granted requester drops to
// the lowest priority: it loses to every other requester from the next
// cycle on. The grant is combinational from `req`; the matrix changes on
// the clock edge. After reset lower indices win.
//
// The router uses 8:1 matrix arbiters for the output stage of the switch
// allocator and for the lookahead arbiters, as in the evaluated
// configuration; the reset order is this design's choice.
module matrix_arbiter #(
  parameter int unsigned N = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         update,   // commit the grant to the priority state
  output logic [N-1:0] gnt
);
  // beats[i][j] = 1: i has priority over j (only i != j is used)
  logic [N-1:0] beats [N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      gnt[i] = req[i];
      for (int j = 0; j < N; j++) begin
        if (j != i && req[j] && beats[j][i]) gnt[i] = 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          beats[i][j] <= (i < j);
    end else if (update && gnt != '0) begin
      for (int i = 0; i < N; i++) begin
        if (gnt[i]) begin
          for (int j = 0; j < N; j++) begin
            if (j != i) begin
              beats[i][j] <= 1'b0;
              beats[j][i] <= 1'b1;
            end
          end
        end
      end
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
endmodule
