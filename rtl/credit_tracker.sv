// credit_tracker: credit accounting, kept at an output port, for the shared
// (DAMQ) input buffer of the downstream router.
//
// The downstream buffer has SLOTS slots, PRIV of them private to each VC and
// the rest shared. occ[v] counts the slots that VC v holds or has reserved.
// The room for VC v is its unused private slots plus the unused shared
// slots. Sending consumes `consume_amt` slots at once: 1 for a wormhole
// flit, the whole packet length for the head of a packet bypassed under
// virtual cut-through or (in a torus) injected or changing dimension, and 0
// for the later flits of such a pre-reserved packet. Each credit returned
// by the downstream router frees one slot of its VC.
//
// Consumption and returns in the same cycle combine; `space` is
// combinational from the registered counts. The accounting rules follow the
// paper; the counter form is this design's choice.
module credit_tracker #(
  parameter int unsigned NUM_VCS = 2,
  parameter int unsigned SLOTS   = 12,
  parameter int unsigned PRIV    = 1,
  parameter int unsigned CW      = $clog2(SLOTS+1),
  parameter int unsigned AW      = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       consume_valid,
  input  logic [$clog2(NUM_VCS)-1:0] consume_vc,
  input  logic [AW-1:0]              consume_amt,
  input  logic                       credit_valid,
  input  logic [$clog2(NUM_VCS)-1:0] credit_vc,
  output logic [CW-1:0]              space [NUM_VCS],
  output logic [CW-1:0]              occ   [NUM_VCS]
);
  localparam int unsigned SHARED = SLOTS - NUM_VCS * PRIV;

  logic [CW-1:0] cnt [NUM_VCS];
  int unsigned   shared_used;

  always_comb begin
    shared_used = 0;
    for (int v = 0; v < NUM_VCS; v++)
      if (int'(cnt[v]) > int'(PRIV)) shared_used += int'(cnt[v]) - int'(PRIV);
    for (int v = 0; v < NUM_VCS; v++) begin
      space[v] = CW'(SHARED - shared_used);
      if (int'(cnt[v]) < int'(PRIV)) space[v] = space[v] + CW'(int'(PRIV) - int'(cnt[v]));
      occ[v] = cnt[v];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int v = 0; v < NUM_VCS; v++) cnt[v] <= '0;
    end else begin
      for (int v = 0; v < NUM_VCS; v++) begin
        cnt[v] <= cnt[v]
                + ((consume_valid && consume_vc == $clog2(NUM_VCS)'(v)) ? CW'(consume_amt) : '0)
                - CW'(credit_valid && credit_vc == $clog2(NUM_VCS)'(v));
      end
    end
  end

  a_room: assert property (@(posedge clk) disable iff (!rst_n)
                           consume_valid |-> int'(consume_amt) <= int'(space[consume_vc]));
  a_ret:  assert property (@(posedge clk) disable iff (!rst_n)
                           credit_valid |-> cnt[credit_vc] != '0 ||
                           (consume_valid && consume_vc == credit_vc && consume_amt != '0));
endmodule
