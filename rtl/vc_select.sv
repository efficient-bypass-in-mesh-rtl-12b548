// vc_select: virtual-channel selection for a head flit at one output port.
//
// Among the downstream VCs that are not held by another packet and whose
// free space (as counted by the credit tracker) is at least `need` flits,
// it picks the one with the most free space; ties go to the lower VC.
// `need` is 1 for wormhole, the packet length for virtual cut-through and
// the packet length plus one (the bubble) for FBFC injection or dimension
// change. Purely combinational.
//
// The "highest number of credits" policy is the evaluated configuration's
// VA policy; the tie rule is this design's choice.
module vc_select #(
  parameter int unsigned NUM_VCS = 2,
  parameter int unsigned CW      = 4
) (
  input  logic [CW-1:0]              space [NUM_VCS],
  input  logic [NUM_VCS-1:0]         busy,
  input  logic [CW-1:0]              need,
  output logic                       found,
  output logic [$clog2(NUM_VCS)-1:0] vc
);
  logic [CW-1:0] best;
  always_comb begin
    found = 1'b0;
    vc    = '0;
    best  = '0;
    for (int v = 0; v < NUM_VCS; v++) begin
      if (!busy[v] && space[v] >= need && (!found || space[v] > best)) begin
        found = 1'b1;
        vc    = $clog2(NUM_VCS)'(v);
        best  = space[v];
      end
    end
  end
endmodule
