// sa_input_arbiter: first stage of the switch allocator (SA-I) for one
// input port. It picks one VC among those with a flit at the buffer front.
//
// Selection is round-robin over the VCs, with body-flit priority: once a
// VC has advanced a non-tail flit, the same VC is selected again so that
// the packet is sent without holes. The priority is dropped as soon as the
// selected flit fails to advance (no credit, no free output VC, or lost in
// the output stage), so the next ready VC is chosen in the next cycle; this
// is what prevents the allocator deadlock of FBFC tori. Output availability
// is not looked at here: a VC that cannot proceed wastes the cycle.
//
// `sel_vc`/`sel_valid` are combinational. `advanced`/`adv_tail` report, in
// the same cycle, whether the selected flit won the switch and whether it
// was a tail. The policy follows the paper; the pointer update (to the VC
// after the selected one) is this design's choice.
module sa_input_arbiter #(
  parameter int unsigned NUM_VCS = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [NUM_VCS-1:0]         cand,      // VC has a flit at its front
  input  logic                       enable,    // input port free for SA
  input  logic                       advanced,  // selected flit won the switch
  input  logic                       adv_tail,  // ... and it was a tail flit
  output logic                       sel_valid,
  output logic [$clog2(NUM_VCS)-1:0] sel_vc
);
  localparam int unsigned VW = (NUM_VCS > 1) ? $clog2(NUM_VCS) : 1;

  logic [VW-1:0] ptr;
  logic          hold_valid;
  logic [VW-1:0] hold_vc;

  always_comb begin
    sel_valid = 1'b0;
    sel_vc    = '0;
    if (enable) begin
      if (hold_valid && cand[hold_vc]) begin
        sel_valid = 1'b1;
        sel_vc    = hold_vc;
      end else begin
        for (int i = NUM_VCS - 1; i >= 0; i--) begin
          if (cand[(int'(ptr) + i) % NUM_VCS]) begin
            sel_valid = 1'b1;
            sel_vc    = VW'((int'(ptr) + i) % NUM_VCS);
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ptr        <= '0;
      hold_valid <= 1'b0;
      hold_vc    <= '0;
    end else if (sel_valid) begin
      ptr        <= VW'((int'(sel_vc) + 1) % NUM_VCS);
      hold_valid <= advanced && !adv_tail;
      hold_vc    <= sel_vc;
    end
  end
endmodule
