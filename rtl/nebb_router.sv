// nebb_router: 8-port lookahead bypass router with Non-Empty Buffer Bypass
// (NEBB) under the Hybrid wormhole / virtual cut-through bypass rules.
//
// Each flit is announced by a lookahead (LA) that arrives one cycle before
// it and carries the flit's control fields, including the output port it
// takes here (computed by the previous router). In the cycle an LA arrives
// the router decides whether its flit may bypass:
//   * a head flit needs its input VC idle (no packet of that VC is already
//     advancing, condition 1a) and a downstream VC with room:
//       - single-flit packet, or VC buffer empty: room for one flit (WH);
//       - multi-flit packet and VC buffer not empty: room for the whole
//         packet (VCT), and the output must not already be locked by
//         another VCT packet. The packet then locks the output: the LAs of
//         its later flits get maximum priority in the LA arbiter until its
//         tail passes. Its holes may be used by other lookaheads (wormhole
//         rules only) and by buffered flits;
//   * a later flit of a VCT-locked packet always bypasses;
//   * a later flit of a wormhole packet bypasses when its VC buffer is
//     empty and its downstream VC has a credit.
// Eligible LAs are arbitrated per output (la_arbiter). LAs have priority
// over buffered flits: a winning LA takes its output and its input port
// for the next cycle. The flit arriving next cycle then goes straight
// through the crossbar into the output register; otherwise it is written
// into the input DAMQ.
//
// Buffered flits follow the normal pipeline: buffer write (BW), then VC and
// switch allocation (VA/SA: sa_input_arbiter per input, a matrix arbiter per
// output), then switch traversal (ST) into the output register, then link
// traversal (outside). The bypass pipeline is ST then link: 2 cycles per
// hop against 4. The output register also drives the LA to the next router,
// which therefore arrives one cycle before the flit.
//
// Credits: a credit_tracker per transit output counts the downstream shared
// buffer. A wormhole flit takes one credit; a VCT bypass head reserves the
// whole packet. In a torus (TORUS=1) Flit Bubble Flow Control applies: a
// head injected from a local port or turning from X to Y needs room for the
// packet plus one flit and reserves the whole packet at once. A credit goes
// back upstream (registered) when a flit leaves an input port, by bypass or
// from the buffer. Ejection ports are taken to be always able to accept.
//
// Follows the paper: bypass conditions of NEBB-Hybrid, LA priority over
// buffered flits, variable-priority LA arbiters, body-flit priority in SA-I
// released on a failed advance, highest-credit VC selection, shared-buffer
// reservation and FBFC rules. This design's own choices: the exact cycle
// in which each decision is taken, locally injected flits always entering
// the buffer (the injecting node sends no LA), buffered flits being allowed
// into the holes of a VCT-locked output (keeping them off it can deadlock
// when the locked packet's own upstream credits wait for those flits), and
// 2 to 4 VCs.
//
// Outputs that stay constant: the VC fields are 2 bits wide whatever
// NUM_VCS is, so with 2 VCs their upper bit is always 0, and ejection ports
// never send a lookahead (no router follows them).
module nebb_router
  import nebb_pkg::*;
#(
  parameter int unsigned K          = 8,
  parameter bit          TORUS      = 1'b0,
  parameter int unsigned NUM_VCS    = 2,
  parameter int unsigned BUF_SLOTS  = 12,
  parameter int unsigned PRIV_SLOTS = 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  // from upstream links (flit after link traversal, LA one cycle ahead)
  input  logic               in_flit_valid [NUM_PORTS],
  input  flit_t              in_flit       [NUM_PORTS],
  input  logic               in_la_valid   [NUM_PORTS],
  input  la_t                in_la         [NUM_PORTS],
  output credit_t            out_credit    [NUM_PORTS],
  // to downstream links
  output logic               out_flit_valid [NUM_PORTS],
  output flit_t              out_flit       [NUM_PORTS],
  output logic               out_la_valid   [NUM_PORTS],
  output la_t                out_la         [NUM_PORTS],
  input  credit_t            in_credit      [NUM_PORTS],
  output rtr_events_t        events
);
  localparam int unsigned NP = NUM_PORTS;
  localparam int unsigned VW = $clog2(NUM_VCS);
  localparam int unsigned CW = $clog2(BUF_SLOTS + 1);
  localparam int unsigned AW = SIZE_W + 1;

  // ------------------------------------------------------------------
  // State
  // ------------------------------------------------------------------
  // Input VC control registers: route, output VC and status of the packet
  // that is advancing from this VC.
  typedef struct packed {
    logic              active;
    logic [PORT_W-1:0] oport;
    logic [VW-1:0]     ovc;
    logic              resv;    // whole packet already reserved downstream
  } vc_state_t;

  // Output lock held by a multi-flit packet bypassed under VCT
  typedef struct packed {
    logic              valid;
    logic [PORT_W-1:0] inp;
    logic [VW-1:0]     ivc;
    logic [VW-1:0]     ovc;
  } lock_t;

  // Crossbar set-up for the next cycle
  typedef struct packed {
    logic              valid;
    logic [PORT_W-1:0] oport;
    logic [VW-1:0]     ovc;
  } xb_t;

  vc_state_t          vst     [NP][NUM_VCS];
  lock_t              lock_q  [NP];
  logic [NUM_VCS-1:0] busy_q  [NP];     // output VC held by a packet
  xb_t                bp_q    [NP];     // bypass granted for next flit
  xb_t                st_q    [NP];     // buffered flit in ST next cycle
  flit_t              st_flit [NP];
  credit_t            cred_q  [NP];

  // ------------------------------------------------------------------
  // Input buffers
  // ------------------------------------------------------------------
  logic          wr_valid [NP];
  flit_t         wr_flit  [NP];
  logic          rd_valid [NP];
  logic [VW-1:0] rd_vc    [NP];
  flit_t         front    [NP][NUM_VCS];
  logic [CW-1:0] qcount   [NP][NUM_VCS];
  logic [PORT_W-1:0] inj_route [NP];

  for (genvar p = 0; p < NP; p++) begin : g_in
    logic [PORT_W-1:0] unused_next;
    la_route #(.K(K), .TORUS(TORUS)) u_inj_route (
      .my_x(my_x), .my_y(my_y), .out_port(P_XP), .dest(in_flit[p].c.dest),
      .next_route(unused_next), .local_route(inj_route[p]));

    damq_buffer #(.SLOTS(BUF_SLOTS), .NUM_VCS(NUM_VCS), .W($bits(flit_t))) u_damq (
      .clk(clk), .rst_n(rst_n),
      .wr_valid(wr_valid[p]), .wr_vc(wr_flit[p].c.vc[VW-1:0]), .wr_data(wr_flit[p]),
      .rd_valid(rd_valid[p]), .rd_vc(rd_vc[p]),
      .front(front[p]), .count(qcount[p]), .free_slots());
  end

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      wr_valid[p] = in_flit_valid[p] && !bp_q[p].valid;
      wr_flit[p]  = in_flit[p];
      // locally injected flits get their route here
      if (!is_transit(PORT_W'(p))) wr_flit[p].c.route = inj_route[p];
    end
  end

  // ------------------------------------------------------------------
  // Downstream credit state per output
  // ------------------------------------------------------------------
  logic          cons_valid [NP];
  logic [VW-1:0] cons_vc    [NP];
  logic [AW-1:0] cons_amt   [NP];
  logic [CW-1:0] space      [NP][NUM_VCS];

  for (genvar o = 0; o < NP; o++) begin : g_out
    if (o < NUM_TRANS) begin : g_trans
      logic [CW-1:0] unused_occ [NUM_VCS];
      credit_tracker #(.NUM_VCS(NUM_VCS), .SLOTS(BUF_SLOTS), .PRIV(PRIV_SLOTS),
                       .CW(CW), .AW(AW)) u_cred (
        .clk(clk), .rst_n(rst_n),
        .consume_valid(cons_valid[o]), .consume_vc(cons_vc[o]), .consume_amt(cons_amt[o]),
        .credit_valid(in_credit[o].valid), .credit_vc(in_credit[o].vc[VW-1:0]),
        .space(space[o]), .occ(unused_occ));
    end else begin : g_eject
      // the ejecting node always accepts
      always_comb for (int v = 0; v < NUM_VCS; v++) space[o][v] = CW'(BUF_SLOTS);
    end
  end

  // ------------------------------------------------------------------
  // Lookahead bypass conditions and LA arbitration
  // ------------------------------------------------------------------
  logic          vc_empty  [NP][NUM_VCS];
  logic          la_elig   [NP];
  logic          la_max    [NP];
  logic          la_vct    [NP];
  logic          la_fbfc   [NP];
  logic [VW-1:0] la_ovc    [NP];
  logic [AW-1:0] la_amt    [NP];
  logic [CW-1:0] la_need   [NP];
  logic          la_va_ok  [NP];
  logic [VW-1:0] la_va_vc  [NP];
  logic [NP-1:0] la_req    [NP];   // per output
  logic [NP-1:0] la_maxreq [NP];   // per output
  logic [NP-1:0] la_gnt    [NP];   // per output
  logic          la_win    [NP];   // per input
  logic          out_by_la [NP];   // per output

  function automatic logic fbfc_turn(input logic [PORT_W-1:0] ip, input logic [PORT_W-1:0] op);
    return TORUS && is_transit(op) &&
           (!is_transit(ip) || (is_x_port(ip) && !is_x_port(op)));
  endfunction

  always_comb begin
    for (int p = 0; p < NP; p++)
      for (int v = 0; v < NUM_VCS; v++)
        vc_empty[p][v] = qcount[p][v] == '0 &&
                         !(wr_valid[p] && wr_flit[p].c.vc[VW-1:0] == VW'(v));
  end

  for (genvar p = 0; p < NP; p++) begin : g_la_va
    always_comb begin
      la_t     la;
      logic    multi;
      la        = in_la[p];
      multi     = la.size > SIZE_W'(1);
      la_fbfc[p] = fbfc_turn(PORT_W'(p), la.route);
      la_vct[p]  = la.head && multi && !vc_empty[p][la.vc[VW-1:0]];
      la_need[p] = la_fbfc[p] ? CW'(la.size) + CW'(1) : la_vct[p] ? CW'(la.size) : CW'(1);
    end
    vc_select #(.NUM_VCS(NUM_VCS), .CW(CW)) u_va (
      .space(space[in_la[p].route]), .busy(busy_q[in_la[p].route]), .need(la_need[p]),
      .found(la_va_ok[p]), .vc(la_va_vc[p]));
  end

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      la_t           la;
      logic [VW-1:0] v;
      logic [PORT_W-1:0] o;
      vc_state_t     s;
      la = in_la[p];
      v  = la.vc[VW-1:0];
      o  = la.route;
      s  = vst[p][v];
      la_elig[p] = 1'b0;
      la_max[p]  = 1'b0;
      la_ovc[p]  = '0;
      la_amt[p]  = '0;
      if (in_la_valid[p]) begin
        if (!la.head && lock_q[o].valid && lock_q[o].inp == PORT_W'(p) && lock_q[o].ivc == v) begin
          // later flit of a VCT-bypassed packet: room already reserved
          la_elig[p] = 1'b1;
          la_max[p]  = 1'b1;
          la_ovc[p]  = lock_q[o].ovc;
        end else if (!la.head) begin
          // later flit of a wormhole packet already advancing from this VC
          la_ovc[p]  = s.ovc;
          la_amt[p]  = s.resv ? '0 : AW'(1);
          la_elig[p] = s.active && s.oport == o && vc_empty[p][v] &&
                       (s.resv || space[o][s.ovc] != '0);
        end else begin
          // head or single-flit packet: NEBB-Hybrid conditions 1a and 1b
          la_ovc[p]  = la_va_vc[p];
          la_amt[p]  = (la_vct[p] || la_fbfc[p]) ? AW'(la.size) : AW'(1);
          la_elig[p] = !s.active && la_va_ok[p] && !(la_vct[p] && lock_q[o].valid);
        end
      end
    end
    for (int o = 0; o < NP; o++) begin
      for (int p = 0; p < NP; p++) begin
        la_req[o][p]    = in_la_valid[p] && la_elig[p] && in_la[p].route == PORT_W'(o);
        la_maxreq[o][p] = la_req[o][p] && la_max[p];
      end
    end
  end

  for (genvar o = 0; o < NP; o++) begin : g_la_arb
    la_arbiter #(.N(NP)) u_la_arb (
      .clk(clk), .rst_n(rst_n), .req(la_req[o]), .max_req(la_maxreq[o]), .gnt(la_gnt[o]));
  end

  always_comb begin
    for (int p = 0; p < NP; p++) la_win[p] = 1'b0;
    for (int o = 0; o < NP; o++) begin
      out_by_la[o] = la_gnt[o] != '0;
      for (int p = 0; p < NP; p++) if (la_gnt[o][p]) la_win[p] = 1'b1;
    end
  end

  // ------------------------------------------------------------------
  // Switch allocation of buffered flits (VA folded into SA for heads)
  // ------------------------------------------------------------------
  logic [NUM_VCS-1:0] sa_cand  [NP];
  logic               sai_valid[NP];
  logic [VW-1:0]      sai_vc   [NP];
  flit_t              sa_flit  [NP];
  logic [PORT_W-1:0]  sa_oport [NP];
  logic [VW-1:0]      sa_ovc   [NP];
  logic [AW-1:0]      sa_amt   [NP];
  logic               sa_fbfc  [NP];
  logic               sa_ready [NP];
  logic [CW-1:0]      sa_need  [NP];
  logic               sa_va_ok [NP];
  logic [VW-1:0]      sa_va_vc [NP];
  logic [NP-1:0]      sa_req   [NP];   // per output
  logic [NP-1:0]      sa_gnt   [NP];   // per output
  logic               sa_win   [NP];   // per input

  for (genvar p = 0; p < NP; p++) begin : g_sa_in
    always_comb for (int v = 0; v < NUM_VCS; v++) sa_cand[p][v] = qcount[p][v] != '0;
    sa_input_arbiter #(.NUM_VCS(NUM_VCS)) u_sai (
      .clk(clk), .rst_n(rst_n), .cand(sa_cand[p]), .enable(!la_win[p]),
      .advanced(sa_win[p]), .adv_tail(sa_flit[p].c.tail),
      .sel_valid(sai_valid[p]), .sel_vc(sai_vc[p]));
    always_comb begin
      sa_flit[p] = front[p][sai_vc[p]];
      sa_fbfc[p] = fbfc_turn(PORT_W'(p), sa_flit[p].c.route);
      sa_need[p] = sa_fbfc[p] ? CW'(sa_flit[p].c.size) + CW'(1) : CW'(1);
    end
    vc_select #(.NUM_VCS(NUM_VCS), .CW(CW)) u_va (
      .space(space[sa_flit[p].c.route]), .busy(busy_q[sa_flit[p].c.route]), .need(sa_need[p]),
      .found(sa_va_ok[p]), .vc(sa_va_vc[p]));
  end

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      vc_state_t s;
      s = vst[p][sai_vc[p]];
      if (s.active) begin
        sa_oport[p] = s.oport;
        sa_ovc[p]   = s.ovc;
        sa_amt[p]   = s.resv ? '0 : AW'(1);
        sa_ready[p] = s.resv || space[s.oport][s.ovc] != '0;
      end else begin
        sa_oport[p] = sa_flit[p].c.route;
        sa_ovc[p]   = sa_va_vc[p];
        sa_amt[p]   = sa_fbfc[p] ? AW'(sa_flit[p].c.size) : AW'(1);
        sa_ready[p] = sa_flit[p].c.head && sa_va_ok[p];
      end
    end
    for (int o = 0; o < NP; o++)
      for (int p = 0; p < NP; p++)
        sa_req[o][p] = sai_valid[p] && sa_ready[p] && sa_oport[p] == PORT_W'(o) &&
                       !out_by_la[o];
  end

  for (genvar o = 0; o < NP; o++) begin : g_sa_out
    matrix_arbiter #(.N(NP)) u_sao (
      .clk(clk), .rst_n(rst_n), .req(sa_req[o]), .update(1'b1), .gnt(sa_gnt[o]));
  end

  always_comb begin
    for (int p = 0; p < NP; p++) sa_win[p] = 1'b0;
    for (int o = 0; o < NP; o++)
      for (int p = 0; p < NP; p++)
        if (sa_gnt[o][p]) sa_win[p] = 1'b1;
    for (int p = 0; p < NP; p++) begin
      rd_valid[p] = sa_win[p];
      rd_vc[p]    = sai_vc[p];
    end
  end

  // Credit consumption: at most one winner (LA or SA) per output per cycle
  always_comb begin
    for (int o = 0; o < NP; o++) begin
      cons_valid[o] = 1'b0;
      cons_vc[o]    = '0;
      cons_amt[o]   = '0;
      for (int p = 0; p < NP; p++) begin
        if (la_gnt[o][p]) begin
          cons_valid[o] = la_amt[p] != '0;
          cons_vc[o]    = la_ovc[p];
          cons_amt[o]   = la_amt[p];
        end
        if (sa_gnt[o][p]) begin
          cons_valid[o] = sa_amt[p] != '0;
          cons_vc[o]    = sa_ovc[p];
          cons_amt[o]   = sa_amt[p];
        end
      end
    end
  end

  // ------------------------------------------------------------------
  // State updates
  // ------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int p = 0; p < NP; p++) begin
        for (int v = 0; v < NUM_VCS; v++) vst[p][v] <= '0;
        lock_q[p] <= '0;
        busy_q[p] <= '0;
        bp_q[p]   <= '0;
        st_q[p]   <= '0;
        cred_q[p] <= '0;
      end
    end else begin
      for (int p = 0; p < NP; p++) begin
        bp_q[p]   <= '0;
        st_q[p]   <= '0;
        cred_q[p] <= '0;
      end
      for (int p = 0; p < NP; p++) begin
        la_t           la;
        logic [VW-1:0] v;
        logic [PORT_W-1:0] o;
        la = in_la[p];
        v  = la.vc[VW-1:0];
        o  = la.route;
        if (la_win[p]) begin
          bp_q[p]   <= '{valid: 1'b1, oport: o, ovc: la_ovc[p]};
          cred_q[p] <= '{valid: 1'b1, vc: VC_W'(v)};
          if (la.head && !la.tail) begin
            busy_q[o][la_ovc[p]] <= 1'b1;
            if (la_vct[p])
              lock_q[o] <= '{valid: 1'b1, inp: PORT_W'(p), ivc: v, ovc: la_ovc[p]};
            else
              vst[p][v] <= '{active: 1'b1, oport: o, ovc: la_ovc[p], resv: la_fbfc[p]};
          end else if (!la.head && la.tail) begin
            busy_q[o][la_ovc[p]] <= 1'b0;
            if (la_max[p]) lock_q[o].valid <= 1'b0;
            else           vst[p][v].active <= 1'b0;
          end
        end
        if (sa_win[p]) begin
          st_q[p]    <= '{valid: 1'b1, oport: sa_oport[p], ovc: sa_ovc[p]};
          st_flit[p] <= sa_flit[p];
          cred_q[p]  <= '{valid: 1'b1, vc: VC_W'(sai_vc[p])};
          if (sa_flit[p].c.head && !sa_flit[p].c.tail) begin
            busy_q[sa_oport[p]][sa_ovc[p]] <= 1'b1;
            vst[p][sai_vc[p]] <= '{active: 1'b1, oport: sa_oport[p], ovc: sa_ovc[p],
                                   resv: sa_fbfc[p]};
          end else if (!sa_flit[p].c.head && sa_flit[p].c.tail) begin
            busy_q[sa_oport[p]][sa_ovc[p]] <= 1'b0;
            vst[p][sai_vc[p]].active <= 1'b0;
          end
        end
      end
    end
  end

  // ------------------------------------------------------------------
  // Switch traversal: crossbar into the output registers, LA generation
  // ------------------------------------------------------------------
  flit_t             xb_flit  [NP];
  logic              xb_valid [NP];
  logic [PORT_W-1:0] nxt_route[NP];

  always_comb begin
    for (int o = 0; o < NP; o++) begin
      xb_valid[o] = 1'b0;
      xb_flit[o]  = in_flit[0];
      for (int p = 0; p < NP; p++) begin
        if (bp_q[p].valid && bp_q[p].oport == PORT_W'(o)) begin
          xb_valid[o]      = 1'b1;
          xb_flit[o]       = in_flit[p];
          xb_flit[o].c.vc  = VC_W'(bp_q[p].ovc);
        end
        if (st_q[p].valid && st_q[p].oport == PORT_W'(o)) begin
          xb_valid[o]      = 1'b1;
          xb_flit[o]       = st_flit[p];
          xb_flit[o].c.vc  = VC_W'(st_q[p].ovc);
        end
      end
    end
  end

  for (genvar o = 0; o < NP; o++) begin : g_lag
    logic [PORT_W-1:0] unused_local;
    la_route #(.K(K), .TORUS(TORUS)) u_la_route (
      .my_x(my_x), .my_y(my_y), .out_port(PORT_W'(o)), .dest(xb_flit[o].c.dest),
      .next_route(nxt_route[o]), .local_route(unused_local));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int o = 0; o < NP; o++) begin
        out_flit_valid[o] <= 1'b0;
        out_la_valid[o]   <= 1'b0;
      end
    end else begin
      for (int o = 0; o < NP; o++) begin
        out_flit_valid[o] <= xb_valid[o];
        out_la_valid[o]   <= xb_valid[o] && is_transit(PORT_W'(o));
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int o = 0; o < NP; o++) begin
      out_flit[o]         <= xb_flit[o];
      out_flit[o].c.route <= is_transit(PORT_W'(o)) ? nxt_route[o] : xb_flit[o].c.route;
      out_la[o]           <= xb_flit[o].c;
      out_la[o].route     <= nxt_route[o];
    end
  end

  always_comb for (int p = 0; p < NP; p++) out_credit[p] = cred_q[p];

  // ------------------------------------------------------------------
  // Events
  // ------------------------------------------------------------------
  always_comb begin
    events = '0;
    for (int p = 0; p < NP; p++) begin
      events.la_in[p]           = in_la_valid[p];
      events.la_lost[p]         = in_la_valid[p] && la_elig[p] && !la_win[p];
      events.bypass[p]          = la_win[p];
      events.bypass_nonempty[p] = la_win[p] && !vc_empty[p][in_la[p].vc[VW-1:0]];
      events.bypass_vct[p]      = la_win[p] && in_la[p].head && la_vct[p];
      events.buf_write[p]       = wr_valid[p];
      events.sa_win[p]          = sa_win[p];
      events.fbfc_resv[p]       = (la_win[p] && in_la[p].head && la_fbfc[p]) ||
                                  (sa_win[p] && sa_flit[p].c.head && sa_fbfc[p] &&
                                   !vst[p][sai_vc[p]].active);
    end
  end

  // ------------------------------------------------------------------
  // Rules
  // ------------------------------------------------------------------
  for (genvar p = 0; p < NP; p++) begin : g_assert
    // a granted bypass is always followed by its flit
    a_flit_follows_la: assert property (@(posedge clk) disable iff (!rst_n)
                                        bp_q[p].valid |-> in_flit_valid[p]);
    // one flit per input port through the crossbar per cycle
    a_one_per_input: assert property (@(posedge clk) disable iff (!rst_n)
                                      !(la_win[p] && sa_win[p]));
  end
  initial assert (NUM_VCS >= 2 && NUM_VCS <= 4) else $error("NUM_VCS must be 2..4");

endmodule
