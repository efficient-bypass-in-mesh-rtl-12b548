// tb_nebb_router: directed test of one NEBB router at (3,3) of an 8x8 mesh.
//
// The testbench plays the four neighbour routers and the four local nodes.
// It schedules lookaheads and flits per input port (a lookahead one cycle
// before its flit), returns downstream credits when it chooses to, and
// checks every flit leaving the router against a scoreboard: right output
// port, flits of a packet in order, one output VC per packet and no two
// packets interleaved on one output VC. Scenarios:
//   1  bypass of a single-flit packet: 1 cycle from flit arrival to output
//      register (2 per hop with the link), lookahead route for next router;
//   2  buffered path of an injected flit: 3 cycles (4 per hop);
//   3  NEBB: a single-flit packet bypasses a VC whose buffer holds a
//      blocked flit;
//   4  Hybrid VCT bypass of a 5-flit packet over a non-empty VC, with holes
//      used by another packet and a conflicting lookahead that must lose
//      and then leaves from the buffer through a later hole;
//   5  VCT refused when the downstream VC cannot take the whole packet;
//   6  wormhole bypass of a 5-flit packet over an empty VC;
//   7  two lookaheads for one output: one bypasses, the other is buffered.
module tb_nebb_router;
  import nebb_pkg::*;

  localparam int unsigned NP = NUM_PORTS;
  localparam int MYX = 3, MYY = 3;
  localparam int NUM_VCS = 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        in_flit_valid [NP];
  flit_t       in_flit       [NP];
  logic        in_la_valid   [NP];
  la_t         in_la         [NP];
  credit_t     out_credit    [NP];
  logic        out_flit_valid[NP];
  flit_t       out_flit      [NP];
  logic        out_la_valid  [NP];
  la_t         out_la        [NP];
  credit_t     in_credit     [NP];
  rtr_events_t events;

  nebb_router dut (
    .clk(clk), .rst_n(rst_n), .my_x(COORD_W'(MYX)), .my_y(COORD_W'(MYY)),
    .in_flit_valid(in_flit_valid), .in_flit(in_flit),
    .in_la_valid(in_la_valid), .in_la(in_la), .out_credit(out_credit),
    .out_flit_valid(out_flit_valid), .out_flit(out_flit),
    .out_la_valid(out_la_valid), .out_la(out_la), .in_credit(in_credit),
    .events(events));

  int checks = 0;
  int failures = 0;
  int cycle = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0d: %s", cycle, msg);
    end
  endtask

  // ------------------------------------------------------------------
  // Stimulus schedule: per port and cycle
  // ------------------------------------------------------------------
  la_t   la_at   [NP][int];
  flit_t flit_at [NP][int];

  // packet scoreboard
  int pkt_port [int];
  int pkt_size [int];
  int pkt_next [int];
  int pkt_ovc  [int];
  int pkt_first_out [int];
  int next_id = 1;
  int sent_flits [NP];

  function automatic dest_t mkdest(int x, int y, int l);
    dest_t d;
    d.x = COORD_W'(x);
    d.y = COORD_W'(y);
    d.l = LOCAL_W'(l);
    return d;
  endfunction

  // expected output port at (3,3) by plain XY routing, written out
  function automatic int exp_port(dest_t d);
    if (int'(d.x) > MYX) return 0;
    if (int'(d.x) < MYX) return 1;
    if (int'(d.y) > MYY) return 2;
    if (int'(d.y) < MYY) return 3;
    return 4 + int'(d.l);
  endfunction

  // schedule a packet: flit i's lookahead at start + i*(gap+1), flit next cycle
  function automatic int sched(int p, int vc, dest_t d, int size, int start, int gap, bit with_la);
    int id;
    id = next_id++;
    pkt_port[id] = exp_port(d);
    pkt_size[id] = size;
    pkt_next[id] = 0;
    pkt_ovc[id]  = -1;
    for (int i = 0; i < size; i++) begin
      ctrl_t c;
      flit_t f;
      int t;
      t = start + i * (gap + 1);
      c.head  = (i == 0);
      c.tail  = (i == size - 1);
      c.size  = SIZE_W'(size);
      c.vc    = VC_W'(vc);
      c.route = PORT_W'(exp_port(d));
      c.dest  = d;
      f.c     = c;
      f.data  = {96'h0, 16'(id), 16'(i)};
      if (with_la) begin
        if (la_at[p].exists(t)) $fatal(1, "LA schedule collision");
        la_at[p][t] = c;
      end
      if (flit_at[p].exists(t + 1)) $fatal(1, "flit schedule collision");
      flit_at[p][t + 1] = f;
      sent_flits[p]++;
    end
    return id;
  endfunction

  always @(negedge clk) begin
    for (int p = 0; p < NP; p++) begin
      in_la_valid[p]   = la_at[p].exists(cycle + 1);
      in_la[p]         = in_la_valid[p] ? la_at[p][cycle + 1] : '0;
      in_flit_valid[p] = flit_at[p].exists(cycle + 1);
      in_flit[p]       = in_flit_valid[p] ? flit_at[p][cycle + 1] : '0;
    end
  end

  // ------------------------------------------------------------------
  // Downstream credits
  // ------------------------------------------------------------------
  bit ret_en   [NP];
  int owed     [NP][NUM_VCS];   // credits not yet returned
  int release_req [NP];         // request to return everything owed
  int got_credits [NP];

  always @(posedge clk) begin
    cycle <= cycle + 1;
    for (int o = 0; o < NP; o++) begin
      if (out_credit[o].valid) got_credits[o]++;
    end
  end

  always @(negedge clk) begin
    for (int o = 0; o < NP; o++) begin
      in_credit[o] = '0;
      if (o < 4) begin
        if (out_flit_valid[o]) owed[o][out_flit[o].c.vc]++;
        if (ret_en[o] || release_req[o] != 0) begin
          for (int v = 0; v < NUM_VCS; v++) begin
            if (!in_credit[o].valid && owed[o][v] > 0) begin
              in_credit[o].valid = 1'b1;
              in_credit[o].vc    = VC_W'(v);
              owed[o][v]--;
            end
          end
          if (!in_credit[o].valid) release_req[o] = 0;
        end
      end
    end
  end

  // ------------------------------------------------------------------
  // Output monitor
  // ------------------------------------------------------------------
  int cur_pkt [NP][NUM_VCS];
  int out_count = 0;
  int out_cycle [int];   // (id*8+idx) -> cycle seen

  always @(posedge clk) begin
    if (rst_n) begin
      for (int o = 0; o < NP; o++) begin
        if (out_flit_valid[o]) begin
          int id, idx, v;
          flit_t f;
          f   = out_flit[o];
          id  = int'(f.data[31:16]);
          idx = int'(f.data[15:0]);
          v   = int'(f.c.vc);
          out_count++;
          out_cycle[id * 8 + idx] = cycle + 1;
          if (!pkt_port.exists(id)) begin
            check(0, $sformatf("unknown packet %0d at port %0d", id, o));
          end else begin
            check(pkt_port[id] == o, $sformatf("pkt %0d at port %0d, expected %0d", id, o, pkt_port[id]));
            check(pkt_next[id] == idx, $sformatf("pkt %0d flit %0d out of order (exp %0d)", id, idx, pkt_next[id]));
            check(f.c.head == (idx == 0) && f.c.tail == (idx == pkt_size[id] - 1),
                  $sformatf("pkt %0d flit %0d head/tail marks", id, idx));
            pkt_next[id] = idx + 1;
            if (idx == 0) pkt_ovc[id] = v;
            else check(pkt_ovc[id] == v, $sformatf("pkt %0d changed output VC", id));
            if (o < 4) begin
              if (f.c.head) begin
                check(cur_pkt[o][v] == 0, $sformatf("pkt %0d interleaves pkt %0d on port %0d vc %0d",
                                                   id, cur_pkt[o][v], o, v));
                if (!f.c.tail) cur_pkt[o][v] = id;
              end else begin
                check(cur_pkt[o][v] == id, $sformatf("pkt %0d body on vc not owned", id));
                if (f.c.tail) cur_pkt[o][v] = 0;
              end
              // lookahead leaves with the flit, routed for the next router
              check(out_la_valid[o] && out_la[o].dest == f.c.dest && out_la[o].vc == f.c.vc,
                    $sformatf("pkt %0d lookahead missing", id));
            end
          end
        end
      end
    end
  end

  // event counters
  int n_bypass = 0, n_nonempty = 0, n_vct = 0, n_lost = 0, n_bufw = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      n_bypass   += $countones(events.bypass);
      n_nonempty += $countones(events.bypass_nonempty);
      n_vct      += $countones(events.bypass_vct);
      n_lost     += $countones(events.la_lost);
      n_bufw     += $countones(events.buf_write);
    end
  end

  // ------------------------------------------------------------------
  // Scenarios
  // ------------------------------------------------------------------
  int id1, id2, id3, id4, id5, id6a, id6b, id7, id8, id9a, id9b;
  int bn0, bv0, bl0, bw0;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o < NP; o++) begin
      ret_en[o] = 1'b0;
      release_req[o] = 0;
      sent_flits[o] = 0;
      got_credits[o] = 0;
      for (int v = 0; v < NUM_VCS; v++) begin
        owed[o][v] = 0;
        cur_pkt[o][v] = 0;
      end
      in_la_valid[o] = 1'b0;
      in_flit_valid[o] = 1'b0;
      in_la[o] = '0;
      in_flit[o] = '0;
      in_credit[o] = '0;
    end
    ret_en[0] = 1'b1;   // X+ downstream drains freely
    ret_en[1] = 1'b1;

    // 1: single-flit bypass, W -> E
    id1 = sched(1, 0, mkdest(6, 3, 0), 1, 20, 0, 1'b1);
    // 2: injected flit (buffered path)
    id2 = sched(4, 0, mkdest(6, 3, 1), 1, 30, 0, 1'b0);
    // 3: exhaust the Y+ downstream buffer with 12 injected flits
    for (int i = 0; i < 12; i++) void'(sched(5, i % 2, mkdest(3, 6, 0), 1, 40 + i, 0, 1'b0));
    // a flit for Y+ now blocks in VC0 of input X-
    id3 = sched(1, 0, mkdest(3, 6, 1), 1, 70, 0, 1'b1);
    // NEBB: single-flit packet over the non-empty VC0
    id4 = sched(1, 0, mkdest(6, 3, 2), 1, 80, 0, 1'b1);
    // 4: 5-flit packet over non-empty VC0 with holes: VCT bypass and lock
    id5 = sched(1, 0, mkdest(7, 3, 0), 5, 90, 1, 1'b1);
    // hole user from input Y+ (cycle 91: owner has no LA) and a loser (94)
    id6a = sched(2, 0, mkdest(5, 3, 0), 1, 91, 0, 1'b1);
    id6b = sched(3, 1, mkdest(5, 3, 1), 1, 94, 0, 1'b1);
    // 5: VCT refused: Y- downstream has 3 free slots, VC1 of X- not empty
    for (int i = 0; i < 9; i++) void'(sched(6, 0, mkdest(3, 0, 0), 1, 110 + i, 0, 1'b0));
    void'(sched(1, 1, mkdest(3, 7, 3), 1, 130, 0, 1'b1));   // blocks in VC1 (Y+ full)
    id7 = sched(1, 1, mkdest(3, 0, 1), 5, 135, 0, 1'b1);
    // 6: wormhole bypass, 5 flits over an empty VC, E -> W
    id8 = sched(0, 0, mkdest(0, 3, 0), 5, 260, 0, 1'b1);
    // 7: two lookaheads for the same ejection port
    id9a = sched(0, 1, mkdest(3, 3, 0), 1, 290, 0, 1'b1);
    id9b = sched(1, 0, mkdest(3, 3, 0), 1, 290, 0, 1'b1);

    repeat (3) @(posedge clk);
    rst_n <= 1'b1;

    // --- 1 and 2: latencies
    wait (cycle == 25);
    check(out_cycle.exists(id1 * 8) && out_cycle[id1 * 8] == 22,
          $sformatf("bypass latency: out at %0d, expected 22", out_cycle.exists(id1*8) ? out_cycle[id1*8] : -1));
    wait (cycle == 36);
    check(out_cycle.exists(id2 * 8) && out_cycle[id2 * 8] == 34,
          $sformatf("buffered latency: out at %0d, expected 34", out_cycle.exists(id2*8) ? out_cycle[id2*8] : -1));

    // --- 3: NEBB bypass over non-empty VC
    bn0 = n_nonempty;
    wait (cycle == 86);
    check(!out_cycle.exists(id3 * 8), "blocked Y+ flit must still be buffered");
    check(out_cycle.exists(id4 * 8) && out_cycle[id4 * 8] == 82,
          "NEBB single-flit bypass over non-empty VC at cycle 82");
    check(n_nonempty > bn0, "bypass_nonempty event seen");

    // --- 4: VCT bypass with lock
    bv0 = n_vct;
    bl0 = n_lost;
    wait (cycle == 105);
    check(out_cycle.exists(id5 * 8 + 4) && out_cycle[id5 * 8 + 4] == 100,
          "VCT packet tail bypassed (out at 100)");
    check(out_cycle.exists(id5 * 8) && out_cycle[id5 * 8] == 92, "VCT packet head bypassed (out at 92)");
    check(n_vct == bv0 + 1, "one VCT bypass");
    check(out_cycle.exists(id6a * 8) && out_cycle[id6a * 8] == 93, "hole of locked output used by another LA");
    check(n_lost > bl0, "conflicting LA lost to the locked packet");
    // the loser is buffered (BW 95) and takes the first free hole (SA 97)
    check(out_cycle.exists(id6b * 8) && out_cycle[id6b * 8] == 99,
          "buffered loser leaves through a hole of the locked packet (out at 99)");

    // --- 5: VCT refused
    bw0 = n_bufw;
    wait (cycle == 150);
    check(!out_cycle.exists(id7 * 8), "5-flit packet with 3 free slots not bypassed");
    // release Y+ credits: blocked flits drain, then id7 goes by wormhole
    release_req[2] = 1;
    wait (cycle == 200);
    check(out_cycle.exists(id3 * 8), "Y+ flit left after credits came back");
    check(out_cycle.exists(id7 * 8 + 2) && !out_cycle.exists(id7 * 8 + 3),
          "wormhole: 3 flits of id7 sent into 3 free slots, then it waits");
    ret_en[3] = 1'b1;
    ret_en[2] = 1'b1;

    // --- 6: wormhole bypass over empty VC
    wait (cycle == 270);
    for (int i = 0; i < 5; i++)
      check(out_cycle.exists(id8 * 8 + i) && out_cycle[id8 * 8 + i] == 262 + i,
            $sformatf("WH bypass flit %0d at %0d", i, 262 + i));

    // --- 7: LA conflict at the ejection port
    wait (cycle == 300);
    check(out_cycle.exists(id9a * 8) && out_cycle.exists(id9b * 8), "both conflicting packets delivered");
    check((out_cycle[id9a * 8] == 292) != (out_cycle[id9b * 8] == 292), "exactly one bypassed");

    // --- end: every packet delivered, one upstream credit per flit
    wait (cycle == 400);
    foreach (pkt_size[id])
      check(pkt_next[id] == pkt_size[id], $sformatf("pkt %0d delivered %0d/%0d", id, pkt_next[id], pkt_size[id]));
    for (int p = 0; p < NP; p++)
      check(got_credits[p] == sent_flits[p],
            $sformatf("port %0d returned %0d credits for %0d flits", p, got_credits[p], sent_flits[p]));
    $display("events: bypass=%0d nonempty=%0d vct=%0d lost=%0d buffered=%0d",
             n_bypass, n_nonempty, n_vct, n_lost, n_bufw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
