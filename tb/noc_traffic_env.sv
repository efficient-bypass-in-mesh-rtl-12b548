// noc_traffic_env: traffic generator, network interfaces and checker around
// one nebb_noc, shared by the end-to-end testbenches.
//
// Every node injects packets at random with probability RATE_PCT/1000 per
// cycle: bimodal traffic, 80% single-flit and 20% five-flit packets (or
// single-flit only), to destinations picked by PATTERN: uniform random;
// bit-reversal or transpose of the node number (transpose swaps the upper
// and lower halves of its bits); or hotspot, where every packet goes to one
// of the nodes 0, N/16-1, N-N/16 and N-1 (0, 15, 240, 255 for 256 nodes).
// PATTERN 4 splits the traffic time into four equal phases on the same
// network: single-flit uniform at RATE_PCT, then bimodal bit-reversal and
// transpose at half that rate, then bimodal hotspot at a twentieth of it
// (the four hotspots saturate first). Its network interface keeps the packets in
// an unbounded source queue and sends flits into the router's local buffer
// under the same credit rule the routers use (12 slots, one private per VC,
// the rest shared), choosing for each packet the VC with more room. Each
// flit carries its packet id, index and a check word derived from both.
//
// At ejection the checker requires the right node, the right check word and
// in-order flits per packet. After GEN_CYCLES of traffic the network drains;
// every packet must arrive. It counts the router events (bypass, bypass over
// a non-empty buffer, VCT bypass, lookahead lost in arbitration, buffer
// write, switch allocation, FBFC whole-packet reservation) and counts a
// failure for each mechanism that never happened (FBFC only in a torus).
// When USE_DEFAULTS is set the network is instantiated with no parameter
// override at all.
module noc_traffic_env
  import nebb_pkg::*;
#(
  parameter int  K            = 4,
  parameter bit  TORUS        = 1'b0,
  parameter bit  USE_DEFAULTS = 1'b0,
  parameter int  GEN_CYCLES   = 2000,
  parameter int  DRAIN_CYCLES = 3000,
  parameter int  RATE_PCT     = 60,     // per mille per node per cycle
  parameter int  SEED         = 1,
  parameter int  PATTERN      = 0,      // 0 uniform, 1 bit-reversal, 2 transpose, 3 hotspot,
                                        // 4 the four in sequence (see below)
  parameter bit  SINGLE_FLIT  = 1'b0    // only single-flit packets (else bimodal 80/20)
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int CONC = 4;
  localparam int R = K * K;
  localparam int N = R * CONC;
  localparam int NV = 2;
  localparam int SLOTS = 12;

  logic        inj_valid  [N];
  flit_t       inj_flit   [N];
  credit_t     inj_credit [N];
  logic        ej_valid   [N];
  flit_t       ej_flit    [N];
  rtr_events_t events     [R];

  if (USE_DEFAULTS) begin : g_def
    nebb_noc u_noc (.clk(clk), .rst_n(rst_n), .inj_valid(inj_valid), .inj_flit(inj_flit),
                    .inj_credit(inj_credit), .ej_valid(ej_valid), .ej_flit(ej_flit),
                    .events(events));
  end else begin : g_par
    nebb_noc #(.K(K), .TORUS(TORUS)) u_noc (
      .clk(clk), .rst_n(rst_n), .inj_valid(inj_valid), .inj_flit(inj_flit),
      .inj_credit(inj_credit), .ej_valid(ej_valid), .ej_flit(ej_flit), .events(events));
  end

  // packet bookkeeping
  int          pkt_size [int];
  int          pkt_dst  [int];
  int          pkt_next [int];
  int          pkt_t0   [int];
  int          next_id;
  int          delivered, generated, flits_out;
  longint      lat_sum;
  flit_t       srcq [N][$];
  int          occ  [N][NV];
  int          cur_vc [N];
  int          cycle;

  // event counters
  longint n_la, n_bypass, n_nonempty, n_vct, n_lost, n_bufw, n_sa, n_fbfc;

  function automatic logic [63:0] chk(int id, int idx);
    return {32'(id) * 32'h9E3779B1, 16'(idx) ^ 16'h5A5A, 16'(id)};
  endfunction

  localparam int NB = $clog2(N);

  function automatic int phase_of(int cyc);
    return (PATTERN == 4) ? (cyc * 4) / GEN_CYCLES : PATTERN;
  endfunction

  function automatic int rate_of(int cyc);
    if (PATTERN != 4) return RATE_PCT;
    case (phase_of(cyc))
      0:       return RATE_PCT;
      1, 2:    return RATE_PCT / 2;
      default: return RATE_PCT / 20;
    endcase
  endfunction

  function automatic logic single_of(int cyc);
    return SINGLE_FLIT || (PATTERN == 4 && phase_of(cyc) == 0);
  endfunction

  function automatic int pick_dest(int src);
    int d;
    case (phase_of(cycle))
      1: begin
        d = 0;
        for (int b = 0; b < NB; b++) if (src[b]) d |= 1 << (NB - 1 - b);
      end
      2: d = ((src % (1 << (NB / 2))) << (NB - NB / 2)) | (src >> (NB / 2));
      3: begin
        case ($urandom_range(0, 3))
          0: d = 0;
          1: d = N / 16 - 1;
          2: d = N - N / 16;
          default: d = N - 1;
        endcase
      end
      default: d = $urandom_range(0, N - 1);
    endcase
    return d;
  endfunction

  function automatic int room(int n, int v);
    int su;
    su = 0;
    for (int u = 0; u < NV; u++) if (occ[n][u] > 1) su += occ[n][u] - 1;
    return (SLOTS - NV) - su + (occ[n][v] == 0 ? 1 : 0);
  endfunction

  function automatic void fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0d: %s", cycle, msg);
  endfunction

  // generation and injection (drive at negedge)
  always @(negedge clk) begin
    if (!rst_n) begin
      for (int n = 0; n < N; n++) begin
        inj_valid[n] = 1'b0;
        inj_flit[n]  = '0;
      end
    end else begin
      for (int n = 0; n < N; n++) begin
        inj_valid[n] = 1'b0;
        if (cycle < GEN_CYCLES && $urandom_range(0, 999) < rate_of(cycle)) begin
          int id, size, dst;
          id   = next_id++;
          size = (!single_of(cycle) && $urandom_range(0, 4) == 0) ? 5 : 1;
          dst  = pick_dest(n);
          pkt_size[id] = size;
          pkt_dst[id]  = dst;
          pkt_next[id] = 0;
          pkt_t0[id]   = cycle;
          generated++;
          for (int i = 0; i < size; i++) begin
            flit_t f;
            f = '0;
            f.c.head   = (i == 0);
            f.c.tail   = (i == size - 1);
            f.c.size   = SIZE_W'(size);
            f.c.dest.x = COORD_W'((dst / CONC) % K);
            f.c.dest.y = COORD_W'((dst / CONC) / K);
            f.c.dest.l = LOCAL_W'(dst % CONC);
            f.data     = {chk(id, i), 32'(id), 32'(i)};
            srcq[n].push_back(f);
          end
        end
        if (srcq[n].size() > 0) begin
          flit_t f;
          f = srcq[n][0];
          if (f.c.head) cur_vc[n] = (room(n, 1) > room(n, 0)) ? 1 : 0;
          if (room(n, cur_vc[n]) >= 1) begin
            f.c.vc = VC_W'(cur_vc[n]);
            inj_valid[n] = 1'b1;
            inj_flit[n]  = f;
            occ[n][cur_vc[n]]++;
            void'(srcq[n].pop_front());
          end
        end
      end
    end
  end

  // credits, ejection checks, event counters (sample at posedge)
  always @(posedge clk) begin
    if (!rst_n) begin
      cycle = 0;
    end else begin
      cycle++;
      for (int n = 0; n < N; n++) begin
        if (inj_credit[n].valid) begin
          if (occ[n][inj_credit[n].vc] == 0) fail($sformatf("node %0d credit underflow", n));
          else occ[n][inj_credit[n].vc]--;
        end
        if (ej_valid[n]) begin
          int id, idx;
          flit_t f;
          f   = ej_flit[n];
          id  = int'(f.data[63:32]);
          idx = int'(f.data[31:0]);
          flits_out++;
          checks++;
          if (!pkt_size.exists(id)) begin
            fail($sformatf("node %0d got unknown packet %0d", n, id));
          end else begin
            if (pkt_dst[id] != n) fail($sformatf("pkt %0d for node %0d ejected at %0d", id, pkt_dst[id], n));
            if (f.data[127:64] != chk(id, idx)) fail($sformatf("pkt %0d flit %0d corrupted", id, idx));
            if (pkt_next[id] != idx) fail($sformatf("pkt %0d flit %0d out of order", id, idx));
            if (f.c.tail != (idx == pkt_size[id] - 1)) fail($sformatf("pkt %0d tail mark", id));
            pkt_next[id] = idx + 1;
            if (idx == pkt_size[id] - 1) begin
              delivered++;
              lat_sum += longint'(cycle - pkt_t0[id]);
            end
          end
        end
      end
      for (int r = 0; r < R; r++) begin
        n_la       += $countones(events[r].la_in);
        n_bypass   += $countones(events[r].bypass);
        n_nonempty += $countones(events[r].bypass_nonempty);
        n_vct      += $countones(events[r].bypass_vct);
        n_lost     += $countones(events[r].la_lost);
        n_bufw     += $countones(events[r].buf_write);
        n_sa       += $countones(events[r].sa_win);
        n_fbfc     += $countones(events[r].fbfc_resv);
      end
    end
  end

  task automatic need(string what, longint count);
    checks++;
    if (count == 0) fail($sformatf("mechanism never happened: %s", what));
  endtask

  initial begin
    done = 1'b0;
    checks = 0;
    failures = 0;
    next_id = 1;
    delivered = 0; generated = 0; flits_out = 0; lat_sum = 0;
    n_la = 0; n_bypass = 0; n_nonempty = 0; n_vct = 0; n_lost = 0; n_bufw = 0; n_sa = 0; n_fbfc = 0;
    for (int n = 0; n < N; n++) begin
      cur_vc[n] = 0;
      for (int v = 0; v < NV; v++) occ[n][v] = 0;
    end
    void'($urandom(SEED));
    wait (rst_n);
    wait (cycle >= GEN_CYCLES);
    for (int i = 0; i < DRAIN_CYCLES && delivered < generated; i++) @(posedge clk);
    checks++;
    if (delivered != generated) fail($sformatf("delivered %0d of %0d packets", delivered, generated));
    need("bypass", n_bypass);
    need("bypass over non-empty buffer (NEBB)", n_nonempty);
    if (!SINGLE_FLIT) need("VCT bypass of a multi-flit packet", n_vct);
    need("lookahead lost in arbitration", n_lost);
    need("buffered flit", n_bufw);
    need("switch allocation of a buffered flit", n_sa);
    if (TORUS) need("FBFC whole-packet reservation", n_fbfc);
    $display("%0dx%0d %s, pattern %0d%s: %0d packets, %0d flits, avg latency %0d.%02d cycles",
             K, K, TORUS ? "torus" : "mesh", PATTERN, SINGLE_FLIT ? " single-flit" : "", delivered, flits_out,
             delivered ? lat_sum / delivered : 0, delivered ? (lat_sum * 100 / delivered) % 100 : 0);
    $display("  lookaheads %0d, bypass %0d (non-empty %0d, VCT heads %0d), LA lost %0d",
             n_la, n_bypass, n_nonempty, n_vct, n_lost);
    $display("  buffer writes %0d (%0d%% of router traversals), switch grants %0d, FBFC reservations %0d",
             n_bufw, (n_bufw * 100) / ((n_bufw + n_bypass) ? (n_bufw + n_bypass) : 1), n_sa, n_fbfc);
    done = 1'b1;
  end
endmodule
