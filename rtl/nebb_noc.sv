// nebb_noc: a K x K mesh or torus of NEBB bypass routers with concentration
// CONC (four nodes per router), the evaluated 256-node network.
//
// Router r = y*K + x sits at (x, y); node n = r*CONC + l is attached to its
// local port 4+l. Transit port X+ of a router faces port X- of its right
// neighbour, Y+ faces Y- of the neighbour above. In a mesh the ports on the
// edge are left unconnected (dimension-order routing never uses them); in a
// torus (TORUS=1) they wrap around.
//
// Link timing: the flit link has one register (link traversal, 1 cycle),
// the lookahead wire has none, so a lookahead reaches the next router one
// cycle ahead of its flit; credits come back through the register inside
// the router. Per hop a bypassed flit takes 2 cycles (switch + link) and a
// buffered one 4 (buffer write, allocation, switch, link).
//
// Node interface: a node injects flits (`inj_*`) into its router's local
// input buffer under credit flow control: `inj_credit` returns one credit
// per flit leaving that buffer, and the node must hold at most BUF_SLOTS
// flits there, PRIV_SLOTS of them reserved per VC as the credit_tracker
// counts. The node picks the VC in `vc`; the router computes the route.
// Ejected flits (`ej_*`) must be taken every cycle. The network interface
// and the traffic source are outside this design.
//
// Sizes follow the evaluated configuration (8 x 8, c = 4, 2 VCs, 12-flit
// shared buffers, 128-bit channels). Node numbering and the tie of edge
// ports are this design's choice.
module nebb_noc
  import nebb_pkg::*;
#(
  parameter int unsigned K          = 8,
  parameter int unsigned CONC       = 4,
  parameter bit          TORUS      = 1'b0,
  parameter int unsigned NUM_VCS    = 2,
  parameter int unsigned BUF_SLOTS  = 12,
  parameter int unsigned PRIV_SLOTS = 1,
  localparam int unsigned R         = K * K,
  localparam int unsigned N         = R * CONC
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        inj_valid  [N],
  input  flit_t       inj_flit   [N],
  output credit_t     inj_credit [N],
  output logic        ej_valid   [N],
  output flit_t       ej_flit    [N],
  output rtr_events_t events     [R]
);
  localparam int unsigned NP = NUM_PORTS;

  logic    r_in_flit_valid  [R][NP];
  flit_t   r_in_flit        [R][NP];
  logic    r_in_la_valid    [R][NP];
  la_t     r_in_la          [R][NP];
  credit_t r_out_credit     [R][NP];
  logic    r_out_flit_valid [R][NP];
  flit_t   r_out_flit       [R][NP];
  logic    r_out_la_valid   [R][NP];
  la_t     r_out_la         [R][NP];
  credit_t r_in_credit      [R][NP];

  // link registers: flit leaving router r through port o
  logic    lk_valid [R][NUM_TRANS];
  flit_t   lk_flit  [R][NUM_TRANS];

  function automatic int nb_index(input int unsigned r, input int unsigned o);
    int x, y;
    x = int'(r % K);
    y = int'(r / K);
    case (o)
      0: x = x + 1;
      1: x = x - 1;
      2: y = y + 1;
      default: y = y - 1;
    endcase
    if (TORUS) begin
      x = (x + int'(K)) % int'(K);
      y = (y + int'(K)) % int'(K);
    end else if (x < 0 || x >= int'(K) || y < 0 || y >= int'(K)) begin
      return -1;
    end
    return y * int'(K) + x;
  endfunction

  // port of the neighbour facing port o
  function automatic int unsigned opposite(input int unsigned o);
    return o ^ 1;
  endfunction

  for (genvar r = 0; r < R; r++) begin : g_r
    nebb_router #(.K(K), .TORUS(TORUS), .NUM_VCS(NUM_VCS), .BUF_SLOTS(BUF_SLOTS),
                  .PRIV_SLOTS(PRIV_SLOTS)) u_router (
      .clk(clk), .rst_n(rst_n),
      .my_x(COORD_W'(r % K)), .my_y(COORD_W'(r / K)),
      .in_flit_valid(r_in_flit_valid[r]), .in_flit(r_in_flit[r]),
      .in_la_valid(r_in_la_valid[r]), .in_la(r_in_la[r]),
      .out_credit(r_out_credit[r]),
      .out_flit_valid(r_out_flit_valid[r]), .out_flit(r_out_flit[r]),
      .out_la_valid(r_out_la_valid[r]), .out_la(r_out_la[r]),
      .in_credit(r_in_credit[r]),
      .events(events[r]));

    // link traversal registers
    for (genvar o = 0; o < NUM_TRANS; o++) begin : g_lk
      always_ff @(posedge clk) begin
        if (!rst_n) lk_valid[r][o] <= 1'b0;
        else        lk_valid[r][o] <= r_out_flit_valid[r][o];
        lk_flit[r][o] <= r_out_flit[r][o];
      end
    end

    // transit inputs: port p of router r faces port opposite(p) of nb
    for (genvar p = 0; p < NUM_TRANS; p++) begin : g_tin
      localparam int NB = nb_index(r, p);
      if (NB >= 0) begin : g_conn
        assign r_in_flit_valid[r][p] = lk_valid[NB][opposite(p)];
        assign r_in_flit[r][p]       = lk_flit[NB][opposite(p)];
        assign r_in_la_valid[r][p]   = r_out_la_valid[NB][opposite(p)];
        assign r_in_la[r][p]         = r_out_la[NB][opposite(p)];
        assign r_in_credit[r][p]     = r_out_credit[NB][opposite(p)];
      end else begin : g_edge
        assign r_in_flit_valid[r][p] = 1'b0;
        assign r_in_flit[r][p]       = '0;
        assign r_in_la_valid[r][p]   = 1'b0;
        assign r_in_la[r][p]         = '0;
        assign r_in_credit[r][p]     = '0;
      end
    end

    // local ports
    for (genvar l = 0; l < CONC; l++) begin : g_loc
      localparam int unsigned NODE = r * CONC + l;
      assign r_in_flit_valid[r][NUM_TRANS+l] = inj_valid[NODE];
      assign r_in_flit[r][NUM_TRANS+l]       = inj_flit[NODE];
      assign r_in_la_valid[r][NUM_TRANS+l]   = 1'b0;
      assign r_in_la[r][NUM_TRANS+l]         = '0;
      assign r_in_credit[r][NUM_TRANS+l]     = '0;
      assign inj_credit[NODE]                = r_out_credit[r][NUM_TRANS+l];
      assign ej_valid[NODE]                  = r_out_flit_valid[r][NUM_TRANS+l];
      assign ej_flit[NODE]                   = r_out_flit[r][NUM_TRANS+l];
    end
    for (genvar l = CONC; l < NP - NUM_TRANS; l++) begin : g_noloc
      assign r_in_flit_valid[r][NUM_TRANS+l] = 1'b0;
      assign r_in_flit[r][NUM_TRANS+l]       = '0;
      assign r_in_la_valid[r][NUM_TRANS+l]   = 1'b0;
      assign r_in_la[r][NUM_TRANS+l]         = '0;
      assign r_in_credit[r][NUM_TRANS+l]     = '0;
    end
  end

  initial assert (CONC >= 1 && CONC <= NP - NUM_TRANS) else $error("CONC must be 1..4");
  initial assert (K >= 2 && K <= (1 << COORD_W)) else $error("K out of range");

endmodule
