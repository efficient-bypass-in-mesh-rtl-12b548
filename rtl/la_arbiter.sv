// la_arbiter: lookahead (LA) arbiter of one output port, with variable
// priority.
//
// Lookaheads that meet the bypass conditions request the output. Normally a
// least-recently-granted matrix arbiter picks one. A multi-flit packet that
// is being bypassed under virtual cut-through (VCT) rules holds the output
// locked; the lookaheads of its later flits raise `max_req` and always win,
// so the packet is forwarded without interleaving in the downstream buffer.
// At most one packet per output holds maximum priority, so at most one
// `max_req` bit is set. In the cycles where the locked packet has no flit
// (holes), other lookaheads win through the matrix arbiter.
//
// Combinational grant; the matrix moves on the clock edge when a normal
// request is granted. Variable priority and the matrix arbiter follow the
// paper; leaving the matrix unchanged on a maximum-priority grant is this
// design's choice.
module la_arbiter #(
  parameter int unsigned N = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic [N-1:0] max_req,
  output logic [N-1:0] gnt
);
  logic [N-1:0] m_gnt;
  logic         use_max;

  assign use_max = (max_req & req) != '0;

  matrix_arbiter #(.N(N)) u_matrix (
    .clk    (clk),
    .rst_n  (rst_n),
    .req    (req),
    .update (!use_max),
    .gnt    (m_gnt)
  );

  assign gnt = use_max ? (max_req & req) : m_gnt;

  a_one_max: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(max_req));
endmodule
