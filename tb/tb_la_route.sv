// tb_la_route: exhaustive test of lookahead DOR routing on an 8x8 mesh and
// an 8x8 torus. For every source router and destination it walks the packet
// hop by hop, feeding each lookahead route back in as the next output port,
// and checks that the walk ends at the right local port after exactly the
// minimal number of hops, with all X hops before Y hops.
module tb_la_route;
  import nebb_pkg::*;
  localparam int K = 8;

  logic [COORD_W-1:0] mx [2], my [2];
  logic [PORT_W-1:0]  op [2], nr [2], lr [2];
  dest_t              d  [2];

  la_route #(.K(K), .TORUS(1'b0)) u_mesh (
    .my_x(mx[0]), .my_y(my[0]), .out_port(op[0]), .dest(d[0]), .next_route(nr[0]), .local_route(lr[0]));
  la_route #(.K(K), .TORUS(1'b1)) u_torus (
    .my_x(mx[1]), .my_y(my[1]), .out_port(op[1]), .dest(d[1]), .next_route(nr[1]), .local_route(lr[1]));

  int checks = 0, failures = 0;

  function automatic int ring_dist(int a, int b, bit tor);
    int f;
    if (!tor) return (a > b) ? a - b : b - a;
    f = (b - a + K) % K;
    return (f <= K - f) ? f : K - f;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2; t++) begin
      for (int s = 0; s < K * K; s++) begin
        for (int e = 0; e < K * K * 4; e++) begin
          int x, y, hops, min_h, port;
          bit seen_y, ok;
          x = s % K; y = s / K;
          d[t].x = COORD_W'((e / 4) % K);
          d[t].y = COORD_W'((e / 4) / K);
          d[t].l = LOCAL_W'(e % 4);
          mx[t] = COORD_W'(x); my[t] = COORD_W'(y); op[t] = P_XP;
          #1;
          port = int'(lr[t]);
          hops = 0; seen_y = 0; ok = 1;
          min_h = ring_dist(x, int'(d[t].x), t == 1) + ring_dist(y, int'(d[t].y), t == 1);
          while (port < 4 && hops <= 2 * K) begin
            if (port >= 2) seen_y = 1;
            else if (seen_y) ok = 0;           // X after Y
            if (t == 0 && ((port == 0 && x == K - 1) || (port == 1 && x == 0) ||
                           (port == 2 && y == K - 1) || (port == 3 && y == 0))) ok = 0;
            mx[t] = COORD_W'(x); my[t] = COORD_W'(y); op[t] = PORT_W'(port);
            #1;
            case (port)
              0: x = (x + 1) % K;
              1: x = (x + K - 1) % K;
              2: y = (y + 1) % K;
              default: y = (y + K - 1) % K;
            endcase
            port = int'(nr[t]);
            hops++;
          end
          checks++;
          if (!ok || hops != min_h || x != int'(d[t].x) || y != int'(d[t].y) || port != 4 + int'(d[t].l)) begin
            failures++;
            if (failures < 10)
              $display("FAIL torus=%0d src %0d dest %0d: hops %0d (min %0d) end (%0d,%0d) port %0d",
                       t, s, e, hops, min_h, x, y, port);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
