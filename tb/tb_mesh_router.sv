// tb_mesh_router: one router at (1,1) of a 3x3 mesh. Random packets with
// random destination masks enter on all five inputs while the outputs apply
// random back-pressure. Each packet must leave, exactly once, on every port
// whose region holds some of its destinations, carrying just those
// destinations (X first, then Y) and an unchanged payload. Checks that
// forks (one packet served on several ports in one cycle) occur, that
// nothing is lost or duplicated, and the two-cycle hop latency on an idle
// router.
module tb_mesh_router;
  import violet_pkg::*;
  localparam int unsigned MX = 3, MY = 3, NT = 9, PW = PKT_BASE_W + NT;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid [NPORTS], in_ready [NPORTS], out_valid [NPORTS], out_ready [NPORTS];
  logic [PW-1:0] in_pkt [NPORTS], out_pkt [NPORTS];
  logic ev_fork;
  int n_fork = 0;

  mesh_router #(.MESH_X(MX), .MESH_Y(MY), .X(1), .Y(1)) dut (.*);

  always #5 clk = ~clk;

  // expected deliveries: key = {port, payload}; value = mask
  logic [NT-1:0] expect_q [NPORTS][$];
  logic [PKT_BASE_W-1:0] expect_p [NPORTS][$];

  function automatic logic [NT-1:0] region(int p);
    logic [NT-1:0] m = '0;
    for (int t = 0; t < NT; t++) begin
      int x = t % MX, y = t / MX;
      case (p)
        0: m[t] = (x == 1 && y == 1);
        1: m[t] = x > 1;
        2: m[t] = x < 1;
        3: m[t] = x == 1 && y > 1;
        default: m[t] = x == 1 && y < 1;
      endcase
    end
    return m;
  endfunction

  int sent = 0, recv = 0, expected = 0;
  int seq = 0;
  logic rand_bp = 1;

  always @(posedge clk) if (rst_n && ev_fork) n_fork++;

  // receivers
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NPORTS; p++) begin
      if (out_valid[p] && out_ready[p]) begin
        int idx;
        idx = -1;
        for (int k = 0; k < expect_p[p].size(); k++)
          if (expect_p[p][k] == out_pkt[p][PKT_BASE_W-1:0] && idx < 0) idx = k;
        checks++;
        if (idx < 0 || expect_q[p][idx] != out_pkt[p][PW-1 -: NT]) begin
          failures++;
          if (failures < 5) $display("bad delivery on port %0d", p);
        end else begin
          expect_q[p].delete(idx);
          expect_p[p].delete(idx);
        end
        recv++;
      end
    end
  end
  always @(negedge clk) for (int p = 0; p < NPORTS; p++) out_ready[p] = rand_bp ? ($urandom % 4 != 0) : 1'b1;

  // senders
  task automatic send(int p, logic [NT-1:0] m);
    logic [PKT_BASE_W-1:0] body;
    body = {2'(seq % 3), 28'(seq), {16{32'(seq * 7 + p)}}};
    seq++;
    for (int o = 0; o < NPORTS; o++)
      if ((m & region(o)) != 0) begin
        expect_q[o].push_back(m & region(o));
        expect_p[o].push_back(body);
        expected++;
      end
    @(negedge clk);
    in_pkt[p] = {m, body};
    in_valid[p] = 1;
    while (!in_ready[p]) @(negedge clk);   // ready is stable between edges
    @(posedge clk);
    #1 in_valid[p] = 0;
    sent++;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NPORTS; p++) begin in_valid[p] = 0; in_pkt[p] = '0; out_ready[p] = 1; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // latency on an idle router: local -> east
    rand_bp = 0;
    begin
      int n;
      send(0, 9'b000_000_100);   // tile (2,0) lies east; accepted at the last edge
      n = 0;
      while (!out_valid[P_EAST]) begin @(negedge clk); n++; end
      // FIFO at edge k, output register at edge k+1: seen at the 2nd negedge
      checks++; if (n != 2) begin failures++; $display("hop latency %0d", n); end
    end
    repeat (4) @(posedge clk);
    rand_bp = 1;
    // traffic from all inputs; a router never sends a packet back towards
    // where it came from in XY routing, so masks are limited accordingly
    fork
      for (int p = 0; p < NPORTS; p++) begin
        automatic int pp = p;
        fork
          for (int k = 0; k < 60; k++) begin
            logic [NT-1:0] m;
            m = NT'($urandom);
            case (pp)
              P_EAST:  m &= ~region(P_EAST);                       // came from the east
              P_WEST:  m &= ~region(P_WEST);
              P_NORTH: m &= region(P_LOCAL) | region(P_SOUTH);    // Y phase only
              P_SOUTH: m &= region(P_LOCAL) | region(P_NORTH);
              default: ;
            endcase
            if (m == 0) m = region(P_LOCAL);
            send(pp, m);
          end
        join_none
      end
    join_none
    wait (sent == 301);
    rand_bp = 0;
    repeat (50) @(posedge clk);
    checks++; if (recv != expected) begin failures++; $display("recv %0d expected %0d", recv, expected); end
    for (int p = 0; p < NPORTS; p++) begin checks++; if (expect_q[p].size() != 0) failures++; end
    checks++; if (n_fork == 0) failures++;
    $display("sent=%0d deliveries=%0d forks=%0d", sent, recv, n_fork);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
