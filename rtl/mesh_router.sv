// mesh_router: multicast router of Violet's 2D-mesh network.
//
// Each packet is one flit holding a whole 64-byte line plus a header that
// lists every destination tile as a bit mask (tile id = y*MESH_X + x).
// Routing is dimension-ordered (X first, then Y) and a packet forks at any
// router: the destinations still to be served are split into the set that
// lies east, west, north (same column, larger y), south (same column,
// smaller y) and the local tile, and each output gets a copy whose mask is
// just its share. Branches are served independently: an output that is busy
// does not hold back the others, the input remembers which destinations it
// has already forwarded and frees its buffer when none are left. This is how
// one push from an LLC slice reaches many cores while crossing each link
// once. Destination lists in the header and forking at any router follow
// the paper; XY order, per-branch service, FIFO depth and round-robin
// arbitration are this design's choices.
//
// Interface: five input and five output channels (index P_LOCAL, P_EAST,
// P_WEST, P_NORTH, P_SOUTH), each valid/ready with a PKT_BASE_W+NTILES-bit
// packet. Timing: a packet entering an input FIFO can leave through the
// registered output stage one cycle later, so one hop costs two cycles.
module mesh_router
  import violet_pkg::*;
#(
  parameter int unsigned MESH_X = 64,
  parameter int unsigned MESH_Y = 32,
  parameter int unsigned X      = 0,
  parameter int unsigned Y      = 0,
  parameter int unsigned DEPTH  = 2,
  localparam int unsigned NT    = MESH_X * MESH_Y,
  localparam int unsigned PKT_W = PKT_BASE_W + NT
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid  [NPORTS],
  output logic             in_ready  [NPORTS],
  input  logic [PKT_W-1:0] in_pkt    [NPORTS],
  output logic             out_valid [NPORTS],
  input  logic             out_ready [NPORTS],
  output logic [PKT_W-1:0] out_pkt   [NPORTS],
  output logic             ev_fork          // a head packet left on 2+ outputs at once
);

  // Which destinations each output port leads to (constant per router).
  function automatic logic [NT-1:0] region(int unsigned port);
    logic [NT-1:0] m;
    m = '0;
    for (int unsigned t = 0; t < NT; t++) begin
      int unsigned tx, ty;
      tx = t % MESH_X;
      ty = t / MESH_X;
      unique case (port)
        P_LOCAL: m[t] = (tx == X) && (ty == Y);
        P_EAST:  m[t] = (tx > X);
        P_WEST:  m[t] = (tx < X);
        P_NORTH: m[t] = (tx == X) && (ty > Y);
        default: m[t] = (tx == X) && (ty < Y);
      endcase
    end
    return m;
  endfunction

  logic [NT-1:0] REGION [NPORTS];
  always_comb for (int p = 0; p < NPORTS; p++) REGION[p] = region(p);

  // Input buffers.
  logic             hv   [NPORTS];
  logic             hpop [NPORTS];
  logic [PKT_W-1:0] hpkt [NPORTS];
  logic [NT-1:0]    served [NPORTS];   // destinations already forwarded
  logic [NT-1:0]    rem    [NPORTS];   // destinations still to forward

  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    sync_fifo #(.WIDTH(PKT_W), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid(in_valid[i]), .in_ready(in_ready[i]), .in_data(in_pkt[i]),
      .out_valid(hv[i]), .out_ready(hpop[i]), .out_data(hpkt[i]));
    assign rem[i] = hv[i] ? (hpkt[i][PKT_W-1 -: NT] & ~served[i]) : '0;
  end

  // Output arbitration: round robin among inputs whose head needs the port.
  logic [$clog2(NPORTS)-1:0] rr    [NPORTS];
  logic                      gnt_v [NPORTS];
  logic [$clog2(NPORTS)-1:0] gnt_i [NPORTS];
  logic                      oreg_free [NPORTS];

  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      oreg_free[o] = !out_valid[o] || out_ready[o];
      gnt_v[o] = 1'b0;
      gnt_i[o] = '0;
      for (int k = 0; k < NPORTS; k++) begin
        int unsigned i;
        i = (int'(rr[o]) + k) % NPORTS;
        if (!gnt_v[o] && oreg_free[o] && |(rem[i] & REGION[o])) begin
          gnt_v[o] = 1'b1;
          gnt_i[o] = ($clog2(NPORTS))'(i);
        end
      end
    end
  end

  // Per input: destinations granted this cycle, and whether it is done.
  logic [NT-1:0] took [NPORTS];
  logic [2:0]    nbranch [NPORTS];
  always_comb begin
    for (int i = 0; i < NPORTS; i++) begin
      took[i]    = '0;
      nbranch[i] = '0;
      for (int o = 0; o < NPORTS; o++)
        if (gnt_v[o] && gnt_i[o] == ($clog2(NPORTS))'(i)) begin
          took[i]    |= rem[i] & REGION[o];
          nbranch[i] += 3'd1;
        end
      hpop[i] = hv[i] && (rem[i] != '0) && ((rem[i] & ~took[i]) == '0);
    end
    ev_fork = 1'b0;
    for (int i = 0; i < NPORTS; i++) if (nbranch[i] > 3'd1) ev_fork = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPORTS; p++) begin
        served[p]    <= '0;
        rr[p]        <= '0;
        out_valid[p] <= 1'b0;
        out_pkt[p]   <= '0;
      end
    end else begin
      for (int i = 0; i < NPORTS; i++)
        served[i] <= hpop[i] ? '0 : (served[i] | took[i]);
      for (int o = 0; o < NPORTS; o++) begin
        if (gnt_v[o]) begin
          out_valid[o] <= 1'b1;
          out_pkt[o]   <= {rem[gnt_i[o]] & REGION[o], hpkt[gnt_i[o]][PKT_BASE_W-1:0]};
          rr[o]        <= ($clog2(NPORTS))'((int'(gnt_i[o]) + 1) % NPORTS);
        end else if (out_ready[o]) begin
          out_valid[o] <= 1'b0;
        end
      end
    end
  end

  // A packet whose head mask is empty would sit forever.
  for (genvar i = 0; i < NPORTS; i++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     hv[i] |-> (hpkt[i][PKT_W-1 -: NT] != '0));
  end

endmodule
