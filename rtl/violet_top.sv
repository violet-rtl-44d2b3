// violet_top: the Violet chip (the Vi2048 configuration by default).
//
// MESH_X x MESH_Y identical tiles (64 x 32 = 2048 by default) on a 2D mesh,
// a global thread scheduler, and one memory channel per HBM stack (two).
// Tile t sits at x = t mod MESH_X, y = t / MESH_X; its east neighbour is
// t+1, its north neighbour t+MESH_X. Line address L is homed in the LLC
// slice of tile (L mod NTILES); the slices of the lower half of the tiles
// share HBM channel 0, the upper half channel 1.
//
// What is outside the chip's logic comes out as ports: the host interface
// (a PCIe-like link in the paper) is replaced by a simple access port that
// reads/writes LLC lines and loads instruction memories, data movement
// programs and the scheduler's work queue; the HBM controllers, PHYs and
// stacks are replaced by two line-granular memory ports (valid/ready
// request, resp_valid for reads, any latency, in order).
//
// Event counters (32-bit, free-running since reset) make the chip's
// mechanisms visible: multicast forks in routers, L1 stalls waiting for
// pushed lines, bundles split for register-file ports, transposed MACs,
// transpose-engine bank swaps, LLC misses and write-backs, and scheduler
// waits for a busy engine.
//
// The 64 x 32 arrangement of the 2048 tiles is this design's choice (the
// paper gives 2048 cores and a 2D mesh, not its shape).
module violet_top
  import violet_pkg::*;
#(
  parameter int unsigned MESH_X     = 64,
  parameter int unsigned MESH_Y     = 32,
  parameter int unsigned L1_LINES   = 512,
  parameter int unsigned L2_LINES   = 256,
  parameter int unsigned LLC_LINES  = 1024,
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned NDESC      = 16,
  parameter int unsigned NWORK      = 64,
  localparam int unsigned NT     = MESH_X * MESH_Y,
  localparam int unsigned TW     = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned QW     = $clog2(NWORK),
  localparam int unsigned PKT_W  = PKT_BASE_W + NT,
  localparam int unsigned DESC_W = 1 + 2*LADDR_W + 16 + 2 + NT + 1,
  localparam int unsigned HOST_W = (DESC_W > VLEN_BITS) ? DESC_W : VLEN_BITS,
  localparam int unsigned ITEM_W = 1 + TW + 8 + 32,
  localparam int unsigned NMEM   = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // host access port
  input  logic              host_valid,
  output logic              host_ready,
  input  logic [TW-1:0]     host_tile,
  input  host_tgt_e         host_tgt,
  input  logic              host_we,
  input  logic [31:0]       host_addr,
  input  logic [HOST_W-1:0] host_wdata,
  output logic              host_rvalid,
  output vec_t              host_rdata,
  // scheduler work queue (host)
  input  logic              wq_we,
  input  logic [QW-1:0]     wq_addr,
  input  logic [ITEM_W-1:0] wq_data,
  input  logic              sched_go,
  input  logic [QW:0]       sched_count,
  output logic              sched_busy,
  output logic              sched_done,
  // HBM channels
  output logic              mem_valid      [NMEM],
  input  logic              mem_ready      [NMEM],
  output logic              mem_we         [NMEM],
  output laddr_t            mem_addr       [NMEM],
  output vec_t              mem_wdata      [NMEM],
  input  logic              mem_resp_valid [NMEM],
  input  vec_t              mem_resp_rdata [NMEM],
  // event counters
  output logic [31:0]       cnt_fork,
  output logic [31:0]       cnt_l1_stall,
  output logic [31:0]       cnt_split,
  output logic [31:0]       cnt_vfma,
  output logic [31:0]       cnt_te_swap,
  output logic [31:0]       cnt_llc_miss,
  output logic [31:0]       cnt_llc_wb,
  output logic [31:0]       cnt_sched_wait
);

  // ---------------- mesh wiring ----------------
  logic             ni_v [NT][NPORTS];
  logic             ni_r [NT][NPORTS];
  logic [PKT_W-1:0] ni_p [NT][NPORTS];
  logic             no_v [NT][NPORTS];
  logic             no_r [NT][NPORTS];
  logic [PKT_W-1:0] no_p [NT][NPORTS];

  logic [NT-1:0] core_busy, dm_busy;
  logic [NT-1:0] e_fork, e_stall, e_split, e_vfma, e_swap, e_miss, e_wb;
  logic [NT-1:0] t_host_ready, t_host_rvalid;
  vec_t          t_host_rdata [NT];

  logic          tm_valid [NT];
  logic          tm_ready [NT];
  logic          tm_we    [NT];
  laddr_t        tm_addr  [NT];
  vec_t          tm_wdata [NT];
  logic          tm_rvalid[NT];
  vec_t          tm_rdata [NMEM];

  logic          d_valid;
  work_kind_e    d_kind;
  logic [TW-1:0] d_tile;
  logic [7:0]    d_start;
  logic [31:0]   d_arg;
  logic          e_wait;

  for (genvar t = 0; t < NT; t++) begin : g_tile
    localparam int unsigned TX = t % MESH_X;
    localparam int unsigned TY = t / MESH_X;

    // link inputs from neighbours (the neighbour's opposite output)
    if (TX + 1 < MESH_X) begin : g_e
      assign ni_v[t][P_EAST] = no_v[t+1][P_WEST];
      assign ni_p[t][P_EAST] = no_p[t+1][P_WEST];
      assign no_r[t+1][P_WEST] = ni_r[t][P_EAST];
    end else begin : g_e_edge
      assign ni_v[t][P_EAST] = 1'b0;
      assign ni_p[t][P_EAST] = '0;
    end
    if (TX > 0) begin : g_w
      assign ni_v[t][P_WEST] = no_v[t-1][P_EAST];
      assign ni_p[t][P_WEST] = no_p[t-1][P_EAST];
      assign no_r[t-1][P_EAST] = ni_r[t][P_WEST];
    end else begin : g_w_edge
      assign ni_v[t][P_WEST] = 1'b0;
      assign ni_p[t][P_WEST] = '0;
    end
    if (TY + 1 < MESH_Y) begin : g_n
      assign ni_v[t][P_NORTH] = no_v[t+MESH_X][P_SOUTH];
      assign ni_p[t][P_NORTH] = no_p[t+MESH_X][P_SOUTH];
      assign no_r[t+MESH_X][P_SOUTH] = ni_r[t][P_NORTH];
    end else begin : g_n_edge
      assign ni_v[t][P_NORTH] = 1'b0;
      assign ni_p[t][P_NORTH] = '0;
    end
    if (TY > 0) begin : g_s
      assign ni_v[t][P_SOUTH] = no_v[t-MESH_X][P_NORTH];
      assign ni_p[t][P_SOUTH] = no_p[t-MESH_X][P_NORTH];
      assign no_r[t-MESH_X][P_NORTH] = ni_r[t][P_SOUTH];
    end else begin : g_s_edge
      assign ni_v[t][P_SOUTH] = 1'b0;
      assign ni_p[t][P_SOUTH] = '0;
    end
    // outputs that leave the mesh are never used (routing keeps packets inside)
    if (TX + 1 == MESH_X) begin : g_eo
      assign no_r[t][P_EAST] = 1'b1;
    end
    if (TX == 0) begin : g_wo
      assign no_r[t][P_WEST] = 1'b1;
    end
    if (TY + 1 == MESH_Y) begin : g_no
      assign no_r[t][P_NORTH] = 1'b1;
    end
    if (TY == 0) begin : g_so
      assign no_r[t][P_SOUTH] = 1'b1;
    end
    assign ni_v[t][P_LOCAL] = 1'b0;
    assign ni_p[t][P_LOCAL] = '0;
    assign no_r[t][P_LOCAL] = 1'b0;

    logic h_sel;
    assign h_sel = host_valid && (host_tile == TW'(t));

    violet_tile #(
      .MESH_X(MESH_X), .MESH_Y(MESH_Y), .X(TX), .Y(TY),
      .L1_LINES(L1_LINES), .L2_LINES(L2_LINES), .LLC_LINES(LLC_LINES),
      .IMEM_DEPTH(IMEM_DEPTH), .NDESC(NDESC)
    ) u_tile (
      .clk, .rst_n,
      .nin_valid(ni_v[t]), .nin_ready(ni_r[t]), .nin_pkt(ni_p[t]),
      .nout_valid(no_v[t]), .nout_ready(no_r[t]), .nout_pkt(no_p[t]),
      .host_valid(h_sel), .host_ready(t_host_ready[t]), .host_tgt, .host_we,
      .host_addr, .host_wdata, .host_rvalid(t_host_rvalid[t]), .host_rdata(t_host_rdata[t]),
      .start_core(d_valid && d_kind == WORK_CORE && d_tile == TW'(t)),
      .start_dm(d_valid && d_kind == WORK_DM && d_tile == TW'(t)),
      .start_val(d_start), .start_arg(d_arg),
      .core_busy(core_busy[t]), .dm_busy(dm_busy[t]),
      .mem_req_valid(tm_valid[t]), .mem_req_ready(tm_ready[t]), .mem_req_we(tm_we[t]),
      .mem_req_addr(tm_addr[t]), .mem_req_wdata(tm_wdata[t]),
      .mem_resp_valid(tm_rvalid[t]), .mem_resp_rdata(tm_rdata[t / ((NT + NMEM - 1) / NMEM)]),
      .ev_fork(e_fork[t]), .ev_l1_stall(e_stall[t]), .ev_split(e_split[t]), .ev_vfma(e_vfma[t]),
      .ev_te_swap(e_swap[t]), .ev_llc_miss(e_miss[t]), .ev_llc_wb(e_wb[t]));
  end

  // ---------------- host port ----------------
  assign host_ready  = t_host_ready[host_tile];
  assign host_rvalid = |t_host_rvalid;
  always_comb begin
    host_rdata = '0;
    for (int t = 0; t < NT; t++) if (t_host_rvalid[t]) host_rdata = t_host_rdata[t];
  end

  // ---------------- scheduler ----------------
  thread_scheduler #(.NTILES(NT), .NWORK(NWORK)) u_sched (
    .clk, .rst_n, .wq_we, .wq_addr, .wq_data, .go(sched_go), .count(sched_count),
    .busy(sched_busy), .all_done(sched_done), .core_busy, .dm_busy,
    .disp_valid(d_valid), .disp_kind(d_kind), .disp_tile(d_tile), .disp_start(d_start),
    .disp_arg(d_arg), .ev_wait(e_wait));

  // ---------------- HBM channels ----------------
  localparam int unsigned PER = (NT + NMEM - 1) / NMEM;   // tiles per channel
  for (genvar c = 0; c < NMEM; c++) begin : g_mem
    localparam int unsigned LO = c * PER;
    localparam int unsigned CN = (LO + PER <= NT) ? PER : NT - LO;
    logic   a_v [CN];
    logic   a_r [CN];
    logic   a_w [CN];
    laddr_t a_a [CN];
    vec_t   a_d [CN];
    logic   a_rv[CN];
    for (genvar k = 0; k < CN; k++) begin : g_k
      assign a_v[k] = tm_valid[LO+k];
      assign a_w[k] = tm_we[LO+k];
      assign a_a[k] = tm_addr[LO+k];
      assign a_d[k] = tm_wdata[LO+k];
      assign tm_ready[LO+k]  = a_r[k];
      assign tm_rvalid[LO+k] = a_rv[k];
    end
    mem_arbiter #(.N(CN)) u_arb (
      .clk, .rst_n,
      .req_valid(a_v), .req_ready(a_r), .req_we(a_w), .req_addr(a_a), .req_wdata(a_d),
      .resp_valid(a_rv), .resp_rdata(tm_rdata[c]),
      .m_valid(mem_valid[c]), .m_ready(mem_ready[c]), .m_we(mem_we[c]), .m_addr(mem_addr[c]),
      .m_wdata(mem_wdata[c]), .m_resp_valid(mem_resp_valid[c]), .m_resp_rdata(mem_resp_rdata[c]));
  end

  // ---------------- event counters ----------------
  function automatic logic [31:0] pop(logic [NT-1:0] v);
    pop = '0;
    for (int i = 0; i < NT; i++) pop += 32'(v[i]);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_fork <= '0; cnt_l1_stall <= '0; cnt_split <= '0; cnt_vfma <= '0;
      cnt_te_swap <= '0; cnt_llc_miss <= '0; cnt_llc_wb <= '0; cnt_sched_wait <= '0;
    end else begin
      cnt_fork       <= cnt_fork     + pop(e_fork);
      cnt_l1_stall   <= cnt_l1_stall + pop(e_stall);
      cnt_split      <= cnt_split    + pop(e_split);
      cnt_vfma       <= cnt_vfma     + pop(e_vfma);
      cnt_te_swap    <= cnt_te_swap  + pop(e_swap);
      cnt_llc_miss   <= cnt_llc_miss + pop(e_miss);
      cnt_llc_wb     <= cnt_llc_wb   + pop(e_wb);
      cnt_sched_wait <= cnt_sched_wait + 32'(e_wait);
    end
  end

endmodule
