// violet_tile: one tile of the Violet chip.
//
// The tile has two halves, as in the paper's tile figure.
//  Movement:      a mesh router, this tile's slice of the global LLC, its
//                 slice of the group L2, the private L1, and the data
//                 movement core that pushes lines from the LLC/L2 slices
//                 into the network.
//  Orchestration: the data orchestration core with its vector register
//                 file, transpose engine and SIMD engine.
// Packets leaving the router at the local port carry a level: DST_L1 fills
// the L1, DST_L2 fills the L2 slice, DST_LLC writes the LLC slice. The LLC
// slice has one request port shared by the host, the network, the data
// movement core and the orchestration core, in that fixed priority, with
// one request in flight (this design's choice). The host port reaches the
// LLC slice (read/write a line) and loads the core's instruction memory and
// the data movement program. start_core/start_dm come from the global
// thread scheduler. The LLC's memory port leaves the tile towards the HBM
// channel arbiters.
//
// Lint notes: the engines' done pulses, the transpose engine's bank flag
// and the core's transposed-load event are left unused on purpose; the
// scheduler watches the busy flags, and the top counts transposed MACs
// instead of transposed loads. The top bits of host_addr are unused
// because LLC line addresses are 28 bits.
module violet_tile
  import violet_pkg::*;
#(
  parameter int unsigned MESH_X     = 64,
  parameter int unsigned MESH_Y     = 32,
  parameter int unsigned X          = 0,
  parameter int unsigned Y          = 0,
  parameter int unsigned L1_LINES   = 512,   // 32 KB
  parameter int unsigned L2_LINES   = 256,   // 16 KB
  parameter int unsigned LLC_LINES  = 1024,  // 64 KB
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned NDESC      = 16,
  localparam int unsigned NT     = MESH_X * MESH_Y,
  localparam int unsigned PKT_W  = PKT_BASE_W + NT,
  localparam int unsigned DESC_W = 1 + 2*LADDR_W + 16 + 2 + NT + 1,
  localparam int unsigned HOST_W = (DESC_W > VLEN_BITS) ? DESC_W : VLEN_BITS
) (
  input  logic             clk,
  input  logic             rst_n,
  // mesh links: index P_EAST..P_SOUTH used, P_LOCAL ignored
  input  logic             nin_valid [NPORTS],
  output logic             nin_ready [NPORTS],
  input  logic [PKT_W-1:0] nin_pkt   [NPORTS],
  output logic             nout_valid[NPORTS],
  input  logic             nout_ready[NPORTS],
  output logic [PKT_W-1:0] nout_pkt  [NPORTS],
  // host access
  input  logic             host_valid,
  output logic             host_ready,
  input  host_tgt_e        host_tgt,
  input  logic             host_we,
  input  logic [31:0]      host_addr,   // LLC: line address; IMEM/DMEM: index
  input  logic [HOST_W-1:0] host_wdata, // low bits used for LLC line / IMEM bundle
  output logic             host_rvalid,
  output vec_t             host_rdata,
  // scheduler
  input  logic             start_core,
  input  logic             start_dm,
  input  logic [7:0]       start_val,
  input  logic [31:0]      start_arg,
  output logic             core_busy,
  output logic             dm_busy,
  // memory port of the LLC slice
  output logic             mem_req_valid,
  input  logic             mem_req_ready,
  output logic             mem_req_we,
  output laddr_t           mem_req_addr,
  output vec_t             mem_req_wdata,
  input  logic             mem_resp_valid,
  input  vec_t             mem_resp_rdata,
  // event pulses
  output logic             ev_fork,
  output logic             ev_l1_stall,
  output logic             ev_split,
  output logic             ev_vfma,
  output logic             ev_te_swap,
  output logic             ev_llc_miss,
  output logic             ev_llc_wb
);

  // ---------------- router ----------------
  logic             r_in_valid [NPORTS];
  logic             r_in_ready [NPORTS];
  logic [PKT_W-1:0] r_in_pkt   [NPORTS];
  logic             r_out_valid[NPORTS];
  logic             r_out_ready[NPORTS];
  logic [PKT_W-1:0] r_out_pkt  [NPORTS];

  logic             dm_pkt_valid, dm_pkt_ready;
  logic [PKT_W-1:0] dm_pkt;
  logic             loc_ready;

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      r_in_valid[p]  = nin_valid[p];
      r_in_pkt[p]    = nin_pkt[p];
      nin_ready[p]   = r_in_ready[p];
      nout_valid[p]  = r_out_valid[p];
      nout_pkt[p]    = r_out_pkt[p];
      r_out_ready[p] = nout_ready[p];
    end
    r_in_valid[P_LOCAL]  = dm_pkt_valid;
    r_in_pkt[P_LOCAL]    = dm_pkt;
    dm_pkt_ready         = r_in_ready[P_LOCAL];
    nin_ready[P_LOCAL]   = 1'b0;
    nout_valid[P_LOCAL]  = 1'b0;
    r_out_ready[P_LOCAL] = loc_ready;
  end

  mesh_router #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .X(X), .Y(Y)) u_router (
    .clk, .rst_n,
    .in_valid(r_in_valid), .in_ready(r_in_ready), .in_pkt(r_in_pkt),
    .out_valid(r_out_valid), .out_ready(r_out_ready), .out_pkt(r_out_pkt),
    .ev_fork);

  // Local delivery.
  logic       loc_v;
  dst_level_e loc_lvl;
  laddr_t     loc_addr;
  vec_t       loc_data;
  assign loc_v    = r_out_valid[P_LOCAL];
  assign loc_lvl  = dst_level_e'(r_out_pkt[P_LOCAL][VLEN_BITS+LADDR_W +: 2]);
  assign loc_addr = r_out_pkt[P_LOCAL][VLEN_BITS +: LADDR_W];
  assign loc_data = r_out_pkt[P_LOCAL][VLEN_BITS-1:0];

  // ---------------- LLC slice and its port arbiter ----------------
  typedef enum logic [1:0] {R_HOST, R_NET, R_DM, R_CORE} req_e;

  logic   rq_valid [4];
  logic   rq_ready [4];
  logic   rq_we    [4];
  laddr_t rq_addr  [4];
  vec_t   rq_wdata [4];

  logic   llc_req_valid, llc_req_ready, llc_resp_valid;
  logic   llc_req_we;
  laddr_t llc_req_addr;
  vec_t   llc_req_wdata, llc_resp_rdata;
  logic   pend;
  req_e   owner, sel;

  always_comb begin
    sel = R_CORE;
    for (int r = 3; r >= 0; r--) if (rq_valid[r]) sel = req_e'(r);
  end

  assign llc_req_valid = !pend && (rq_valid[0] || rq_valid[1] || rq_valid[2] || rq_valid[3]);
  assign llc_req_we    = rq_we[sel];
  assign llc_req_addr  = rq_addr[sel];
  assign llc_req_wdata = rq_wdata[sel];
  always_comb for (int r = 0; r < 4; r++) rq_ready[r] = !pend && (sel == req_e'(r)) && llc_req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend  <= 1'b0;
      owner <= R_HOST;
    end else begin
      if (llc_req_valid && llc_req_ready) begin
        pend  <= 1'b1;
        owner <= sel;
      end else if (llc_resp_valid) begin
        pend <= 1'b0;
      end
    end
  end

  llc_slice #(.LINES(LLC_LINES), .NTILES(NT)) u_llc (
    .clk, .rst_n,
    .req_valid(llc_req_valid), .req_ready(llc_req_ready), .req_we(llc_req_we),
    .req_addr(llc_req_addr), .req_wdata(llc_req_wdata),
    .resp_valid(llc_resp_valid), .resp_rdata(llc_resp_rdata),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_rdata,
    .ev_miss(ev_llc_miss), .ev_writeback(ev_llc_wb));

  // host requester
  logic host_llc;
  assign host_llc            = host_valid && host_tgt == HOST_LLC;
  assign rq_valid[R_HOST]    = host_llc;
  assign rq_we[R_HOST]       = host_we;
  assign rq_addr[R_HOST]     = laddr_t'(host_addr);
  assign rq_wdata[R_HOST]    = host_wdata[VLEN_BITS-1:0];
  assign host_ready          = host_llc ? rq_ready[R_HOST] : host_valid;
  assign host_rvalid         = llc_resp_valid && owner == R_HOST;
  assign host_rdata          = llc_resp_rdata;

  // network writes into the LLC
  assign rq_valid[R_NET]     = loc_v && loc_lvl == DST_LLC;
  assign rq_we[R_NET]        = 1'b1;
  assign rq_addr[R_NET]      = loc_addr;
  assign rq_wdata[R_NET]     = loc_data;
  assign loc_ready           = (loc_lvl == DST_LLC) ? rq_ready[R_NET] : 1'b1;

  // ---------------- L2 slice and L1 ----------------
  laddr_t dm_l2_addr;
  logic   dm_l2_hit;
  vec_t   dm_l2_data;

  l2_slice #(.LINES(L2_LINES)) u_l2 (
    .clk, .rst_n,
    .rd_addr(dm_l2_addr), .rd_hit(dm_l2_hit), .rd_data(dm_l2_data),
    .fill_en(loc_v && loc_lvl == DST_L2), .fill_addr(loc_addr), .fill_data(loc_data));

  laddr_t l1_addr [2];
  logic   l1_hit  [2];
  vec_t   l1_data [2];

  l1_cache #(.LINES(L1_LINES)) u_l1 (
    .clk, .rst_n,
    .rd_addr(l1_addr), .rd_hit(l1_hit), .rd_data(l1_data),
    .fill_en(loc_v && loc_lvl == DST_L1), .fill_addr(loc_addr), .fill_data(loc_data));

  // ---------------- data movement core ----------------
  logic dm_llc_valid, dm_done;   // dm_done: unused, busy is watched
  assign rq_we[R_DM]    = 1'b0;
  assign rq_wdata[R_DM] = '0;
  assign rq_valid[R_DM] = dm_llc_valid;

  dm_engine #(.NTILES(NT), .NDESC(NDESC)) u_dm (
    .clk, .rst_n,
    .prog_we(host_valid && host_we && host_tgt == HOST_DMEM),
    .prog_addr(host_addr[$clog2(NDESC)-1:0]), .prog_data(host_wdata[DESC_W-1:0]),
    .start(start_dm), .start_idx(start_val[$clog2(NDESC)-1:0]),
    .busy(dm_busy), .done(dm_done),
    .llc_req_valid(dm_llc_valid), .llc_req_ready(rq_ready[R_DM]), .llc_req_addr(rq_addr[R_DM]),
    .llc_resp_valid(llc_resp_valid && owner == R_DM), .llc_resp_rdata(llc_resp_rdata),
    .l2_rd_addr(dm_l2_addr), .l2_rd_hit(dm_l2_hit), .l2_rd_data(dm_l2_data),
    .pkt_valid(dm_pkt_valid), .pkt_ready(dm_pkt_ready), .pkt(dm_pkt));

  // ---------------- orchestration ----------------
  logic [1:0] te_wr_en;
  vec_t       te_l0, te_l1, te_rd;
  logic [3:0] te_col;
  logic [4:0] ra0, ra1, wa;
  vec_t       rd0, rd1, wd;
  logic       we;
  simd_op_e   sop;
  vec_t       sa, sb, sacc, sd;
  logic       core_done, te_bank, core_vld4t;   // unused, see header

  orch_core #(.IMEM_DEPTH(IMEM_DEPTH)) u_core (
    .clk, .rst_n,
    .imem_we(host_valid && host_we && host_tgt == HOST_IMEM),
    .imem_addr(host_addr[$clog2(IMEM_DEPTH)-1:0]), .imem_data(host_wdata[63:0]),
    .start(start_core), .start_pc(start_val[$clog2(IMEM_DEPTH)-1:0]), .start_arg,
    .busy(core_busy), .done(core_done),
    .l1_addr, .l1_hit, .l1_data,
    .te_wr_en, .te_wr_line0(te_l0), .te_wr_line1(te_l1), .te_rd_col(te_col), .te_rd_data(te_rd),
    .vrf_ra0(ra0), .vrf_rd0(rd0), .vrf_ra1(ra1), .vrf_rd1(rd1),
    .vrf_we(we), .vrf_wa(wa), .vrf_wd(wd),
    .simd_op(sop), .simd_a(sa), .simd_b(sb), .simd_acc(sacc), .simd_d(sd),
    .llc_req_valid(rq_valid[R_CORE]), .llc_req_ready(rq_ready[R_CORE]),
    .llc_req_we(rq_we[R_CORE]), .llc_req_addr(rq_addr[R_CORE]), .llc_req_wdata(rq_wdata[R_CORE]),
    .llc_resp_valid(llc_resp_valid && owner == R_CORE), .llc_resp_rdata(llc_resp_rdata),
    .ev_l1_stall, .ev_split, .ev_vfma, .ev_vld4t(core_vld4t));

  vrf u_vrf (.clk, .rst_n, .ra0, .rd0, .ra1, .rd1, .we, .wa, .wd);

  transpose_engine u_te (
    .clk, .rst_n, .wr_en(te_wr_en), .wr_line0(te_l0), .wr_line1(te_l1),
    .rd_col(te_col), .rd_data(te_rd), .rd_bank(te_bank), .block_done(ev_te_swap));

  simd_engine u_simd (.op(sop), .a(sa), .b(sb), .acc(sacc), .d(sd));

endmodule
