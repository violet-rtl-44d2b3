// tb_violet_tile: one tile (x=0 of a 2 x 1 mesh) with a behavioural memory
// behind its LLC slice and a behavioural neighbour on the east link.
//  1. The host writes two lines into the LLC slice (each a write-allocate
//     miss that fetches from memory first).
//  2. A data movement program pushes both lines to both tiles' L1s: the
//     local copy fills the L1, the east link must carry the packet with
//     only the east tile left in its mask.
//  3. Packets arriving from the east fill the L2 slice and write a line of
//     the LLC slice; a second program pushes the L2 line back east.
//  4. A micro-kernel loads the two pushed L1 lines, adds them (int32) and
//     stores the sum into the LLC slice; the host reads everything back.
module tb_violet_tile;
  import violet_pkg::*;
  localparam int unsigned MX = 2, MY = 1, NT = 2, PW = PKT_BASE_W + NT;
  localparam int unsigned DESC_W = 1 + 2*LADDR_W + 16 + 2 + NT + 1;
  localparam int unsigned HOST_W = VLEN_BITS;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;

  logic nin_valid [NPORTS], nin_ready [NPORTS], nout_valid [NPORTS], nout_ready [NPORTS];
  logic [PW-1:0] nin_pkt [NPORTS], nout_pkt [NPORTS];
  logic host_valid, host_ready, host_we, host_rvalid; host_tgt_e host_tgt;
  logic [31:0] host_addr; logic [HOST_W-1:0] host_wdata; vec_t host_rdata;
  logic start_core, start_dm; logic [7:0] start_val; logic [31:0] start_arg;
  logic core_busy, dm_busy;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  laddr_t mem_req_addr; vec_t mem_req_wdata, mem_resp_rdata;
  logic ev_fork, ev_l1_stall, ev_split, ev_vfma, ev_te_swap, ev_llc_miss, ev_llc_wb;

  violet_tile #(.MESH_X(MX), .MESH_Y(MY), .X(0), .Y(0), .LLC_LINES(8)) dut (.*);

  always #5 clk = ~clk;

  vec_t mem [laddr_t];
  logic mb; int ml; laddr_t ma;
  assign mem_req_ready = !mb;
  always @(posedge clk) begin
    mem_resp_valid <= 0;
    if (!rst_n) mb <= 0;
    else if (mb) begin
      if (ml == 0) begin mem_resp_valid <= 1; mem_resp_rdata <= mem.exists(ma) ? mem[ma] : '0; mb <= 0; end
      else ml <= ml - 1;
    end else if (mem_req_valid) begin
      if (mem_req_we) mem[mem_req_addr] = mem_req_wdata;
      else begin mb <= 1; ma <= mem_req_addr; ml <= 3; end
    end
  end

  // east link: collect packets leaving eastwards
  logic [PW-1:0] east_q [$];
  always @(posedge clk) if (rst_n && nout_valid[P_EAST] && nout_ready[P_EAST]) east_q.push_back(nout_pkt[P_EAST]);

  task automatic host_op(host_tgt_e tgt, logic we, int addr, logic [HOST_W-1:0] wd, output vec_t rd);
    @(negedge clk);
    host_valid = 1; host_tgt = tgt; host_we = we; host_addr = 32'(addr); host_wdata = wd;
    while (!host_ready) @(negedge clk);
    @(posedge clk); #1 host_valid = 0;
    if (tgt == HOST_LLC) begin
      while (!host_rvalid) @(negedge clk);
      rd = host_rdata;
    end
  endtask

  task automatic east_send(logic [PW-1:0] p);
    @(negedge clk);
    nin_valid[P_EAST] = 1; nin_pkt[P_EAST] = p;
    while (!nin_ready[P_EAST]) @(negedge clk);
    @(posedge clk); #1 nin_valid[P_EAST] = 0;
  endtask

  task automatic start(logic core, int v, int arg);
    @(negedge clk);
    start_core = core; start_dm = !core; start_val = 8'(v); start_arg = 32'(arg);
    @(negedge clk); start_core = 0; start_dm = 0;
    @(negedge clk);
    while (core ? core_busy : dm_busy) @(negedge clk);
  endtask

  function automatic logic [31:0] s0(opcode_e op, int a, int b, int imm);
    return {op, 5'(a), 5'(b), 16'(imm)};
  endfunction
  function automatic logic [31:0] s1(opcode_e op, int a, int b, int c);
    return {op, 5'(a), 5'(b), 5'(c), 11'd0};
  endfunction

  function automatic vec_t rnd();
    vec_t v;
    for (int i = 0; i < 16; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_miss = 0;
  always @(posedge clk) if (ev_llc_miss) n_miss++;

  initial begin
    vec_t rd, x, y, z, w, sum;
    for (int p = 0; p < NPORTS; p++) begin nin_valid[p] = 0; nin_pkt[p] = '0; nout_ready[p] = 1; end
    host_valid = 0; host_tgt = HOST_LLC; host_we = 0; host_addr = 0; host_wdata = 0;
    start_core = 0; start_dm = 0; start_val = 0; start_arg = 0;
    x = rnd(); y = rnd(); z = rnd(); w = rnd();
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1. LLC lines 10 and 12 (even lines are homed at tile 0)
    host_op(HOST_LLC, 1, 10, x, rd);
    host_op(HOST_LLC, 1, 12, y, rd);
    checks++; if (n_miss != 2) failures++;
    // 2. push both to L1 of tiles 0 and 1
    host_op(HOST_DMEM, 1, 0, HOST_W'({1'b0, laddr_t'(10), 16'd1, DST_L1, laddr_t'(10), 2'b11, 1'b0}), rd);
    host_op(HOST_DMEM, 1, 1, HOST_W'({1'b0, laddr_t'(12), 16'd1, DST_L1, laddr_t'(12), 2'b11, 1'b1}), rd);
    start(0, 0, 0);
    repeat (5) @(negedge clk);
    checks++; if (east_q.size() != 2) failures++;
    if (east_q.size() == 2) begin
      checks++; if (east_q[0] !== {2'b10, DST_L1, laddr_t'(10), x}) failures++;
      checks++; if (east_q[1] !== {2'b10, DST_L1, laddr_t'(12), y}) failures++;
    end
    east_q.delete();
    // 3. from the east: an L2 fill and an LLC write
    east_send({2'b01, DST_L2, laddr_t'(40), z});
    east_send({2'b01, DST_LLC, laddr_t'(14), w});
    repeat (10) @(negedge clk);
    host_op(HOST_DMEM, 1, 2, HOST_W'({1'b1, laddr_t'(40), 16'd1, DST_L1, laddr_t'(41), 2'b10, 1'b1}), rd);
    start(0, 2, 0);
    repeat (5) @(negedge clk);
    checks++; if (east_q.size() != 1 || east_q[0] !== {2'b10, DST_L1, laddr_t'(41), z}) failures++;
    host_op(HOST_LLC, 0, 14, '0, rd);
    checks++; if (rd !== w) failures++;
    // 4. kernel: v1 = L1[10], v2 = L1[12], v3 = v1 + v2, LLC[16] = v3
    host_op(HOST_IMEM, 1, 0, HOST_W'({32'd0, s0(OP_VLD, 1, 0, 10 * 64)}), rd);
    host_op(HOST_IMEM, 1, 1, HOST_W'({32'd0, s0(OP_VLD, 2, 0, 12 * 64)}), rd);
    host_op(HOST_IMEM, 1, 2, HOST_W'({s1(OP_VADD, 3, 1, 2), 32'd0}), rd);
    host_op(HOST_IMEM, 1, 3, HOST_W'({32'd0, s0(OP_VST, 3, 1, 0)}), rd);
    host_op(HOST_IMEM, 1, 4, HOST_W'({32'd0, s0(OP_HALT, 0, 0, 0)}), rd);
    start(1, 0, 16 * 64);
    host_op(HOST_LLC, 0, 16, '0, rd);
    for (int i = 0; i < 16; i++) sum[32*i +: 32] = x[32*i +: 32] + y[32*i +: 32];
    checks++; if (rd !== sum) failures++;
    host_op(HOST_LLC, 0, 10, '0, rd);
    checks++; if (rd !== x) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
