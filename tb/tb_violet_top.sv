// tb_violet_top: end-to-end run of the chip on a 2 x 2 mesh: an int8
// matrix multiply C[16 x 16] = A[16 x 64] * B[64 x 16], output stationary,
// one 16 x 4 chunk of C per core.
//  - A (16 lines) and B^T (16 lines, one per output column) start in HBM.
//  - Each tile's data movement program pushes the lines homed in its LLC
//    slice: every A line to all four L1s in one multicast packet, each B^T
//    line to the one core that needs it. The LLC slices miss and fetch
//    from HBM first.
//  - Each core runs the same micro-kernel (8 VLD4T through the transpose
//    engine, 64 VLB4X4 + VFMA, looped twice by DBNZ so C is doubled) and
//    writes its 4 output vectors into its own LLC slice.
//  - The scheduler gets the 4 data movement items, the 4 kernels and a
//    second kernel for tile 0, which must wait for the first.
// The host then reads C back from the LLC slices, and reads A lines through
// the same slices so that the dirty C lines are written back to HBM, where
// they are checked too. Every mechanism (multicast fork, L1 stall for a
// pushed line, bundle split, transposed MAC, transpose-engine swap, LLC
// miss, LLC write-back, scheduler wait) must occur at least once.
module tb_violet_top;
  import violet_pkg::*;
  localparam int unsigned MX = 2, MY = 2, NT = 4, TW = 2, NWORK = 64, QW = 6;
  localparam int unsigned DESC_W = 1 + 2*LADDR_W + 16 + 2 + NT + 1;
  localparam int unsigned HOST_W = (DESC_W > VLEN_BITS) ? DESC_W : VLEN_BITS;
  localparam int unsigned ITEM_W = 1 + TW + 8 + 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;

  logic host_valid, host_ready, host_we, host_rvalid;
  logic [TW-1:0] host_tile; host_tgt_e host_tgt; logic [31:0] host_addr;
  logic [HOST_W-1:0] host_wdata; vec_t host_rdata;
  logic wq_we; logic [QW-1:0] wq_addr; logic [ITEM_W-1:0] wq_data;
  logic sched_go; logic [QW:0] sched_count; logic sched_busy, sched_done;
  logic mem_valid [2], mem_ready [2], mem_we [2], mem_resp_valid [2];
  laddr_t mem_addr [2]; vec_t mem_wdata [2], mem_resp_rdata [2];
  logic [31:0] cnt_fork, cnt_l1_stall, cnt_split, cnt_vfma, cnt_te_swap, cnt_llc_miss,
               cnt_llc_wb, cnt_sched_wait;

  violet_top #(.MESH_X(MX), .MESH_Y(MY), .LLC_LINES(4)) dut (.*);

  always #5 clk = ~clk;

  // ---------------- HBM model (behavioural) ----------------
  vec_t hbm [laddr_t];
  for (genvar c = 0; c < 2; c++) begin : g_hbm
    logic b; int l; laddr_t a;
    assign mem_ready[c] = !b;
    always @(posedge clk) begin
      mem_resp_valid[c] <= 0;
      if (!rst_n) b <= 0;
      else if (b) begin
        if (l == 0) begin
          mem_resp_valid[c] <= 1;
          mem_resp_rdata[c] <= hbm.exists(a) ? hbm[a] : '0;
          b <= 0;
        end else l <= l - 1;
      end else if (mem_valid[c]) begin
        if (mem_we[c]) hbm[mem_addr[c]] = mem_wdata[c];
        else begin b <= 1; a <= mem_addr[c]; l <= 4 + ($urandom % 6); end
      end
    end
  end

  // ---------------- host helpers ----------------
  task automatic host_op(int tile, host_tgt_e tgt, logic we, int addr, logic [HOST_W-1:0] wd,
                         output vec_t rd);
    @(negedge clk);
    host_valid = 1; host_tile = TW'(tile); host_tgt = tgt; host_we = we;
    host_addr = 32'(addr); host_wdata = wd;
    while (!host_ready) @(negedge clk);
    @(posedge clk); #1 host_valid = 0;
    if (tgt == HOST_LLC) begin
      while (!host_rvalid) @(negedge clk);
      rd = host_rdata;
    end
  endtask

  function automatic logic [31:0] s0(opcode_e op, int a, int b, int imm);
    return {op, 5'(a), 5'(b), 16'(imm)};
  endfunction
  function automatic logic [31:0] s1(opcode_e op, int a, int b, int c);
    return {op, 5'(a), 5'(b), 5'(c), 11'd0};
  endfunction

  logic [63:0] prog [$];
  task automatic build_kernel(int t);
    int loop_pc;
    // s1 = byte address of this core's first output line; outputs of core
    // t are lines 256+4n+t (homed at tile t), i.e. s1 + 256*n bytes.
    // s4 = byte address of this core's first B^T line (128+4t).
    prog.delete();
    prog.push_back({s1(OP_VZERO, 16, 0, 0), s0(OP_LI, 2, 0, 'h1000)});
    prog.push_back({s1(OP_VZERO, 17, 0, 0), s0(OP_LI, 3, 0, 'h1040)});
    prog.push_back({s1(OP_VZERO, 18, 0, 0), s0(OP_LI, 4, 0, 'h2000 + 256 * t)});
    prog.push_back({s1(OP_VZERO, 19, 0, 0), s0(OP_LI, 5, 0, 2)});
    for (int i = 0; i < 8; i++) prog.push_back({32'd0, s0(OP_VLD4T, 2, 3, 128 * i)});
    loop_pc = prog.size();
    for (int n = 0; n < 4; n++)
      for (int j = 0; j < 16; j++)
        prog.push_back({s1(OP_VFMA, 16 + n, 0, j), s0(OP_VLB4X4, 0, 4, 64 * n + 4 * j)});
    prog.push_back({32'd0, s0(OP_DBNZ, 5, 0, loop_pc - prog.size())});
    for (int n = 0; n < 4; n++) prog.push_back({32'd0, s0(OP_VST, 16 + n, 1, 256 * n)});
    prog.push_back({32'd0, s0(OP_HALT, 0, 0, 0)});
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte A [16][64];
  byte BT [16][64];
  int  C [16][16];
  int  nitems;

  initial begin
    vec_t rd;
    host_valid = 0; host_tile = 0; host_tgt = HOST_LLC; host_we = 0; host_addr = 0; host_wdata = 0;
    wq_we = 0; wq_addr = 0; wq_data = 0; sched_go = 0; sched_count = 0;
    // A rows at lines 64..79, B^T rows at lines 128..143
    for (int m = 0; m < 16; m++) begin
      vec_t v;
      for (int k = 0; k < 64; k++) begin A[m][k] = byte'($urandom); v[8*k +: 8] = A[m][k]; end
      hbm[laddr_t'(64 + m)] = v;
    end
    for (int n = 0; n < 16; n++) begin
      vec_t v;
      for (int k = 0; k < 64; k++) begin BT[n][k] = byte'($urandom); v[8*k +: 8] = BT[n][k]; end
      hbm[laddr_t'(128 + n)] = v;
    end
    for (int m = 0; m < 16; m++) for (int n = 0; n < 16; n++) begin
      C[m][n] = 0;
      for (int k = 0; k < 64; k++) C[m][n] += int'(A[m][k]) * int'(BT[n][k]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // instruction memories
    for (int t = 0; t < NT; t++) begin
      build_kernel(t);
      for (int i = 0; i < prog.size(); i++) host_op(t, HOST_IMEM, 1, i, HOST_W'(prog[i]), rd);
    end
    // data movement programs: tile t holds A lines 64+4i+t and B^T lines 128+4i+t
    for (int t = 0; t < NT; t++) begin
      for (int i = 0; i < 4; i++) begin
        // A line: to every L1
        host_op(t, HOST_DMEM, 1, 2 * i,
                HOST_W'({1'b0, laddr_t'(64 + 4*i + t), 16'd1, DST_L1, laddr_t'(64 + 4*i + t), 4'b1111, 1'b0}), rd);
        // B^T line 128+4i+t is column 4i+t, needed by core i
        host_op(t, HOST_DMEM, 1, 2 * i + 1,
                HOST_W'({1'b0, laddr_t'(128 + 4*i + t), 16'd1, DST_L1, laddr_t'(128 + 4*i + t),
                         4'(1 << i), 1'(i == 3)}), rd);
      end
    end
    // work queue: 4 data movement programs, 4 kernels, tile 0 again
    nitems = 0;
    for (int t = 0; t < NT; t++) begin
      @(negedge clk); wq_we = 1; wq_addr = QW'(nitems++); wq_data = {WORK_DM, TW'(t), 8'd0, 32'd0};
    end
    for (int t = 0; t < NT; t++) begin
      @(negedge clk); wq_we = 1; wq_addr = QW'(nitems++);
      wq_data = {WORK_CORE, TW'(t), 8'd0, 32'((256 + t) * 64)};
    end
    @(negedge clk); wq_we = 1; wq_addr = QW'(nitems++); wq_data = {WORK_CORE, 2'd0, 8'd0, 32'(256 * 64)};
    @(negedge clk); wq_we = 0; sched_go = 1; sched_count = (QW+1)'(nitems);
    @(negedge clk); sched_go = 0;
    while (!sched_done) @(negedge clk);
    $display("run finished at cycle %0t", $time / 10);

    // read C from the LLC slices: core t computes columns 4t..4t+3
    // (B^T lines 128+4t+n) and stores column 4t+n at line 256+4n+t.
    for (int t = 0; t < NT; t++)
      for (int n = 0; n < 4; n++) begin
        host_op(t, HOST_LLC, 0, 256 + 4*n + t, '0, rd);
        for (int m = 0; m < 16; m++) begin
          checks++;
          if (int'(rd[32*m +: 32]) != 2 * C[m][4*t + n]) begin
            failures++;
            if (failures < 5) $display("C[%0d][%0d] got %0d exp %0d", m, 4*t+n, int'(rd[32*m +: 32]), 2*C[m][4*t+n]);
          end
        end
      end
    // evict the dirty outputs by touching A lines in the same sets
    for (int t = 0; t < NT; t++)
      for (int i = 0; i < 4; i++) host_op(t, HOST_LLC, 0, 64 + 4*i + t, '0, rd);
    repeat (20) @(negedge clk);
    for (int t = 0; t < NT; t++)
      for (int n = 0; n < 4; n++) begin
        vec_t v;
        v = hbm.exists(laddr_t'(256 + 4*n + t)) ? hbm[laddr_t'(256 + 4*n + t)] : '0;
        checks++;
        if (int'(v[31:0]) != 2 * C[0][4*t + n] || int'(v[511:480]) != 2 * C[15][4*t + n]) failures++;
      end

    $display("forks=%0d l1_stalls=%0d splits=%0d vfma=%0d te_swaps=%0d llc_miss=%0d llc_wb=%0d sched_wait=%0d",
             cnt_fork, cnt_l1_stall, cnt_split, cnt_vfma, cnt_te_swap, cnt_llc_miss, cnt_llc_wb, cnt_sched_wait);
    checks++; if (cnt_fork == 0) failures++;
    checks++; if (cnt_l1_stall == 0) failures++;
    checks++; if (cnt_split == 0) failures++;
    checks++; if (cnt_vfma != 5 * 128) failures++;
    checks++; if (cnt_te_swap != 5) failures++;
    checks++; if (cnt_llc_miss == 0) failures++;
    checks++; if (cnt_llc_wb == 0) failures++;
    checks++; if (cnt_sched_wait == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
