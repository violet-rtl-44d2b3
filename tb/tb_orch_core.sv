// tb_orch_core: runs real micro-kernels on the orchestration core, wired to
// the VRF, transpose engine and SIMD engine, with behavioural L1 and LLC
// models. Kernel 1 is the paper's matrix-multiply chunk: 16 A rows (K = 64,
// int8) go through the transpose engine with 8 VLD4T; for each of 4 output
// columns, 16 VLB4X4 broadcasts of B and 16 VFMA accumulate C[0..15][n]; a
// DBNZ loop runs the MAC part twice, so C doubles; VST writes the 4 output
// vectors to the LLC. A rows arrive in the L1 only after a delay, so loads
// stall first. Kernel 2 exercises VLD, VMAC4, VADD, VMUL, VMLA, VZERO and
// VLDL. Kernel 3 is 8 bundles of VLD4T next to VFMA and must take exactly
// 9 busy cycles (one bundle per cycle plus HALT). All results are compared
// with values computed here.
module tb_orch_core;
  import violet_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;

  logic imem_we; logic [7:0] imem_addr; logic [63:0] imem_data;
  logic start; logic [7:0] start_pc; logic [31:0] start_arg; logic busy, done;
  laddr_t l1_addr [2]; logic l1_hit [2]; vec_t l1_data [2];
  logic [1:0] te_wr_en; vec_t te_wr_line0, te_wr_line1, te_rd_data; logic [3:0] te_rd_col;
  logic [4:0] vrf_ra0, vrf_ra1, vrf_wa; vec_t vrf_rd0, vrf_rd1, vrf_wd; logic vrf_we;
  simd_op_e simd_op; vec_t simd_a, simd_b, simd_acc, simd_d;
  logic llc_req_valid, llc_req_ready, llc_req_we, llc_resp_valid;
  laddr_t llc_req_addr; vec_t llc_req_wdata, llc_resp_rdata;
  logic ev_l1_stall, ev_split, ev_vfma, ev_vld4t;

  orch_core dut (.*);
  vrf u_vrf (.clk, .rst_n, .ra0(vrf_ra0), .rd0(vrf_rd0), .ra1(vrf_ra1), .rd1(vrf_rd1),
             .we(vrf_we), .wa(vrf_wa), .wd(vrf_wd));
  transpose_engine u_te (.clk, .rst_n, .wr_en(te_wr_en), .wr_line0(te_wr_line0),
             .wr_line1(te_wr_line1), .rd_col(te_rd_col), .rd_data(te_rd_data),
             .rd_bank(), .block_done());
  simd_engine u_simd (.op(simd_op), .a(simd_a), .b(simd_b), .acc(simd_acc), .d(simd_d));

  always #5 clk = ~clk;

  // ---------------- memories ----------------
  vec_t l1m [laddr_t];
  int   l1_ready_at [laddr_t];
  int   cyc = 0;
  always @(posedge clk) cyc++;
  always_comb for (int p = 0; p < 2; p++) begin
    l1_hit[p]  = l1m.exists(l1_addr[p]) && (cyc >= l1_ready_at[l1_addr[p]]);
    l1_data[p] = l1m.exists(l1_addr[p]) ? l1m[l1_addr[p]] : '0;
  end
  vec_t llcm [laddr_t];
  logic lb; int lc; logic lwe; laddr_t la; vec_t lwd;
  assign llc_req_ready = !lb;
  always @(posedge clk) begin
    llc_resp_valid <= 0;
    if (!rst_n) lb <= 0;
    else if (lb) begin
      if (lc == 0) begin
        llc_resp_valid <= 1;
        llc_resp_rdata <= llcm.exists(la) ? llcm[la] : '0;
        if (lwe) llcm[la] = lwd;
        lb <= 0;
      end else lc <= lc - 1;
    end else if (llc_req_valid) begin
      lb <= 1; lc <= 1; lwe <= llc_req_we; la <= llc_req_addr; lwd <= llc_req_wdata;
    end
  end

  int n_stall = 0, n_split = 0, n_vfma = 0, n_tld = 0;
  always @(posedge clk) begin
    if (ev_l1_stall) n_stall++;
    if (ev_split) n_split++;
    if (ev_vfma) n_vfma++;
    if (ev_vld4t) n_tld++;
  end

  // ---------------- assembler ----------------
  function automatic logic [31:0] s0(opcode_e op, int a, int b, int imm);
    return {op, 5'(a), 5'(b), 16'(imm)};
  endfunction
  function automatic logic [31:0] s1(opcode_e op, int a, int b, int c);
    return {op, 5'(a), 5'(b), 5'(c), 11'd0};
  endfunction
  localparam logic [31:0] NOP = '0;
  int pcw;
  task automatic emit(logic [31:0] x0, logic [31:0] x1);
    @(negedge clk);
    imem_we = 1; imem_addr = 8'(pcw); imem_data = {x1, x0};
    pcw++;
    @(negedge clk); imem_we = 0;
  endtask

  task automatic run(int pc, int arg, output int busy_cycles);
    @(negedge clk);
    start = 1; start_pc = 8'(pc); start_arg = 32'(arg);
    @(negedge clk); start = 0;
    busy_cycles = 0;
    while (busy) begin busy_cycles++; @(negedge clk); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // data: A at byte 0x1000 (lines 64..79), BT (one line per column n) at 0x2000
  byte A [16][64];
  byte BT [4][64];
  int  C [16][4];

  initial begin
    int k1, k2, k3, bc, loop_pc;
    imem_we = 0; imem_addr = 0; imem_data = 0; start = 0; start_pc = 0; start_arg = 0;
    for (int m = 0; m < 16; m++) begin
      vec_t v;
      for (int k = 0; k < 64; k++) begin A[m][k] = byte'($urandom); v[8*k +: 8] = A[m][k]; end
      l1m[laddr_t'(64 + m)] = v;
      l1_ready_at[laddr_t'(64 + m)] = 0;
    end
    for (int n = 0; n < 4; n++) begin
      vec_t v;
      for (int k = 0; k < 64; k++) begin BT[n][k] = byte'($urandom); v[8*k +: 8] = BT[n][k]; end
      l1m[laddr_t'(128 + n)] = v;
      l1_ready_at[laddr_t'(128 + n)] = 0;
    end
    for (int m = 0; m < 16; m++) for (int n = 0; n < 4; n++) begin
      C[m][n] = 0;
      for (int k = 0; k < 64; k++) C[m][n] += int'(A[m][k]) * int'(BT[n][k]);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---- kernel 1 at pc 0: s1 = output line address (byte) ----
    pcw = 0;
    emit(s0(OP_LI, 2, 0, 'h1000), s1(OP_VZERO, 16, 0, 0));
    emit(s0(OP_LI, 3, 0, 'h1040), s1(OP_VZERO, 17, 0, 0));
    emit(s0(OP_LI, 4, 0, 'h2000), s1(OP_VZERO, 18, 0, 0));
    emit(s0(OP_LI, 5, 0, 2),      s1(OP_VZERO, 19, 0, 0));
    for (int i = 0; i < 8; i++) emit(s0(OP_VLD4T, 2, 3, 128 * i), NOP);
    loop_pc = pcw;
    for (int n = 0; n < 4; n++)
      for (int j = 0; j < 16; j++)
        emit(s0(OP_VLB4X4, 0, 4, 64 * n + 4 * j), s1(OP_VFMA, 16 + n, 0, j));
    emit(s0(OP_DBNZ, 5, 0, loop_pc - pcw), NOP);
    for (int n = 0; n < 4; n++) emit(s0(OP_VST, 16 + n, 1, 64 * n), NOP);
    emit(s0(OP_HALT, 0, 0, 0), NOP);

    // ---- kernel 2 at pc 100 ----
    pcw = 100;
    emit(s0(OP_VLD, 2, 4, 0),   s1(OP_VZERO, 4, 0, 0));     // split: v2 = BT[0]
    emit(s0(OP_VLD, 3, 4, 64),  NOP);                        // v3 = BT[1]
    emit(NOP, s1(OP_VMAC4, 4, 2, 3));                        // v4 += dot4(v2, v3)
    emit(NOP, s1(OP_VADD, 5, 16, 17));
    emit(NOP, s1(OP_VMUL, 6, 16, 17));
    emit(NOP, s1(OP_VZERO, 7, 0, 0));
    emit(s0(OP_LI, 6, 0, 3), s1(OP_VMLA, 7, 16, 17));        // v7 = 0 + v16*v17
    emit(s0(OP_VLDL, 8, 1, 0), NOP);                         // v8 = LLC line (C column 0)
    for (int r = 4; r <= 8; r++) emit(s0(OP_VST, r, 1, 64 * (r + 4)), NOP);
    emit(s0(OP_HALT, 0, 0, 0), NOP);

    // ---- kernel 3 at pc 150: 8 x {VLD4T | VFMA} ----
    pcw = 150;
    for (int i = 0; i < 8; i++) emit(s0(OP_VLD4T, 2, 3, 128 * i), s1(OP_VFMA, 20, 21, i));
    emit(s0(OP_HALT, 0, 0, 0), NOP);

    // run kernel 1; outputs at byte 0x4000 (line 256). The A rows are
    // "pushed" into the L1 only some cycles after the kernel starts.
    for (int m = 0; m < 16; m++) l1_ready_at[laddr_t'(64 + m)] = cyc + 20 + 4 * m;
    run(0, 'h4000, k1);
    for (int n = 0; n < 4; n++) begin
      vec_t v;
      v = llcm.exists(laddr_t'(256 + n)) ? llcm[laddr_t'(256 + n)] : '0;
      for (int m = 0; m < 16; m++) begin
        checks++;
        if (int'(v[32*m +: 32]) != 2 * C[m][n]) begin
          failures++;
          if (failures < 5) $display("C[%0d][%0d] got %0d exp %0d", m, n, int'(v[32*m +: 32]), 2 * C[m][n]);
        end
      end
    end
    checks++; if (n_stall == 0) failures++;
    checks++; if (n_vfma != 128) begin failures++; $display("vfma %0d", n_vfma); end
    checks++; if (n_tld != 8) failures++;
    checks++; if (n_split != 128) begin failures++; $display("split %0d", n_split); end

    // kernel 2 (VRF still holds v16..v19 = 2C)
    run(100, 'h4000, k2);
    begin
      vec_t v4, v5, v6, v7, v8;
      v4 = llcm[laddr_t'(256 + 8)]; v5 = llcm[laddr_t'(256 + 9)]; v6 = llcm[laddr_t'(256 + 10)];
      v7 = llcm[laddr_t'(256 + 11)]; v8 = llcm[laddr_t'(256 + 12)];
      for (int i = 0; i < 16; i++) begin
        int d, c0, c1;
        d = 0;
        for (int r = 0; r < 4; r++) d += int'(BT[0][4*i+r]) * int'(BT[1][4*i+r]);
        c0 = 2 * C[i][0]; c1 = 2 * C[i][1];
        checks++; if (int'(v4[32*i +: 32]) != d) failures++;
        checks++; if (int'(v5[32*i +: 32]) != c0 + c1) failures++;
        checks++; if (int'(v6[32*i +: 32]) != c0 * c1) failures++;
        checks++; if (int'(v7[32*i +: 32]) != c0 * c1) failures++;
        checks++; if (int'(v8[32*i +: 32]) != c0) failures++;
      end
    end

    // kernel 3: one bundle per cycle
    run(150, 0, k3);
    checks++; if (k3 != 9) begin failures++; $display("kernel 3 took %0d cycles", k3); end
    $display("kernel cycles: %0d %0d %0d; stalls=%0d splits=%0d", k1, k2, k3, n_stall, n_split);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
