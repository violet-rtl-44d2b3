// orch_core: the data orchestration core of a Violet tile.
//
// A small in-order core that runs one micro-kernel at a time: the inner
// loop of an output-stationary matrix multiply or convolution chunk. It
// issues two instructions per cycle as a bundle of two 32-bit slots:
//   slot 0: memory, scalar or control (VLD, VLB4X4, VLD4T, VST, VLDL, LI,
//           ADDI, DBNZ, HALT)
//   slot 1: SIMD (VADD, VMUL, VMLA, VMAC4, VFMA, VZERO)
// (encodings in violet_pkg). A bundle normally executes in one cycle:
// operands are read combinationally from the VRF, L1, transpose engine and
// scalar registers, the SIMD result is computed combinationally, and
// results are written at the clock edge, so there are no pipeline hazards.
//
// Resources follow the paper's tile: the VRF has two read ports and one
// write port, the L1 two read ports, the SIMD engine does one vector MAC per
// cycle. When a bundle needs more than that it is split: slot 0 goes alone,
// slot 1 the next cycle. That happens when slot 0 touches the VRF (VLD,
// VLB4X4, VLDL, VST) while slot 1 is not a NOP. VMLA and VMAC4 read three
// registers and take two cycles. The typical matrix-multiply bundle,
// VLD4T (two L1 lines into the transpose engine) next to VFMA
// (v[a] += dot4(v[b], %tmm[c])), issues every cycle.
//
// Loads wait (stall) while their line is not yet in the L1; lines arrive
// there only by being pushed. A stalled bundle commits nothing. VST and
// VLDL reach the tile's own LLC slice, which is how the paper's in-LLC
// element-wise work and output chunks stay local. The two-slot bundle, the
// ISA details and the stall/split rules are this design's choices; the
// paper gives the instruction list (add, multiply, multiply-accumulate,
// loads with broadcast, transposed load, wide accumulate), two-issue and
// the port counts. Addresses are 32-bit byte addresses. Strided vector
// loads and FP16 arithmetic, both named by the paper, are not provided.
//
// Control: start (with start_pc, and start_arg which lands in scalar
// register 1) starts a kernel; done pulses when it executes HALT.
module orch_core
  import violet_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 256,
  localparam int unsigned PC_W = $clog2(IMEM_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // instruction memory load (host)
  input  logic               imem_we,
  input  logic [PC_W-1:0]    imem_addr,
  input  logic [63:0]        imem_data,   // {slot1, slot0}
  // control
  input  logic               start,
  input  logic [PC_W-1:0]    start_pc,
  input  logic [31:0]        start_arg,
  output logic               busy,
  output logic               done,
  // L1 read ports
  output laddr_t             l1_addr [2],
  input  logic               l1_hit  [2],
  input  vec_t               l1_data [2],
  // transpose engine
  output logic [1:0]         te_wr_en,
  output vec_t               te_wr_line0,
  output vec_t               te_wr_line1,
  output logic [3:0]         te_rd_col,
  input  vec_t               te_rd_data,
  // vector register file
  output logic [4:0]         vrf_ra0,
  input  vec_t               vrf_rd0,
  output logic [4:0]         vrf_ra1,
  input  vec_t               vrf_rd1,
  output logic               vrf_we,
  output logic [4:0]         vrf_wa,
  output vec_t               vrf_wd,
  // SIMD engine
  output simd_op_e           simd_op,
  output vec_t               simd_a,
  output vec_t               simd_b,
  output vec_t               simd_acc,
  input  vec_t               simd_d,
  // local LLC slice
  output logic               llc_req_valid,
  input  logic               llc_req_ready,
  output logic               llc_req_we,
  output laddr_t             llc_req_addr,
  output vec_t               llc_req_wdata,
  input  logic               llc_resp_valid,
  input  vec_t               llc_resp_rdata,
  // event pulses
  output logic               ev_l1_stall,   // a load waited for a pushed line
  output logic               ev_split,      // a bundle was split for ports
  output logic               ev_vfma,       // a transposed-operand MAC committed
  output logic               ev_vld4t       // a transposed load committed
);

  logic [63:0]     imem [IMEM_DEPTH];
  logic [PC_W-1:0] pc;
  logic [31:0]     sreg [NUM_SREGS];
  logic            running;
  logic            half;      // slot 0 of a split bundle has retired
  logic            pre;       // first cycle of a 3-read SIMD op done
  vec_t            lat_b, lat_c;
  logic            llc_wait;  // LLC request sent, waiting for the response

  always_ff @(posedge clk) if (imem_we) imem[imem_addr] <= imem_data;

  // ---------------- decode ----------------
  logic [31:0] i0, i1;
  opcode_e     op0, op1;
  logic [4:0]  a0, b0, a1, b1, c1;
  logic [15:0] imm0;
  assign i0   = imem[pc][31:0];
  assign i1   = imem[pc][63:32];
  assign op0  = opcode_e'(i0[31:26]);
  assign op1  = opcode_e'(i1[31:26]);
  assign a0   = i0[25:21];
  assign b0   = i0[20:16];
  assign imm0 = i0[15:0];
  assign a1   = i1[25:21];
  assign b1   = i1[20:16];
  assign c1   = i1[15:11];

  logic s0_vrf, s1_act, s1_three, split;
  assign s0_vrf   = op0 inside {OP_VLD, OP_VLB4X4, OP_VLDL, OP_VST};
  assign s1_act   = op1 inside {OP_VADD, OP_VMUL, OP_VMLA, OP_VMAC4, OP_VFMA, OP_VZERO};
  assign s1_three = op1 inside {OP_VMLA, OP_VMAC4};
  assign split    = s0_vrf && s1_act;

  // Which slots execute this cycle. Without a split, slot 0 of a bundle
  // with a 3-read SIMD op waits for that op's second cycle.
  logic ex0, ex1, s1_now;
  assign ex0    = running && !half && !(s1_act && s1_three && !pre && !split);
  assign ex1    = running && s1_act && (half || !split);
  assign s1_now = ex1 && (!s1_three || pre);

  // ---------------- slot 0 ----------------
  logic [31:0] ea;          // effective byte address
  logic [31:0] ea2;         // VLD4T first line: s[a] + imm
  assign ea  = sreg[b0[2:0]] + {{16{imm0[15]}}, imm0};
  assign ea2 = sreg[a0[2:0]] + {{16{imm0[15]}}, imm0};

  always_comb begin
    l1_addr[0] = laddr_t'(ea[31:6]);
    l1_addr[1] = '0;
    if (op0 == OP_VLD4T) begin
      l1_addr[0] = laddr_t'(ea2[31:6]);
      l1_addr[1] = laddr_t'(ea[31:6]);
    end
  end

  logic is_llc;
  assign is_llc = (op0 == OP_VST) || (op0 == OP_VLDL);

  // slot 0 finishes this cycle?
  logic s0_done;
  always_comb begin
    unique case (op0)
      OP_VLD, OP_VLB4X4: s0_done = l1_hit[0];
      OP_VLD4T:          s0_done = l1_hit[0] && l1_hit[1];
      OP_VST, OP_VLDL:   s0_done = llc_wait && llc_resp_valid;
      default:           s0_done = 1'b1;
    endcase
  end

  assign llc_req_valid = ex0 && is_llc && !llc_wait;
  assign llc_req_we    = (op0 == OP_VST);
  assign llc_req_addr  = laddr_t'(ea[31:6]);
  assign llc_req_wdata = vrf_rd0;

  assign te_wr_en    = (ex0 && op0 == OP_VLD4T && s0_done) ? 2'b11 : 2'b00;
  assign te_wr_line0 = l1_data[0];
  assign te_wr_line1 = l1_data[1];

  vec_t bcast;
  always_comb begin
    for (int i = 0; i < ACC_LANES; i++)
      bcast[32*i +: 32] = l1_data[0][32*ea[5:2] +: 32];
  end

  // ---------------- slot 1 ----------------
  always_comb begin
    unique case (op1)
      OP_VADD:           simd_op = SIMD_ADD;
      OP_VMUL:           simd_op = SIMD_MUL;
      OP_VMLA:           simd_op = SIMD_MLA;
      OP_VMAC4, OP_VFMA: simd_op = SIMD_DOT4;
      default:           simd_op = SIMD_ZERO;
    endcase
  end

  // VRF read ports. Slot 0 (VST) only reads when slot 1 is idle (split).
  always_comb begin
    vrf_ra0 = a1;
    vrf_ra1 = c1;
    if (ex0 && op0 == OP_VST) vrf_ra0 = a0;
    else unique case (op1)
      OP_VADD, OP_VMUL:  begin vrf_ra0 = b1; vrf_ra1 = c1; end
      OP_VFMA:           begin vrf_ra0 = a1; vrf_ra1 = b1; end
      OP_VMLA, OP_VMAC4: begin vrf_ra0 = pre ? a1 : b1; vrf_ra1 = c1; end
      default: ;
    endcase
  end

  assign te_rd_col = c1[3:0];

  always_comb begin
    simd_a   = vrf_rd0;
    simd_b   = vrf_rd1;
    simd_acc = '0;
    unique case (op1)
      OP_VFMA:           begin simd_a = vrf_rd1; simd_b = te_rd_data; simd_acc = vrf_rd0; end
      OP_VMLA, OP_VMAC4: begin simd_a = lat_b;   simd_b = lat_c;      simd_acc = vrf_rd0; end
      default: ;
    endcase
  end

  // Slot 1 commits only together with slot 0 when both execute.
  logic commit1;
  assign commit1 = s1_now && (!ex0 || s0_done);

  // ---------------- bundle retire ----------------
  logic retire;
  always_comb begin
    if (!running)    retire = 1'b0;
    else if (half)   retire = commit1;           // tail of a split bundle
    else if (split)  retire = 1'b0;              // slot 0 goes alone first
    else if (s1_act) retire = commit1;
    else             retire = ex0 && s0_done;
  end

  // VRF write port: a slot-0 load (only ever alone) or the SIMD result.
  always_comb begin
    vrf_we = 1'b0;
    vrf_wa = a1;
    vrf_wd = simd_d;
    if (ex0 && s0_done && (op0 inside {OP_VLD, OP_VLB4X4, OP_VLDL})) begin
      vrf_we = 1'b1;
      vrf_wa = a0;
      vrf_wd = (op0 == OP_VLD)  ? l1_data[0] :
               (op0 == OP_VLDL) ? llc_resp_rdata : bcast;
    end else if (commit1) begin
      vrf_we = 1'b1;
    end
  end

  assign busy        = running;
  assign ev_l1_stall = ex0 && (op0 inside {OP_VLD, OP_VLB4X4, OP_VLD4T}) && !s0_done;
  assign ev_split    = ex0 && split && s0_done;
  assign ev_vfma     = commit1 && (op1 == OP_VFMA);
  assign ev_vld4t    = te_wr_en[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc       <= '0;
      running  <= 1'b0;
      half     <= 1'b0;
      pre      <= 1'b0;
      llc_wait <= 1'b0;
      done     <= 1'b0;
      lat_b    <= '0;
      lat_c    <= '0;
      for (int i = 0; i < NUM_SREGS; i++) sreg[i] <= '0;
    end else begin
      done <= 1'b0;
      if (!running) begin
        if (start) begin
          running <= 1'b1;
          pc      <= start_pc;
          sreg[1] <= start_arg;
        end
      end else begin
        // LLC handshake of slot 0
        if (llc_req_valid && llc_req_ready) llc_wait <= 1'b1;
        if (llc_wait && llc_resp_valid)     llc_wait <= 1'b0;
        // split bundle: slot 0 retired alone
        if (ex0 && split && s0_done) half <= 1'b1;
        // three-read SIMD op: latch the two sources first
        if (ex1 && s1_three && !pre) begin
          lat_b <= vrf_rd0;
          lat_c <= vrf_rd1;
          pre   <= 1'b1;
        end
        // scalar side effects of slot 0 (scalar ops never split)
        if (ex0 && s0_done) begin
          unique case (op0)
            OP_LI:   sreg[a0[2:0]] <= {16'h0, imm0};
            OP_ADDI: sreg[a0[2:0]] <= sreg[b0[2:0]] + {{16{imm0[15]}}, imm0};
            OP_DBNZ: sreg[a0[2:0]] <= sreg[a0[2:0]] - 32'd1;
            default: ;
          endcase
        end
        if (retire) begin
          half <= 1'b0;
          pre  <= 1'b0;
          if (op0 == OP_HALT) begin
            running <= 1'b0;
            done    <= 1'b1;
          end else if (op0 == OP_DBNZ && sreg[a0[2:0]] != 32'd1)
            pc <= pc + PC_W'(signed'(imm0));
          else
            pc <= pc + 1'b1;
        end
      end
    end
  end

endmodule
