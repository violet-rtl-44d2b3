// violet_pkg: types and constants shared by the Violet tile and chip.
//
// A Violet tile moves data in 64-byte cache lines, and its SIMD datapath is
// one line wide (512 bits). The vector register file holds 32 such
// registers. In int8 "wide" arithmetic a 512-bit register is read as
// 16 groups of 4 bytes and accumulated into 16 signed 32-bit lanes, so a
// wide multiply-accumulate is 16 four-element dot products (64 int8 MACs).
// The 512-bit width, the 32 registers, the 64-byte line, the 4:1 ratio of
// int8 to int32 and the 16 transposed lines follow the paper; the
// instruction encoding and packet layout below are this design's own.
package violet_pkg;

  localparam int unsigned VLEN_BITS  = 512;              // SIMD width
  localparam int unsigned LINE_BYTES = VLEN_BITS / 8;    // 64-byte cache line
  localparam int unsigned ACC_LANES  = VLEN_BITS / 32;   // 16 int32 lanes
  localparam int unsigned DOT_R      = 4;                // int8 -> int32 ratio
  localparam int unsigned NUM_VREGS  = 32;               // architectural VRF
  localparam int unsigned TE_ROWS    = LINE_BYTES / DOT_R; // 16 lines per VLD4T block
  localparam int unsigned TE_COLS    = LINE_BYTES / DOT_R; // 16 transposed vectors (%tmm0..15)
  localparam int unsigned LADDR_W    = 28;               // line address: 16 GB / 64 B
  localparam int unsigned NUM_SREGS  = 8;                // scalar address registers

  typedef logic [VLEN_BITS-1:0] vec_t;
  typedef logic [LADDR_W-1:0]   laddr_t;

  // ---------------------------------------------------------------------
  // Orchestration-core instruction set (own encoding). A bundle is two
  // 32-bit slots: slot 0 = memory/scalar/control, slot 1 = SIMD.
  //   [31:26] opcode  [25:21] a  [20:16] b  [15:11] c  [15:0] imm16
  // ---------------------------------------------------------------------
  typedef enum logic [5:0] {
    OP_NOP    = 6'h00,
    // slot 0
    OP_LI     = 6'h01,  // s[a] = zext(imm16)
    OP_ADDI   = 6'h02,  // s[a] = s[b] + sext(imm16)
    OP_DBNZ   = 6'h03,  // s[a] = s[a]-1; if (s[a]!=0) pc += sext(imm16)
    OP_VLD    = 6'h04,  // v[a] = L1 line at (s[b]+sext(imm16))
    OP_VLB4X4 = 6'h05,  // v[a] = 4 bytes at (s[b]+sext(imm16)) broadcast x16
    OP_VLD4T  = 6'h06,  // transpose engine <- L1 lines at s[a]+imm and s[b]+imm
    OP_VST    = 6'h07,  // local LLC line at (s[b]+sext(imm16)) = v[a]
    OP_VLDL   = 6'h08,  // v[a] = local LLC line at (s[b]+sext(imm16))
    OP_HALT   = 6'h09,  // micro-kernel finished
    // slot 1
    OP_VADD   = 6'h10,  // v[a] = v[b] + v[c]          (16 x int32)
    OP_VMUL   = 6'h11,  // v[a] = v[b] * v[c]          (16 x int32, low half)
    OP_VMLA   = 6'h12,  // v[a] = v[a] + v[b] * v[c]   (16 x int32)
    OP_VMAC4  = 6'h13,  // v[a] = v[a] + dot4(v[b], v[c])   (int8 -> int32)
    OP_VFMA   = 6'h14,  // v[a] = v[a] + dot4(v[b], tmm[c]) (int8 -> int32)
    OP_VZERO  = 6'h15   // v[a] = 0
  } opcode_e;

  typedef enum logic [2:0] {
    SIMD_ADD, SIMD_MUL, SIMD_MLA, SIMD_DOT4, SIMD_ZERO
  } simd_op_e;

  // ---------------------------------------------------------------------
  // Network packet: one flit carries a whole line. The destination set is
  // a bit mask over all tiles, so a single packet can fork at any router.
  // ---------------------------------------------------------------------
  typedef enum logic [1:0] {
    DST_L1  = 2'd0,   // fill the private L1 of each destination
    DST_L2  = 2'd1,   // fill the group L2 slice of each destination
    DST_LLC = 2'd2    // write the line into the destination's LLC slice
  } dst_level_e;

  // Packet = {dest_mask[NTILES], level[2], line address[28], data[512]};
  // the mask width depends on the mesh, so packets are flat vectors of
  // PKT_BASE_W + NTILES bits.
  localparam int unsigned PKT_BASE_W = 2 + LADDR_W + VLEN_BITS;

  // Router port numbering.
  localparam int unsigned P_LOCAL = 0, P_EAST = 1, P_WEST = 2, P_NORTH = 3, P_SOUTH = 4;
  localparam int unsigned NPORTS  = 5;

  // Work item kinds dispatched by the global thread scheduler.
  typedef enum logic {
    WORK_CORE = 1'b0, // start a micro-kernel on the orchestration core
    WORK_DM   = 1'b1  // start a data-movement program
  } work_kind_e;

  // Host access targets inside a tile.
  typedef enum logic [1:0] {
    HOST_LLC  = 2'd0, // read/write a line of the LLC slice
    HOST_IMEM = 2'd1, // write a bundle of the core's instruction memory
    HOST_DMEM = 2'd2  // write a descriptor of the data movement program
  } host_tgt_e;

endpackage
