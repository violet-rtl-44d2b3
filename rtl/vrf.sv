// vrf: vector register file of the orchestration core.
//
// 32 registers of 512 bits with two read ports and one write port (2R1W,
// as the paper's tile figure labels it). Reads are combinational; the write
// happens at the rising clock edge. A read of the register being written in
// the same cycle returns the old value; the core forwards the new value
// itself. Registers reset to zero (reset value is this design's choice).
module vrf
  import violet_pkg::*;
#(
  parameter int unsigned NREGS = NUM_VREGS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(NREGS)-1:0] ra0,
  output vec_t                     rd0,
  input  logic [$clog2(NREGS)-1:0] ra1,
  output vec_t                     rd1,
  input  logic                     we,
  input  logic [$clog2(NREGS)-1:0] wa,
  input  vec_t                     wd
);

  vec_t regs [NREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (we) begin
      regs[wa] <= wd;
    end
  end

  assign rd0 = regs[ra0];
  assign rd1 = regs[ra1];

endmodule
