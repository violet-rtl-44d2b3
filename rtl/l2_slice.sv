// l2_slice: this tile's slice of its group's L2 (16 KB).
//
// The group L2 is the middle level of Violet's three-level memory: the data
// movement core of a tile can push lines into the L2 slices of a group and
// later push them on, from there, to the cores that need them. The slice is
// direct-mapped (256 lines of 64 bytes), written only by pushes from the
// network and read by the local data movement core. The 16 KB size is the
// paper's 32 MB total divided over 2048 tiles; organisation, single read
// port and combinational read are this design's choices, since the paper
// only names the level.
module l2_slice
  import violet_pkg::*;
#(
  parameter int unsigned LINES = 256    // 16 KB / 64 B
) (
  input  logic   clk,
  input  logic   rst_n,
  input  laddr_t rd_addr,
  output logic   rd_hit,
  output vec_t   rd_data,
  input  logic   fill_en,
  input  laddr_t fill_addr,
  input  vec_t   fill_data
);

  localparam int unsigned IDX_W = $clog2(LINES);

  vec_t   data  [LINES];
  laddr_t tag   [LINES];
  logic   valid [LINES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LINES; i++) valid[i] <= 1'b0;
    end else if (fill_en) begin
      valid[fill_addr[IDX_W-1:0]] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (fill_en) begin
      data[fill_addr[IDX_W-1:0]] <= fill_data;
      tag[fill_addr[IDX_W-1:0]]  <= fill_addr;
    end
  end

  assign rd_hit  = valid[rd_addr[IDX_W-1:0]] && (tag[rd_addr[IDX_W-1:0]] == rd_addr);
  assign rd_data = data[rd_addr[IDX_W-1:0]];

endmodule
