// l1_cache: private L1 of a Violet tile, a 32 KB staging area for data.
//
// Direct-mapped, 512 lines of 64 bytes. Lines arrive only by being pushed
// (from the network, sent by some tile's data movement core); the core never
// requests a line, so the cache has no miss handling: a read that misses
// simply reports !hit and the core waits until the pushed line arrives.
// Two read ports serve the orchestration core's two loads per cycle (the
// paper's "dual read-port cache"). Size and dual read port follow the paper;
// direct mapping, the full line address kept as tag and combinational reads
// are this design's choices. Fills take effect at the clock edge; a read in
// the same cycle as a fill of its line still sees the old contents.
module l1_cache
  import violet_pkg::*;
#(
  parameter int unsigned LINES = 512    // 32 KB / 64 B
) (
  input  logic   clk,
  input  logic   rst_n,
  // two read ports
  input  laddr_t rd_addr [2],
  output logic   rd_hit  [2],
  output vec_t   rd_data [2],
  // fill (push) port
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

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      rd_hit[p]  = valid[rd_addr[p][IDX_W-1:0]] && (tag[rd_addr[p][IDX_W-1:0]] == rd_addr[p]);
      rd_data[p] = data[rd_addr[p][IDX_W-1:0]];
    end
  end

endmodule
