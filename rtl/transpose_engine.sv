// transpose_engine: Violet's transposed-load unit (VLD4T / %tmm registers).
//
// Two banks of ROWS x 512 bits. Cache lines are written into the write bank
// as rows; the read bank is read out as columns. Column c is built from
// bytes 4c..4c+3 of every row, row r landing in 32-bit lane r, so after
// ROWS lines of a row-major int8 matrix A (one line per row m, K contiguous)
// column j holds A[m][4j..4j+3] for all m: exactly the operand a 4-way
// int8 dot-product MAC needs. ROWS = 16 lines follows the paper (vector
// width in bytes divided by the int8:int32 ratio, 64/4).
//
// Banking follows the tile figure: an input demultiplexer writes one bank
// while the other one is read through per-bank column multiplexers and a
// final bank multiplexer. This design's choices: up to two lines are
// written per cycle (the L1 has two read ports); when the write bank holds
// ROWS lines the banks swap at once, so the just-filled block becomes the
// readable %tmm set and the old read bank takes the next block. Software
// must finish reading a block before the last line of the next one lands.
//
// Timing: writes at the clock edge; column read is combinational.
module transpose_engine
  import violet_pkg::*;
#(
  parameter int unsigned ROWS = TE_ROWS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [1:0]              wr_en,     // write line 0 (and line 1)
  input  vec_t                    wr_line0,
  input  vec_t                    wr_line1,
  input  logic [$clog2(ROWS)-1:0] rd_col,    // %tmm index
  output vec_t                    rd_data,
  output logic                    rd_bank,   // which bank is readable
  output logic                    block_done // pulses when a bank swaps
);

  localparam int unsigned CNT_W = $clog2(ROWS) + 1;

  vec_t             mem [2][ROWS];
  logic             wbank;           // bank being written
  logic [CNT_W-1:0] wptr;
  logic [CNT_W-1:0] nlines;

  assign nlines = CNT_W'(wr_en[0]) + CNT_W'(wr_en[1]);

  // Two lines written at once must both land in the current block.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (wr_en == 2'b11) |-> (wptr <= CNT_W'(ROWS - 2)));
  assert property (@(posedge clk) disable iff (!rst_n) wr_en != 2'b10);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank      <= 1'b0;
      wptr       <= '0;
      block_done <= 1'b0;
      for (int b = 0; b < 2; b++)
        for (int r = 0; r < ROWS; r++) mem[b][r] <= '0;
    end else begin
      block_done <= 1'b0;
      if (wr_en[0]) mem[wbank][wptr[CNT_W-2:0]] <= wr_line0;
      if (wr_en[1]) mem[wbank][wptr[CNT_W-2:0] + 1'b1] <= wr_line1;
      if (nlines != 0) begin
        if (wptr + nlines >= CNT_W'(ROWS)) begin
          wptr       <= '0;
          wbank      <= ~wbank;
          block_done <= 1'b1;
        end else begin
          wptr <= wptr + nlines;
        end
      end
    end
  end

  assign rd_bank = ~wbank;

  always_comb begin
    rd_data = '0;
    for (int r = 0; r < ROWS; r++)
      rd_data[32*r +: 32] = mem[~wbank][r][32*rd_col +: 32];
  end

endmodule
