// tb_transpose_engine: fills blocks of 16 random lines (two per cycle, as a
// VLD4T does) and checks every %tmm column against the transpose computed
// here: lane r of column c must equal bytes 4c..4c+3 of line r. Also checks
// the ping-pong: while the next block is being written the previous one
// stays readable, and the banks swap exactly when the 16th line lands
// (8 write cycles per block).
module tb_transpose_engine;
  import violet_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [1:0] wr_en;
  vec_t l0, l1, rd_data;
  logic [3:0] rd_col;
  logic rd_bank, block_done;
  vec_t blk [2][16];

  transpose_engine dut (.clk, .rst_n, .wr_en, .wr_line0(l0), .wr_line1(l1),
                        .rd_col, .rd_data, .rd_bank, .block_done);

  always #50 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic vec_t rnd();
    vec_t v;
    for (int i = 0; i < 16; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  task automatic check_block(int b);
    for (int c = 0; c < 16; c++) begin
      rd_col = 4'(c); #1;
      for (int r = 0; r < 16; r++) begin
        checks++;
        if (rd_data[32*r +: 32] !== blk[b][r][32*c +: 32]) begin failures++; if (failures < 4) $display("b=%0d c=%0d r=%0d got %h exp %h bank=%0d", b, c, r, rd_data[32*r +: 32], blk[b][r][32*c +: 32], rd_bank); end
      end
    end
  endtask

  initial begin
    int swaps;
    wr_en = 0; l0 = '0; l1 = '0; rd_col = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4; n++) begin
      int cyc;
      cyc = 0;
      for (int r = 0; r < 16; r += 2) begin
        @(negedge clk);
        blk[n % 2][r] = rnd(); blk[n % 2][r+1] = rnd();
        l0 = blk[n % 2][r]; l1 = blk[n % 2][r+1]; wr_en = 2'b11;
        // previous block still readable while this one fills
        if (n > 0) check_block((n + 1) % 2);
        cyc++;
      end
      @(negedge clk); wr_en = 0;
      checks++; if (!block_done) failures++;   // swap pulse after the 8th write
      checks++; if (cyc != 8) failures++;
      check_block(n % 2);
    end
    // no swap while idle
    @(negedge clk); checks++; if (block_done) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
