// tb_l2_slice: pushes a full pass of 256 random lines into the L2 slice and
// reads them back; checks hits and data, a miss for an address never
// pushed, a direct-mapped conflict eviction, and that reset empties it.
module tb_l2_slice;
  import violet_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  laddr_t rd_addr;
  logic   rd_hit;
  vec_t   rd_data;
  logic   fill_en;
  laddr_t fill_addr;
  vec_t   fill_data;
  vec_t   ref_d [laddr_t];

  l2_slice dut (.clk, .rst_n, .rd_addr, .rd_hit, .rd_data, .fill_en, .fill_addr, .fill_data);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic vec_t rnd();
    vec_t v;
    for (int i = 0; i < 16; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    fill_en = 0; fill_addr = '0; fill_data = '0; rd_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); #1;
    checks++; if (rd_hit) failures++;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      fill_en = 1; fill_addr = laddr_t'(300 + i); fill_data = rnd();
      ref_d[fill_addr] = fill_data;
    end
    @(negedge clk); fill_en = 0;
    for (int t = 0; t < 300; t++) begin
      rd_addr = laddr_t'(300 + ($urandom % 256));
      #1;
      checks++;
      if (!rd_hit || rd_data !== ref_d[rd_addr]) failures++;
    end
    rd_addr = laddr_t'(300 + 256); #1;
    checks++; if (rd_hit) failures++;
    @(negedge clk); fill_en = 1; fill_addr = laddr_t'(556); fill_data = rnd();
    @(negedge clk); fill_en = 0;
    rd_addr = laddr_t'(300); #1;
    checks++; if (rd_hit) failures++;
    rd_addr = laddr_t'(556); #1;
    checks++; if (!rd_hit || rd_data !== fill_data) failures++;
    rst_n = 0; #1; rst_n = 1; #1;
    checks++; if (rd_hit) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
