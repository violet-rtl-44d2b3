// tb_l1_cache: pushes random lines into the L1 and reads them back through
// both read ports. Checks hit and data for present lines, a miss for lines
// never pushed, a miss for a line whose set was overwritten by a different
// address (direct-mapped conflict), and that reset empties the cache.
module tb_l1_cache;
  import violet_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  laddr_t rd_addr [2];
  logic   rd_hit  [2];
  vec_t   rd_data [2];
  logic   fill_en;
  laddr_t fill_addr;
  vec_t   fill_data;
  vec_t   ref_d [laddr_t];

  l1_cache dut (.clk, .rst_n, .rd_addr, .rd_hit, .rd_data, .fill_en, .fill_addr, .fill_data);

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
    fill_en = 0; fill_addr = '0; fill_data = '0;
    rd_addr[0] = '0; rd_addr[1] = 28'd7;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); #1;
    checks++; if (rd_hit[0] || rd_hit[1]) failures++;
    // fill lines 1000..1511 (one full pass over the 512 sets)
    for (int i = 0; i < 512; i++) begin
      @(negedge clk);
      fill_en = 1; fill_addr = laddr_t'(1000 + i); fill_data = rnd();
      ref_d[fill_addr] = fill_data;
    end
    @(negedge clk); fill_en = 0;
    for (int t = 0; t < 300; t++) begin
      rd_addr[0] = laddr_t'(1000 + ($urandom % 512));
      rd_addr[1] = laddr_t'(1000 + ($urandom % 512));
      #1;
      for (int p = 0; p < 2; p++) begin
        checks++;
        if (!rd_hit[p] || rd_data[p] !== ref_d[rd_addr[p]]) failures++;
      end
    end
    // never pushed (same set, other tag)
    rd_addr[0] = laddr_t'(1000 + 512); #1;
    checks++; if (rd_hit[0]) failures++;
    // conflict: push 1000+512 and 1000 must miss
    @(negedge clk); fill_en = 1; fill_addr = laddr_t'(1512); fill_data = rnd();
    @(negedge clk); fill_en = 0;
    rd_addr[0] = laddr_t'(1000); rd_addr[1] = laddr_t'(1512); #1;
    checks++; if (rd_hit[0]) failures++;
    checks++; if (!rd_hit[1] || rd_data[1] !== fill_data) failures++;
    // reset clears
    rst_n = 0; #1; rst_n = 1; #1;
    checks++; if (rd_hit[1]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
