// tb_vrf: writes random data into all 32 registers, reads them back through
// both read ports against a shadow copy, checks that a read in the cycle
// of a write still returns the old value, and that reset clears registers.
module tb_vrf;
  import violet_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [4:0] ra0, ra1, wa;
  vec_t rd0, rd1, wd;
  logic we;
  vec_t shadow [32];

  vrf dut (.clk, .rst_n, .ra0, .rd0, .ra1, .rd1, .we, .wa, .wd);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
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
    we = 0; wa = 0; wd = '0; ra0 = 0; ra1 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    ra0 = 5; ra1 = 31; #1;
    checks++; if (rd0 !== '0 || rd1 !== '0) failures++;
    for (int i = 0; i < 32; i++) begin
      @(negedge clk);
      we = 1; wa = 5'(i); wd = rnd(); shadow[i] = wd;
      ra0 = 5'(i); #1;
      checks++; if (rd0 !== '0) failures++;   // old value during the write
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      ra0 = 5'($urandom); ra1 = 5'($urandom);
      if (t % 3 == 0) begin
        we = 1; wa = 5'($urandom); wd = rnd();
      end else we = 0;
      #1;
      checks++; if (rd0 !== shadow[ra0] || rd1 !== shadow[ra1]) failures++;
      @(posedge clk);
      if (we) shadow[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
