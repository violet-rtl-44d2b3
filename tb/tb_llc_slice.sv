// tb_llc_slice: runs the LLC slice against a behavioural memory with a
// variable response latency. Random reads and writes over a working set
// larger than the slice force misses, dirty write-backs and refills; every
// read is compared with a shadow copy of memory as the program sees it.
// Checks the hit latency (request taken -> response: 3 cycles), and that
// misses and write-backs happen and are reported.
module tb_llc_slice;
  import violet_pkg::*;
  localparam int unsigned LINES = 16, NT = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, req_we, resp_valid;
  laddr_t req_addr;
  vec_t req_wdata, resp_rdata;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  laddr_t mem_req_addr;
  vec_t mem_req_wdata, mem_resp_rdata;
  logic ev_miss, ev_writeback;
  int n_miss = 0, n_wb = 0;

  vec_t mem [laddr_t];      // behavioural HBM
  vec_t shadow [laddr_t];   // program view

  llc_slice #(.LINES(LINES), .NTILES(NT)) dut (.*);

  always #5 clk = ~clk;

  // memory model: accepts when free, answers reads after 2..6 cycles
  int lat;
  logic busy_m;
  laddr_t pend_a;
  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    if (!rst_n) begin busy_m <= 0; end
    else if (busy_m) begin
      if (lat == 0) begin
        mem_resp_valid <= 1'b1;
        mem_resp_rdata <= mem.exists(pend_a) ? mem[pend_a] : vec_t'(pend_a);
        busy_m <= 0;
      end else lat <= lat - 1;
    end else if (mem_req_valid && mem_req_ready) begin
      if (mem_req_we) mem[mem_req_addr] = mem_req_wdata;
      else begin busy_m <= 1; pend_a <= mem_req_addr; lat <= 2 + ($urandom % 5); end
    end
  end
  assign mem_req_ready = !busy_m;

  always @(posedge clk) begin
    if (ev_miss) n_miss++;
    if (ev_writeback) n_wb++;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic vec_t rnd();
    vec_t v;
    for (int i = 0; i < 16; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  task automatic access(input logic we, input laddr_t a, input vec_t wd, output vec_t rd, output int cyc);
    @(negedge clk);
    req_valid = 1; req_we = we; req_addr = a; req_wdata = wd;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    cyc = 1;
    while (!resp_valid) begin @(negedge clk); cyc++; end
    rd = resp_rdata;
  endtask

  initial begin
    vec_t rd;
    int cyc;
    req_valid = 0; req_we = 0; req_addr = '0; req_wdata = '0;
    mem_resp_valid = 0; mem_resp_rdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // lines homed at tile 1: addr = 4*k + 1, k in 0..47 (3x the slice)
    for (int t = 0; t < 600; t++) begin
      laddr_t a;
      a = laddr_t'(4 * ($urandom % 48) + 1);
      if ($urandom % 2) begin
        vec_t w;
        w = rnd();
        access(1, a, w, rd, cyc);
        shadow[a] = w;
      end else begin
        access(0, a, '0, rd, cyc);
        checks++;
        if (rd !== (shadow.exists(a) ? shadow[a] : vec_t'(a))) failures++;
      end
    end
    // hit latency: same line twice
    access(0, 28'd5, '0, rd, cyc);
    access(0, 28'd5, '0, rd, cyc);
    checks++; if (cyc != 3) begin failures++; $display("hit latency %0d", cyc); end
    checks++; if (n_miss == 0) failures++;
    checks++; if (n_wb == 0) failures++;
    $display("misses=%0d writebacks=%0d", n_miss, n_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
