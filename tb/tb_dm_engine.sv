// tb_dm_engine: loads a three-descriptor push program (LLC-sourced lines to
// the L1 of tiles 0 and 2, L2-sourced lines to the L2 of tiles 1 and 3, and
// a second LLC block to one tile's LLC), runs it against behavioural LLC and
// L2 models and a network sink with random back-pressure, and checks every
// packet (mask, level, destination address, payload) in order, the done
// pulse and busy. The L2 model reports a miss for the first cycles of each
// read, so the engine must wait for the line.
module tb_dm_engine;
  import violet_pkg::*;
  localparam int unsigned NT = 4, NDESC = 16, PW = PKT_BASE_W + NT;
  localparam int unsigned DW = 1 + 2*LADDR_W + 16 + 2 + NT + 1;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic prog_we; logic [3:0] prog_addr; logic [DW-1:0] prog_data;
  logic start; logic [3:0] start_idx; logic busy, done;
  logic llc_req_valid, llc_req_ready, llc_resp_valid; laddr_t llc_req_addr; vec_t llc_resp_rdata;
  laddr_t l2_rd_addr; logic l2_rd_hit; vec_t l2_rd_data;
  logic pkt_valid, pkt_ready; logic [PW-1:0] pkt;

  dm_engine #(.NTILES(NT), .NDESC(NDESC)) dut (.*);

  always #5 clk = ~clk;

  function automatic vec_t line_of(laddr_t a, int src);
    return {16{32'(a) ^ 32'(src << 20)}};
  endfunction

  // LLC model: accepts when idle, answers 3 cycles later
  int llc_cnt; laddr_t llc_a; logic llc_busy;
  assign llc_req_ready = !llc_busy;
  always @(posedge clk) begin
    llc_resp_valid <= 0;
    if (!rst_n) llc_busy <= 0;
    else if (llc_busy) begin
      if (llc_cnt == 0) begin llc_resp_valid <= 1; llc_resp_rdata <= line_of(llc_a, 1); llc_busy <= 0; end
      else llc_cnt <= llc_cnt - 1;
    end else if (llc_req_valid) begin llc_busy <= 1; llc_a <= llc_req_addr; llc_cnt <= 1; end
  end
  // L2 model: a new address misses for two cycles
  laddr_t l2_last; int l2_age;
  always @(posedge clk) begin
    if (l2_rd_addr != l2_last) begin l2_last <= l2_rd_addr; l2_age <= 0; end
    else if (l2_age < 5) l2_age <= l2_age + 1;
  end
  assign l2_rd_hit  = (l2_rd_addr == l2_last) && (l2_age >= 2);
  assign l2_rd_data = line_of(l2_rd_addr, 2);

  // expected packets
  logic [PW-1:0] exp_q [$];
  int n_done = 0;
  always @(negedge clk) pkt_ready = ($urandom % 3 != 0);
  always @(posedge clk) begin
    if (done) n_done++;
    if (rst_n && pkt_valid && pkt_ready) begin
      checks++;
      if (exp_q.size() == 0 || pkt !== exp_q[0]) begin
        failures++;
        if (failures < 4) $display("packet mismatch");
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put(int i, logic from_l2, laddr_t src, int cnt, logic [1:0] lvl, laddr_t dst, logic [NT-1:0] m, logic last);
    @(negedge clk);
    prog_we = 1; prog_addr = 4'(i);
    prog_data = {from_l2, src, 16'(cnt), lvl, dst, m, last};
    @(negedge clk); prog_we = 0;
    for (int k = 0; k < cnt; k++)
      exp_q.push_back({m, lvl, laddr_t'(dst + k), line_of(laddr_t'(src + k), from_l2 ? 2 : 1)});
  endtask

  initial begin
    prog_we = 0; prog_addr = 0; prog_data = '0; start = 0; start_idx = 0; pkt_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    put(3, 0, 28'd100, 3, DST_L1,  28'd200, 4'b0101, 0);
    put(4, 1, 28'd50,  2, DST_L2,  28'd300, 4'b1010, 0);
    put(5, 0, 28'd120, 2, DST_LLC, 28'd120, 4'b0010, 1);
    @(negedge clk);
    checks++; if (busy) failures++;
    start = 1; start_idx = 3;
    @(negedge clk); start = 0;
    checks++; if (!busy) failures++;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++; if (exp_q.size() != 0) failures++;
    checks++; if (n_done != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
