// tb_thread_scheduler: a work queue of six items for four tiles, with
// engines modelled as busy for a fixed time after each start. Checks that
// items are dispatched in queue order with their fields intact, that an item
// for a busy engine waits until it is idle (and that this wait is counted),
// that no engine is started while busy, and that all_done comes only after
// every engine is idle again.
module tb_thread_scheduler;
  import violet_pkg::*;
  localparam int unsigned NT = 4, NW = 8, TW = 2, IW = 1 + TW + 8 + 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic wq_we; logic [2:0] wq_addr; logic [IW-1:0] wq_data;
  logic go; logic [3:0] count; logic busy, all_done;
  logic [NT-1:0] core_busy, dm_busy;
  logic disp_valid; work_kind_e disp_kind; logic [TW-1:0] disp_tile; logic [7:0] disp_start;
  logic [31:0] disp_arg; logic ev_wait;

  thread_scheduler #(.NTILES(NT), .NWORK(NW)) dut (.*);

  always #5 clk = ~clk;

  int cbusy_left [NT], dbusy_left [NT];
  always_comb for (int t = 0; t < NT; t++) begin
    core_busy[t] = cbusy_left[t] > 0;
    dm_busy[t]   = dbusy_left[t] > 0;
  end

  logic [IW-1:0] items [6];
  int nd = 0, nwait = 0, ndone = 0;
  always @(posedge clk) if (rst_n) begin
    for (int t = 0; t < NT; t++) begin
      if (cbusy_left[t] > 0) cbusy_left[t]--;
      if (dbusy_left[t] > 0) dbusy_left[t]--;
    end
    if (ev_wait) nwait++;
    if (all_done) begin
      ndone++;
      checks++;
      for (int t = 0; t < NT; t++) if (cbusy_left[t] > 0 || dbusy_left[t] > 0) failures++;
    end
    if (disp_valid) begin
      checks++;
      if (nd >= 6 || {disp_kind, disp_tile, disp_start, disp_arg} !== items[nd]) begin failures++; $display("item %0d wrong", nd); end
      checks++;
      if (disp_kind == WORK_CORE ? core_busy[disp_tile] : dm_busy[disp_tile]) begin failures++; $display("busy start %0d", nd); end
      if (disp_kind == WORK_CORE) cbusy_left[disp_tile] = 30; else dbusy_left[disp_tile] = 12;
      nd++;
    end
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < NT; t++) begin cbusy_left[t] = 0; dbusy_left[t] = 0; end
    wq_we = 0; wq_addr = 0; wq_data = 0; go = 0; count = 0;
    items[0] = {WORK_DM,   2'd1, 8'd3,  32'h11};
    items[1] = {WORK_CORE, 2'd0, 8'd10, 32'h22};
    items[2] = {WORK_CORE, 2'd0, 8'd20, 32'h33};   // must wait for tile 0
    items[3] = {WORK_CORE, 2'd2, 8'd30, 32'h44};
    items[4] = {WORK_DM,   2'd3, 8'd1,  32'h55};
    items[5] = {WORK_DM,   2'd3, 8'd2,  32'h66};   // must wait for tile 3's mover
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 6; i++) begin
      @(negedge clk); wq_we = 1; wq_addr = 3'(i); wq_data = items[i];
    end
    @(negedge clk); wq_we = 0; go = 1; count = 4'd6;
    @(negedge clk); go = 0;
    checks++; if (!busy) failures++;
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);   // let the all_done pulse be sampled
    checks++; if (nd != 6) failures++;
    checks++; if (ndone != 1) failures++;
    checks++; if (nwait < 20) begin failures++; $display("waits %0d", nwait); end
    $display("dispatched=%0d waits=%0d", nd, nwait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
