// thread_scheduler: Violet's global thread scheduler.
//
// Software splits an operator into micro-kernels and decides which core
// runs each one (work placement); the scheduler only carries out that
// placement. The host fills a work queue with items
//   {kind, tile, start, arg}
// kind WORK_CORE starts a micro-kernel on a tile's orchestration core
// (start = program counter, arg = scalar register 1), kind WORK_DM starts a
// data movement program on a tile (start = first descriptor). On go the
// scheduler walks the queue in order and sends each item to its tile as
// soon as the target engine is idle; an item whose engine is busy waits,
// which also holds back the items behind it (in-order dispatch). So a core
// runs its micro-kernels one after another, as in the paper's execution
// model. all_done pulses once the queue is drained and every engine is
// idle again. The dispatch is one item per two cycles: the cycle after a
// dispatch lets the engine's busy flag rise. Queue layout, in-order
// dispatch and the dedicated dispatch bus (rather than the mesh) are this
// design's choices; the paper states only what the scheduler is for.
module thread_scheduler
  import violet_pkg::*;
#(
  parameter int unsigned NTILES = 2048,
  parameter int unsigned NWORK  = 64,
  localparam int unsigned TW    = (NTILES > 1) ? $clog2(NTILES) : 1,
  localparam int unsigned QW    = $clog2(NWORK),
  localparam int unsigned ITEM_W = 1 + TW + 8 + 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // queue load (host)
  input  logic              wq_we,
  input  logic [QW-1:0]     wq_addr,
  input  logic [ITEM_W-1:0] wq_data,   // {kind, tile, start, arg}
  input  logic              go,
  input  logic [QW:0]       count,     // number of items to run
  output logic              busy,
  output logic              all_done,
  // engine status
  input  logic [NTILES-1:0] core_busy,
  input  logic [NTILES-1:0] dm_busy,
  // dispatch bus
  output logic              disp_valid,
  output work_kind_e        disp_kind,
  output logic [TW-1:0]     disp_tile,
  output logic [7:0]        disp_start,
  output logic [31:0]       disp_arg,
  output logic              ev_wait    // head item waits for a busy engine
);

  typedef struct packed {
    work_kind_e    kind;
    logic [TW-1:0] tile;
    logic [7:0]    start;
    logic [31:0]   arg;
  } item_t;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_GAP, S_DRAIN} state_e;

  item_t       q [NWORK];
  state_e      state;
  logic [QW:0] idx, n;
  item_t       head;
  logic        tgt_busy;

  always_ff @(posedge clk) if (wq_we) q[wq_addr] <= item_t'(wq_data);

  assign head     = q[idx[QW-1:0]];
  assign tgt_busy = (head.kind == WORK_CORE) ? core_busy[head.tile] : dm_busy[head.tile];

  assign busy       = (state != S_IDLE);
  assign disp_valid = (state == S_RUN) && !tgt_busy;
  assign disp_kind  = head.kind;
  assign disp_tile  = head.tile;
  assign disp_start = head.start;
  assign disp_arg   = head.arg;
  assign ev_wait    = (state == S_RUN) && tgt_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      idx      <= '0;
      n        <= '0;
      all_done <= 1'b0;
    end else begin
      all_done <= 1'b0;
      unique case (state)
        S_IDLE: if (go) begin
          idx   <= '0;
          n     <= count;
          state <= (count == '0) ? S_DRAIN : S_RUN;
        end
        S_RUN: if (disp_valid) begin
          idx   <= idx + 1'b1;
          state <= (idx + 1'b1 == n) ? S_DRAIN : S_GAP;
        end
        S_GAP:   state <= S_RUN;
        S_DRAIN: if (core_busy == '0 && dm_busy == '0) begin
          all_done <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
