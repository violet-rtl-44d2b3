// dm_engine: a tile's data movement core.
//
// Violet moves data by "push": instead of cores requesting lines, a small
// program on the tile that holds the data sends each line straight to all
// the tiles that will need it, in one multicast packet. The program is a
// list of descriptors, each one a block copy:
//   from   : the local LLC slice or the local group-L2 slice
//   src    : first source line address
//   count  : number of consecutive lines
//   level  : where the line lands at the destinations (L1, L2 or LLC)
//   dst    : first destination line address
//   mask   : set of destination tiles (one bit per tile)
//   last   : this descriptor ends the program
// start/start_idx (from the global scheduler) runs the program beginning
// at a descriptor index; done pulses after the last line has been handed to
// the router. Push-style movement, multicast destination sets in the header
// and reading from the local LLC and L2 slices follow the paper; the
// descriptor format and the one-line-at-a-time sequencing are this
// design's choices (the paper does not give the data movement ISA).
//
// Timing: an LLC-sourced line costs the LLC latency (3 cycles on a hit)
// plus one cycle to hand it to the router; an L2-sourced line one cycle.
module dm_engine
  import violet_pkg::*;
#(
  parameter int unsigned NTILES = 2048,
  parameter int unsigned NDESC  = 16,
  localparam int unsigned PKT_W = PKT_BASE_W + NTILES,
  localparam int unsigned DESC_W = 1 + 2*LADDR_W + 16 + 2 + NTILES + 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // program load (host)
  input  logic                      prog_we,
  input  logic [$clog2(NDESC)-1:0]  prog_addr,
  input  logic [DESC_W-1:0]         prog_data,
  // control
  input  logic                      start,
  input  logic [$clog2(NDESC)-1:0]  start_idx,
  output logic                      busy,
  output logic                      done,
  // local LLC slice request port
  output logic                      llc_req_valid,
  input  logic                      llc_req_ready,
  output laddr_t                    llc_req_addr,
  input  logic                      llc_resp_valid,
  input  vec_t                      llc_resp_rdata,
  // local L2 slice read port
  output laddr_t                    l2_rd_addr,
  input  logic                      l2_rd_hit,
  input  vec_t                      l2_rd_data,
  // to the router's local input
  output logic                      pkt_valid,
  input  logic                      pkt_ready,
  output logic [PKT_W-1:0]          pkt
);

  typedef struct packed {
    logic                from_l2;
    laddr_t              src;
    logic [15:0]         count;
    logic [1:0]          level;
    laddr_t              dst;
    logic [NTILES-1:0]   mask;
    logic                last;
  } desc_t;

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_LLC_REQ, S_LLC_WAIT, S_SEND} state_e;

  desc_t                    prog [NDESC];
  state_e                   state;
  logic [$clog2(NDESC)-1:0] pc;
  desc_t                    cur;
  logic [15:0]              n;      // lines of cur already sent
  vec_t                     line;

  always_ff @(posedge clk) if (prog_we) prog[prog_addr] <= desc_t'(prog_data);

  assign busy          = (state != S_IDLE);
  assign llc_req_valid = (state == S_LLC_REQ);
  assign llc_req_addr  = cur.src + LADDR_W'(n);
  assign l2_rd_addr    = cur.src + LADDR_W'(n);
  assign pkt_valid     = (state == S_SEND);
  assign pkt           = {cur.mask, cur.level, laddr_t'(cur.dst + LADDR_W'(n)), line};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pc    <= '0;
      cur   <= '0;
      n     <= '0;
      line  <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          pc    <= start_idx;
          state <= S_FETCH;
        end
        S_FETCH: begin
          cur <= prog[pc];
          n   <= '0;
          if (prog[pc].count == '0) begin
            // empty descriptor: nothing to move
            state <= prog[pc].last ? S_IDLE : S_FETCH;
            done  <= prog[pc].last;
            pc    <= pc + 1'b1;
          end else begin
            state <= prog[pc].from_l2 ? S_LLC_WAIT : S_LLC_REQ;
          end
        end
        S_LLC_REQ: if (llc_req_ready) state <= S_LLC_WAIT;
        S_LLC_WAIT: begin
          if (cur.from_l2) begin
            if (l2_rd_hit) begin
              line  <= l2_rd_data;
              state <= S_SEND;
            end
          end else if (llc_resp_valid) begin
            line  <= llc_resp_rdata;
            state <= S_SEND;
          end
        end
        S_SEND: if (pkt_ready) begin
          if (n + 16'd1 == cur.count) begin
            if (cur.last) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              pc    <= pc + 1'b1;
              state <= S_FETCH;
            end
          end else begin
            n     <= n + 16'd1;
            state <= cur.from_l2 ? S_LLC_WAIT : S_LLC_REQ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) pkt_valid |-> (cur.mask != '0));

endmodule
