// llc_slice: one tile's 64 KB slice of Violet's global last-level cache.
//
// The LLC is spread over all tiles with a static address map: line address
// L lives in tile (L mod NTILES). Inside the slice the line sits at index
// (L / NTILES) mod LINES; the slice is a direct-mapped write-back cache of
// the HBM behind it. One request port (read or write a whole line) serves
// the tile; a request is taken when req_valid && req_ready and answered
// with resp_valid three cycles later on a hit. On a miss the slice first
// writes back a dirty victim, then fetches the line from memory, then
// answers (or merges the write). One request is in flight at a time.
//
// Size (64 KB = 128 MB / 2048 tiles), static mapping and the HBM backing
// follow the paper; direct mapping, write-back/write-allocate, the full line
// address kept as tag and the blocking FSM are this design's choices.
//
// Memory port: mem_req_valid/ready handshake carries a line write
// (mem_req_we) or read; a read is answered by mem_resp_valid with the line.
module llc_slice
  import violet_pkg::*;
#(
  parameter int unsigned LINES  = 1024,  // 64 KB / 64 B
  parameter int unsigned NTILES = 2048
) (
  input  logic   clk,
  input  logic   rst_n,
  // tile side
  input  logic   req_valid,
  output logic   req_ready,
  input  logic   req_we,
  input  laddr_t req_addr,
  input  vec_t   req_wdata,
  output logic   resp_valid,
  output vec_t   resp_rdata,
  // memory side
  output logic   mem_req_valid,
  input  logic   mem_req_ready,
  output logic   mem_req_we,
  output laddr_t mem_req_addr,
  output vec_t   mem_req_wdata,
  input  logic   mem_resp_valid,
  input  vec_t   mem_resp_rdata,
  // event pulses (for performance counting)
  output logic   ev_miss,
  output logic   ev_writeback
);

  localparam int unsigned SHIFT = (NTILES > 1) ? $clog2(NTILES) : 0;
  localparam int unsigned IDX_W = $clog2(LINES);

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_WB, S_FILL_REQ, S_FILL_WAIT, S_RESP} state_e;

  vec_t   data  [LINES];
  laddr_t tag   [LINES];
  logic   valid [LINES];
  logic   dirty [LINES];

  state_e           state;
  logic             r_we;
  laddr_t           r_addr;
  vec_t             r_wdata;
  logic [IDX_W-1:0] idx;
  logic             hit;

  assign idx = IDX_W'(r_addr >> SHIFT);
  assign hit = valid[idx] && (tag[idx] == r_addr);

  assign req_ready     = (state == S_IDLE);
  assign mem_req_valid = (state == S_WB) || (state == S_FILL_REQ);
  assign mem_req_we    = (state == S_WB);
  assign mem_req_addr  = (state == S_WB) ? tag[idx] : r_addr;
  assign mem_req_wdata = data[idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      resp_valid   <= 1'b0;
      ev_miss      <= 1'b0;
      ev_writeback <= 1'b0;
      r_we         <= 1'b0;
      r_addr       <= '0;
      r_wdata      <= '0;
      resp_rdata   <= '0;
      for (int i = 0; i < LINES; i++) begin
        valid[i] <= 1'b0;
        dirty[i] <= 1'b0;
      end
    end else begin
      resp_valid   <= 1'b0;
      ev_miss      <= 1'b0;
      ev_writeback <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid) begin
          r_we    <= req_we;
          r_addr  <= req_addr;
          r_wdata <= req_wdata;
          state   <= S_LOOKUP;
        end
        S_LOOKUP: begin
          if (hit) begin
            state <= S_RESP;
          end else begin
            ev_miss <= 1'b1;
            state   <= (valid[idx] && dirty[idx]) ? S_WB : S_FILL_REQ;
          end
        end
        S_WB: if (mem_req_ready) begin
          ev_writeback <= 1'b1;
          dirty[idx]   <= 1'b0;
          state        <= S_FILL_REQ;
        end
        S_FILL_REQ: if (mem_req_ready) state <= S_FILL_WAIT;
        S_FILL_WAIT: if (mem_resp_valid) begin
          data[idx]  <= mem_resp_rdata;
          tag[idx]   <= r_addr;
          valid[idx] <= 1'b1;
          dirty[idx] <= 1'b0;
          state      <= S_RESP;
        end
        S_RESP: begin
          if (r_we) begin
            data[idx]  <= r_wdata;
            dirty[idx] <= 1'b1;
          end
          resp_rdata <= data[idx];
          resp_valid <= 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
