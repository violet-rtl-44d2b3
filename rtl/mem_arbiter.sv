// mem_arbiter: shares one HBM channel among the LLC slices that map to it.
//
// N requesters, each with the LLC slice's memory port (valid/ready line
// read or write; reads answered by resp_valid). Round-robin grant; a read
// holds the grant until its response has returned, a write is done when
// the channel accepts it, so at most one request per channel is in flight.
// The paper says only that memory controllers feed the LLC; this
// arbitration scheme is this design's choice.
module mem_arbiter
  import violet_pkg::*;
#(
  parameter int unsigned N = 4,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   req_valid [N],
  output logic   req_ready [N],
  input  logic   req_we    [N],
  input  laddr_t req_addr  [N],
  input  vec_t   req_wdata [N],
  output logic   resp_valid[N],
  output vec_t   resp_rdata,
  // channel side
  output logic   m_valid,
  input  logic   m_ready,
  output logic   m_we,
  output laddr_t m_addr,
  output vec_t   m_wdata,
  input  logic   m_resp_valid,
  input  vec_t   m_resp_rdata
);

  logic          waiting;   // read in flight
  logic [IW-1:0] owner, rr, pick;
  logic          any;

  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int k = 0; k < N; k++) begin
      int unsigned i;
      i = (int'(rr) + k) % N;
      if (!any && req_valid[i]) begin
        any  = 1'b1;
        pick = IW'(i);
      end
    end
  end

  assign m_valid = !waiting && any;
  assign m_we    = req_we[pick];
  assign m_addr  = req_addr[pick];
  assign m_wdata = req_wdata[pick];
  assign resp_rdata = m_resp_rdata;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      req_ready[i]  = !waiting && any && (pick == IW'(i)) && m_ready;
      resp_valid[i] = waiting && (owner == IW'(i)) && m_resp_valid;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      waiting <= 1'b0;
      owner   <= '0;
      rr      <= '0;
    end else begin
      if (m_valid && m_ready) begin
        rr <= IW'((int'(pick) + 1) % N);
        if (!m_we) begin
          waiting <= 1'b1;
          owner   <= pick;
        end
      end
      if (waiting && m_resp_valid) waiting <= 1'b0;
    end
  end

endmodule
