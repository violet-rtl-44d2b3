// sync_fifo: small synchronous FIFO with valid/ready on both sides.
//
// DEPTH entries of WIDTH bits, circular buffer with a count. in_ready is
// low when full; out_valid is high when not empty. A push and a pop may
// happen in the same cycle. Used as the router's input buffers.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rptr, wptr;
  logic [PW:0]      count;
  logic             push, pop;

  assign in_ready  = (count < (PW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [PW-1:0] incr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rptr  <= '0;
      wptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= incr(wptr);
      if (pop)  rptr <= incr(rptr);
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wptr] <= in_data;

endmodule
