// dpm_vc_fifo: flit buffer of one virtual channel at a router input.
//
// A circular buffer of DEPTH flits in flip-flops with first-word fall-through:
// dout shows the oldest flit whenever empty is low, and pop removes it at the
// clock edge. Push and pop may happen in the same clock. Credit flow control
// upstream guarantees that push never meets a full buffer; an assertion
// checks it. DEPTH defaults to the 4-flit buffer of the evaluated network.
module dpm_vc_fifo
  import dpm_pkg::*;
#(
  parameter int unsigned DEPTH = BUF_DEPTH,
  parameter int unsigned WIDTH = FLIT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic             full
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rd_ptr, wr_ptr;
  logic [PW:0]      count;

  assign empty = (count == '0);
  assign full  = (count == (PW+1)'(DEPTH));
  assign dout  = mem[rd_ptr];

  function automatic logic [PW-1:0] incr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk)
    if (push) mem[wr_ptr] <= din;

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
