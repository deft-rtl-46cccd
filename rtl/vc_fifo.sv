// vc_fifo: one virtual-channel input buffer of a DeFT router.
//
// A synchronous first-in first-out queue of DEPTH flits (four, the buffer size of the
// evaluated network). The head entry is visible combinationally on rd_data whenever
// rd_valid is high; rd_en pops it at the clock edge. Writing and popping in the same cycle is
// allowed, also when full. Flow control is credit based, so the upstream router never writes
// a full buffer; an assertion checks that rule. Reset empties the queue (active-low, sync).
module vc_fifo
  import defft_pkg::*;
#(
  parameter int unsigned DEPTH = BUF_DEPTH
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wr_en,
  input  flit_t wr_data,
  input  logic  rd_en,
  output logic  rd_valid,
  output flit_t rd_data,
  output logic  full
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t          mem [DEPTH];
  logic [AW-1:0]  rd_ptr, wr_ptr;
  logic [AW:0]    count;

  assign rd_valid = (count != '0);
  assign full     = (count == (AW+1)'(DEPTH));
  assign rd_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (wr_en) begin
        mem[wr_ptr] <= wr_data;
        wr_ptr      <= next_ptr(wr_ptr);
      end
      if (rd_en && rd_valid) rd_ptr <= next_ptr(rd_ptr);
      count <= count + (AW+1)'(wr_en) - (AW+1)'(rd_en && rd_valid);
    end
  end

  // Credit flow control: never written when full unless popped in the same cycle.
  a_no_overflow : assert property (@(posedge clk) disable iff (!rst_n)
                                   wr_en |-> (!full || rd_en));
endmodule
