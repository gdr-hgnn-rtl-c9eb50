// sync_fifo: single-clock first-in first-out queue.
//
// Used for the Decoupler's Search_List (sources waiting to be expanded in an
// augmenting-path search) and for the Recoupler's four output vertex FIFOs
// (Src_in, Src_out, Dst_in, Dst_out). The head is visible on dout while empty
// is low (show-ahead); pop removes it at the clock edge, push appends din.
// Push and pop may happen in the same cycle, also when the FIFO is full (the
// pop frees the slot). clr empties it in one cycle. Storage is a plain array
// indexed by wrapping read and write pointers; DEPTH need not be a power of
// two. Pushing into a full FIFO or popping an empty one is a protocol error
// and is caught by the assertions below. The source gives the FIFOs'
// function only; this structure is the simplest that provides it.
module sync_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     push,
  input  logic [WIDTH-1:0]         din,
  input  logic                     pop,
  output logic [WIDTH-1:0]         dout,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;

  assign empty = (count == '0);
  assign full  = (count == CW'(DEPTH));
  assign dout  = mem[rd_ptr];

  wire do_pop  = pop && !empty;
  wire do_push = push && (!full || do_pop);

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else if (clr) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_pop)  rd_ptr <= incr(rd_ptr);
      if (do_push) wr_ptr <= incr(wr_ptr);
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push && !clr |-> !full || pop);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop && !clr |-> !empty);

endmodule
