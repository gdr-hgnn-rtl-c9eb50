// bitmap: one bit per vertex, the "Bm." blocks of the frontend.
//
// The Decoupler keeps a Visited Bm. (destinations reached in the current
// augmenting-path search) and a Matching Bm. (vertices that have a partner in
// the Matching Buffer, which also serves as that buffer's valid bits); the
// Recoupler keeps the class bitmaps that record which vertices went to
// Src_in/Dst_in and which were already pushed to Src_out/Dst_out.
//
// A bit is set with set_en/set_idx and read combinationally through
// test_idx/test_bit; the whole vector is also an output so that a parent can
// index it directly. clr empties every bit in one cycle, which is why the
// bitmap is held in flip-flops rather than in a memory macro: the Visited Bm.
// is cleared at the start of every search. When clr and set_en arrive in the
// same cycle, the clear wins. Reset empties the bitmap. The one-cycle clear is
// this design's choice; the source only names the bitmaps.
//
// Lint notes the 16384-bit replication of the all-zero clear value as
// unusually wide; that width is the point of a one-cycle clear.
module bitmap #(
  parameter int unsigned N = 16384
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic                 set_en,
  input  logic [$clog2(N)-1:0] set_idx,
  input  logic [$clog2(N)-1:0] test_idx,
  output logic                 test_bit,
  output logic [N-1:0]         bits
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      bits <= '0;
    else if (clr)    bits <= '0;
    else if (set_en) bits[set_idx] <= 1'b1;
  end

  assign test_bit = bits[test_idx];

endmodule
