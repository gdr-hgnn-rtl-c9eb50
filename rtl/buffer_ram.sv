// buffer_ram: word-addressed on-chip buffer with one write port and two
// combinational read ports.
//
// Used for the Matching Buffer (matched partners of sources and destinations,
// and matching-FIFO entries displaced from the hash table) and the Candidate
// Buffer (backbone candidates handed from the Decoupler to the Recoupler).
// A write takes effect at the clock edge; reads return the stored word in the
// same cycle. The contents are not reset: whoever reads a word knows from its
// own bookkeeping (a bitmap or a count) that the word was written. The source
// gives the capacities; the port arrangement and the same-cycle read are this
// design's choice (a synchronous-read SRAM macro would add one cycle to each
// lookup of the controllers that use it).
module buffer_ram #(
  parameter int unsigned WORDS = 81920,
  parameter int unsigned WIDTH = 16
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [$clog2(WORDS)-1:0] raddr_a,
  output logic [WIDTH-1:0]         rdata_a,
  input  logic [$clog2(WORDS)-1:0] raddr_b,
  output logic [WIDTH-1:0]         rdata_b
);

  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata_a = mem[raddr_a];
  assign rdata_b = mem[raddr_b];

endmodule
