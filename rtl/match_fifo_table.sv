// match_fifo_table: the Decoupler's hash table and set-associative matching
// FIFOs.
//
// During an augmenting-path search every destination vertex v that is
// reached gets a matching FIFO, Matching_FIFO[v], into which the source u that
// reached it is pushed. Because a destination is expanded at most once per
// search, each FIFO holds one entry, so a FIFO is a slot {tag = v, value = u}.
// The hash table maps v to a set (v's low byte XOR its high byte, for the
// default 256 sets) and the slots of a set are its ways. Inserting into a set
// whose ways are all in use replaces one way, chosen round-robin, and the
// replaced entry leaves on spill_* in the same cycle so that the Decoupler can
// park it in the Matching Buffer. When the augmenting path is walked back,
// the entry of v is looked up (lk_key -> lk_hit/lk_val, combinational) and
// popped (pop_en invalidates the hit way at the clock edge); a miss means the
// entry was replaced and is to be read from the Matching Buffer instead.
// clr empties every FIFO in one cycle, at the start of each search.
//
// Following the source: a hash table allocates the FIFOs, the FIFOs are
// set-associative, and replaced FIFO data goes to the Matching Buffer. This
// design's choices: one entry per FIFO, the XOR-fold hash, round-robin
// replacement, and the split of the 8 KB into 256 sets x 8 ways of 32 bits.
module match_fifo_table
  import gdr_pkg::*;
#(
  parameter int unsigned SETS = MF_SETS,
  parameter int unsigned WAYS = MF_WAYS,
  localparam int unsigned SW  = $clog2(SETS),
  localparam int unsigned WW  = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  // allocate Matching_FIFO[ins_key] and push ins_val
  input  logic ins_en,
  input  vid_t ins_key,
  input  vid_t ins_val,
  output logic spill_valid,
  output vid_t spill_key,
  output vid_t spill_val,
  // look up and pop Matching_FIFO[lk_key]
  input  vid_t lk_key,
  output logic lk_hit,
  output vid_t lk_val,
  input  logic pop_en
);

  typedef struct packed {
    vid_t tag;
    vid_t val;
  } slot_t;

  slot_t            slot  [SETS][WAYS];
  logic [WAYS-1:0]  valid [SETS];
  logic [WW-1:0]    rr;

  function automatic logic [SW-1:0] hash(input vid_t k);
    logic [SW-1:0] h;
    h = '0;
    for (int b = 0; b < VID_W; b += SW) h ^= SW'(k >> b);
    return h;
  endfunction

  // ---- insert ------------------------------------------------------------
  logic [SW-1:0] ins_set;
  logic          ins_free_found;
  logic [WW-1:0] ins_free_way, ins_way;

  assign ins_set = hash(ins_key);

  always_comb begin
    ins_free_found = 1'b0;
    ins_free_way   = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!valid[ins_set][w]) begin
        ins_free_found = 1'b1;
        ins_free_way   = WW'(w);
      end
    end
  end

  assign ins_way     = ins_free_found ? ins_free_way : rr;
  assign spill_valid = ins_en && !ins_free_found;
  assign spill_key   = slot[ins_set][ins_way].tag;
  assign spill_val   = slot[ins_set][ins_way].val;

  // ---- lookup ------------------------------------------------------------
  logic [SW-1:0] lk_set;
  logic [WW-1:0] lk_way;

  assign lk_set = hash(lk_key);

  always_comb begin
    lk_hit = 1'b0;
    lk_way = '0;
    lk_val = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!lk_hit && valid[lk_set][w] && slot[lk_set][w].tag == lk_key) begin
        lk_hit = 1'b1;
        lk_way = WW'(w);
        lk_val = slot[lk_set][w].val;
      end
    end
  end

  // ---- state -------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (ins_en && !clr) slot[ins_set][ins_way] <= '{tag: ins_key, val: ins_val};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) valid[s] <= '0;
      rr <= '0;
    end else if (clr) begin
      for (int s = 0; s < SETS; s++) valid[s] <= '0;
    end else begin
      if (pop_en && lk_hit) valid[lk_set][lk_way] <= 1'b0;
      if (ins_en) begin
        valid[ins_set][ins_way] <= 1'b1;
        if (!ins_free_found) rr <= (rr == WW'(WAYS - 1)) ? '0 : rr + 1'b1;
      end
    end
  end

endmodule
