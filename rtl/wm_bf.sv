// wm_bf: Bloom filter (BF) in front of the shift table.
//
// Most byte pairs of a text occur in no signature, so their shift is the
// maximum.  The filter keeps a bit-vector register with one bit per hash
// value.  During preprocessing, every byte pair that receives a shift-table
// entry sets its bit (set, set_pair).  During matching, a clear bit for the
// window's pair (query_pair -> hit = 0) proves that the pair has no entry, so
// the matcher takes the maximum shift without reading the shift table; a set
// bit means "maybe" and the table is read.
//
// The paper gives this function and says there is one hash circuit and a
// vector register; the vector length and the hash function are not given.
// This design uses 2**VEC_LOG2 bits (8192 by default) and a multiplicative
// hash: the top VEC_LOG2 bits of the low 16 bits of pair * 40503 (40503 is
// the 16-bit golden-ratio constant).  The hash is an odd-constant multiply,
// so distinct pairs spread over the vector.
//
// Timing: hit is combinational from query_pair.  clr empties the vector and
// set marks one bit, both at the next clock edge; a set in the same cycle as
// clr survives.  Reset empties the vector.
module wm_bf
  import wm_pkg::*;
#(
  parameter int unsigned VEC_LOG2 = 13
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,         // empty the vector
  input  logic  set,         // mark set_pair
  input  pair_t set_pair,
  input  pair_t query_pair,
  output logic  hit          // 1: pair may have a shift entry
);

  logic [2**VEC_LOG2-1:0] vec;

  function automatic logic [VEC_LOG2-1:0] bf_hash(input pair_t p);
    logic [15:0] prod;
    prod = 16'(32'(p) * 32'd40503);
    return prod[15 -: VEC_LOG2];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vec <= '0;
    end else begin
      if (clr) vec <= '0;
      if (set) vec[bf_hash(set_pair)] <= 1'b1;
    end
  end

  assign hit = vec[bf_hash(query_pair)];

endmodule
