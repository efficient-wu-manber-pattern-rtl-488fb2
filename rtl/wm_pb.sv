// wm_pb: Pattern Buffer (PB).
//
// Holds the signatures, each cut into 64-bit words, the last word zero
// padded; every stored word is 65 bits wide, the extra bit being the flag
// that marks the last word of a pattern (flag = 0 on the last word, as in the
// paper's data preparation).  Patterns that share the same suffix byte pair
// must be stored next to each other so that each hash-table segment is one
// address range; the host is responsible for that ordering.
//
// Reads go through the 32-bit Address Register AD, as in the paper: ad_ld
// loads AD, ad_inc advances it by one word, and q is the word at AD, valid in
// the cycle after AD changed (a memory with a registered address).  The
// host loads the memory through a separate write port.  The depth is this
// design's choice: 2**DEPTH_LOG2 words (32k words = 256 kB by default, enough
// for the paper's 154 kB, 2,500-signature set plus padding); the unused high
// bits of AD wrap.  AD resets to 0, the memory is not reset.
module wm_pb
  import wm_pkg::*;
#(
  parameter int unsigned DEPTH_LOG2 = 15
) (
  input  logic     clk,
  input  logic     rst_n,
  // host write port
  input  logic     wr_en,
  input  addr_t    wr_addr,
  input  pb_word_t wr_data,
  // read port through the address register
  input  logic     ad_ld,
  input  addr_t    ad_val,
  input  logic     ad_inc,
  output addr_t    ad,
  output pb_word_t q
);

  pb_word_t mem [2**DEPTH_LOG2];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr[DEPTH_LOG2-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      ad <= '0;
    else if (ad_ld)  ad <= ad_val;
    else if (ad_inc) ad <= ad + addr_t'(1);
  end

  assign q = mem[ad[DEPTH_LOG2-1:0]];

endmodule
