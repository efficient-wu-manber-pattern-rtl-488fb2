// wm_pkg: types and constants shared by the Wu-Manber matching engine.
//
// The engine stores signatures as 64-bit words with one extra flag bit per
// word (a 65-bit pattern-buffer word), looks texts up by byte pairs (16-bit
// "Bus2" values) and moves shift values and word counts over an 8-bit "Bus1".
// The byte order inside a 64-bit word is this design's own choice: the first
// byte in text order sits in bits [63:56].  The flag polarity follows the
// paper's data preparation: flag = 1 while more words of the pattern follow,
// flag = 0 on the last word.
package wm_pkg;

  localparam int unsigned AW     = 32;  // Pattern-buffer address width (32-bit AD register)
  localparam int unsigned BUS1_W = 8;   // Bus1: shift values and pattern word counts
  localparam int unsigned BUS2_W = 16;  // Bus2: byte pair

  typedef logic [BUS2_W-1:0] pair_t;
  typedef logic [AW-1:0]     addr_t;

  // One pattern-buffer word.
  typedef struct packed {
    logic        more;  // 1: another word of the same pattern follows, 0: last word
    logic [63:0] data;  // up to eight pattern bytes, first byte in [63:56], zero padded
  } pb_word_t;

  // Commands understood by the hash table.
  typedef enum logic [1:0] {
    HT_NEW    = 2'd0,  // first pattern of a new suffix segment: write start and end
    HT_APPEND = 2'd1,  // another pattern of the same segment: move the end address
    HT_READ   = 2'd2   // return start and end address of a segment
  } ht_cmd_e;

  // Operating mode chosen by the controller; selects who drives the tables.
  typedef enum logic [1:0] {
    MODE_LOAD   = 2'd0,  // host fills the pattern buffer
    MODE_PRE    = 2'd1,  // pattern shifter builds shift table, hash table, Bloom filter
    MODE_SEARCH = 2'd2,  // pattern matcher scans the trace
    MODE_DONE   = 2'd3   // trace finished
  } mode_e;

  // Event counters of the pattern matcher.
  typedef struct packed {
    logic [31:0] windows;     // window positions examined
    logic [31:0] bf_reject;   // Bloom filter said "no shift entry": maximum shift taken
    logic [31:0] st_shift;    // shift table gave a non-zero shift
    logic [31:0] ht_lookup;   // shift was zero: hash table segment fetched
    logic [31:0] pat_checked; // patterns compared against the window
    logic [31:0] found;       // patterns found
    logic [31:0] long_skip;   // skips longer than the maximum shift (after a match)
    logic [31:0] stall;       // cycles waiting for trace bytes
  } pm_stats_t;

  // Byte j (0 = first in text order) of a 64-bit word.
  function automatic logic [7:0] word_byte(input logic [63:0] w, input int unsigned j);
    return w[63-8*j -: 8];
  endfunction

endpackage
