// wm_ps: Pattern Shifter (PS), the preprocessing engine.
//
// Builds the search tables from the signatures in the pattern buffer.  Only
// the first ML bytes of each signature count (the window length; the paper
// sets ML to the length of the shortest signature, 15 bytes in its tests).
// For the pair of bytes ending at 1-based position q of that prefix (q = 2..ML)
// the Wu-Manber shift is ML - q; the shift table keeps the smallest shift any
// signature gives a pair, and a pair in no signature keeps the maximum shift
// ML - 1 (m - B + 1 with B = 2).  Every pair given a shift also sets its
// Bloom-filter bit.  The pair ending the prefix (shift 0) names the
// signature's hash-table segment: the first signature of a segment issues
// HT_NEW with its start address, the following ones HT_APPEND, both with the
// signature's word count on Bus1.
//
// Sequence after start: clear the Bloom filter and write the maximum shift to
// all 64k shift-table entries (2 cycles each, through the table's write /
// WriteDone handshake); then for every signature: load AD with its address,
// read its words (the first ceil(ML/8) are kept), then for each of its ML-1
// prefix pairs read the table entry and, when the new shift is smaller, write
// it; finally send the hash-table command.  done stays high once all n_words
// pattern-buffer words have been walked, until the next start.
//
// The paper gives the function (shift and hash tables built from the
// signatures, Bus1 carrying shift values and counts, Bus2 the pair, Bloom bits
// set as shifts are computed); the ordering of the work, the table-clearing
// pass and the read-compare-write of each entry are this design's.  Signatures
// of one suffix pair must be stored consecutively, and no signature may be
// shorter than ML bytes or longer than 255 words (Bus1 is 8 bits wide).
module wm_ps
  import wm_pkg::*;
#(
  parameter int unsigned ML = 15
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  addr_t       n_words,      // words stored in the pattern buffer
  output logic        busy,
  output logic        done,
  // pattern buffer
  output logic        pb_ad_ld,
  output addr_t       pb_ad_val,
  output logic        pb_ad_inc,
  input  pb_word_t    pb_q,
  // shared buses
  output logic [7:0]  bus1,
  output pair_t       bus2,
  // shift table
  output logic        st_req,
  output logic        st_write,
  input  logic [7:0]  st_dout,
  input  logic        st_data_ready,
  input  logic        st_write_done,
  // Bloom filter
  output logic        bf_clr,
  output logic        bf_set,
  // hash table
  output logic        ht_cmd_valid,
  output ht_cmd_e     ht_cmd,
  output addr_t       ht_din,
  input  logic        ht_done
);

  localparam int unsigned MAXS = ML - 1;
  localparam int unsigned NWIN = (ML + 7) / 8;   // words holding the prefix

  typedef enum logic [3:0] {
    P_IDLE, P_INIT, P_INITW, P_PAT, P_RD, P_PRD, P_PRW, P_PWW, P_HT, P_HTW, P_DONE
  } state_e;

  state_e                state;
  logic [15:0]           ia;        // table entry being cleared
  addr_t                 addr;      // first word of the current signature
  logic [7:0]            w;         // words read of the current signature
  logic [7:0]            nw;        // words of the current signature
  logic [7:0]            win [NWIN*8];
  logic [7:0]            pi;        // prefix pair index 0..ML-2
  logic                  first;
  pair_t                 prev_pair;

  pair_t cur_pair, suf_pair;
  logic [7:0] cur_shift;
  assign cur_pair  = {win[$clog2(NWIN*8)'(pi)], win[$clog2(NWIN*8)'(pi + 8'd1)]};
  assign suf_pair  = {win[ML-2], win[ML-1]};
  assign cur_shift = 8'(ML - 2) - pi;

  always_comb begin
    pb_ad_ld     = (state == P_PAT) && (addr < n_words);
    pb_ad_val    = addr;
    pb_ad_inc    = (state == P_RD) && pb_q.more;
    st_req       = 1'b0;
    st_write     = 1'b0;
    bus1         = 8'(MAXS);
    bus2         = cur_pair;
    bf_clr       = (state == P_IDLE || state == P_DONE) && start;
    bf_set       = 1'b0;
    ht_cmd_valid = 1'b0;
    ht_cmd       = (first || suf_pair != prev_pair) ? HT_NEW : HT_APPEND;
    ht_din       = addr;
    unique case (state)
      P_INIT: begin st_req = 1'b1; st_write = 1'b1; bus2 = ia; end
      P_PRD:  st_req = 1'b1;
      P_PRW:  if (st_data_ready) begin
        bf_set = 1'b1;
        if (st_dout > cur_shift) begin st_req = 1'b1; st_write = 1'b1; bus1 = cur_shift; end
      end
      P_HT:   begin ht_cmd_valid = 1'b1; bus2 = suf_pair; bus1 = nw; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= P_IDLE;
      ia        <= '0;
      addr      <= '0;
      w         <= '0;
      nw        <= '0;
      pi        <= '0;
      first     <= 1'b1;
      prev_pair <= '0;
    end else begin
      unique case (state)
        P_IDLE, P_DONE: if (start) begin
          ia    <= '0;
          addr  <= '0;
          first <= 1'b1;
          state <= P_INIT;
        end
        P_INIT:  state <= P_INITW;
        P_INITW: if (st_write_done) begin
          ia    <= ia + 16'd1;
          state <= (ia == 16'hFFFF) ? P_PAT : P_INIT;
        end
        P_PAT: begin
          w     <= '0;
          state <= (addr < n_words) ? P_RD : P_DONE;
        end
        P_RD: begin
          if (32'(w) < NWIN)
            for (int j = 0; j < 8; j++) win[8*int'(w)+j] <= pb_q.data[63-8*j -: 8];
          w <= w + 8'd1;
          if (!pb_q.more) begin
            nw    <= w + 8'd1;
            pi    <= '0;
            state <= P_PRD;
          end
        end
        P_PRD: state <= P_PRW;
        P_PRW: if (st_data_ready) begin
          if (st_dout > cur_shift)            state <= P_PWW;
          else if (32'(pi) == 32'(ML - 2))    state <= P_HT;
          else begin pi <= pi + 8'd1;         state <= P_PRD; end
        end
        P_PWW: if (st_write_done) begin
          if (32'(pi) == 32'(ML - 2))         state <= P_HT;
          else begin pi <= pi + 8'd1;         state <= P_PRD; end
        end
        P_HT:  state <= P_HTW;
        P_HTW: if (ht_done) begin
          prev_pair <= suf_pair;
          first     <= 1'b0;
          addr      <= addr + addr_t'(nw);
          state     <= P_PAT;
        end
        default: state <= P_IDLE;
      endcase
    end
  end

  assign busy = (state != P_IDLE) && (state != P_DONE);
  assign done = (state == P_DONE);

endmodule
