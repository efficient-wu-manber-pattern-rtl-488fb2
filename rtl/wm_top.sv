// wm_top: Wu-Manber signature-matching engine.
//
// Connects the LAN interface (LI), pattern buffer (PB), pattern shifter (PS),
// shift table (ST), hash table (HT), Bloom filter (BF), pattern matcher (PM)
// and controller (CM).  Use:
//   1. While mode == MODE_LOAD, write the signatures into the pattern buffer
//      (pb_wr_*), 64-bit words with the "more" flag, signatures with the same
//      suffix pair (bytes ML-1 and ML of the signature) next to each other.
//   2. Pulse start with n_words = number of words written.  The shifter
//      builds the tables (mode == MODE_PRE, about 131k cycles to clear the
//      shift table plus roughly 4*ML cycles per signature).
//   3. The matcher then scans the trace arriving on s_* (mode == MODE_SEARCH)
//      and reports each signature found on m_valid / m_pos / m_addr / m_len.
//      The trace may be sent at any time; the LI buffer holds it until the
//      search starts.
//   4. mode == MODE_DONE when fewer than ML trace bytes are left.  scan
//      searches the next trace of the stream with the same tables; load
//      returns to step 1.
// The multiplexers that hand the tables to the shifter or the matcher are
// driven by the controller's mode.  The module list, the shared 8-bit Bus1
// (shift values, word counts) and 16-bit Bus2 (byte pair) follow the paper;
// the host ports, the ownership multiplexers and the scan/load commands are
// this design's.  The host write port of the pattern buffer
// is honoured only in MODE_LOAD.
module wm_top
  import wm_pkg::*;
#(
  parameter int unsigned ML         = 15,  // window length = shortest signature
  parameter int unsigned SB_LOG2    = 11,  // 2k-byte Shift / Match Buffers
  parameter int unsigned PB_LOG2    = 15,  // pattern buffer depth, words
  parameter int unsigned BF_LOG2    = 13,  // Bloom filter vector, bits
  parameter int unsigned LI_LOG2    = 9    // LI buffer depth, words
) (
  input  logic        clk,
  input  logic        rst_n,
  // host: signatures
  input  logic        pb_wr_en,
  input  addr_t       pb_wr_addr,
  input  pb_word_t    pb_wr_data,
  input  addr_t       n_words,
  input  logic        start,
  input  logic        scan,
  input  logic        load,
  output mode_e       mode,
  // trace stream
  input  logic        s_valid,
  output logic        s_ready,
  input  logic [63:0] s_data,
  input  logic        s_last,
  input  logic [3:0]  s_nbytes,
  // matches
  output logic        m_valid,
  output logic [31:0] m_pos,
  output addr_t       m_addr,
  output logic [15:0] m_len,
  output pm_stats_t   stats
);

  // ---- controller -----------------------------------------------------------
  addr_t cm_n_words;
  logic  ps_start, ps_done, pm_start, pm_done;
  logic  ps_busy, pm_busy;  // observed by assertions only

  wm_cm u_cm (
    .clk, .rst_n, .start, .scan, .load,
    .n_words_in (n_words),
    .n_words    (cm_n_words),
    .ps_start, .ps_done, .pm_start, .pm_done, .mode
  );

  logic pre;
  assign pre = (mode == MODE_PRE);

  // ---- LAN interface ----------------------------------------------------------
  logic [15:0][7:0] li_bytes;
  logic [4:0]       li_avail, li_take;
  logic             li_fin;

  wm_li #(.DEPTH_LOG2(LI_LOG2)) u_li (
    .clk, .rst_n, .s_valid, .s_ready, .s_data, .s_last, .s_nbytes,
    .bytes (li_bytes), .avail (li_avail), .fin (li_fin), .take (li_take),
    .next (pm_start)
  );

  // ---- pattern buffer ---------------------------------------------------------
  logic     pb_ad_ld, pb_ad_inc;
  addr_t    pb_ad_val, pb_ad;
  pb_word_t pb_q;
  logic     ps_pb_ad_ld, ps_pb_ad_inc, pm_pb_ad_ld, pm_pb_ad_inc;
  addr_t    ps_pb_ad_val, pm_pb_ad_val;

  assign pb_ad_ld  = pre ? ps_pb_ad_ld  : pm_pb_ad_ld;
  assign pb_ad_inc = pre ? ps_pb_ad_inc : pm_pb_ad_inc;
  assign pb_ad_val = pre ? ps_pb_ad_val : pm_pb_ad_val;

  wm_pb #(.DEPTH_LOG2(PB_LOG2)) u_pb (
    .clk, .rst_n,
    .wr_en   (pb_wr_en && (mode == MODE_LOAD)),
    .wr_addr (pb_wr_addr),
    .wr_data (pb_wr_data),
    .ad_ld   (pb_ad_ld), .ad_val (pb_ad_val), .ad_inc (pb_ad_inc),
    .ad      (pb_ad), .q (pb_q)
  );

  // ---- shift table ------------------------------------------------------------
  logic       st_req, st_write, st_data_ready, st_write_done;
  logic [7:0] st_bus1, st_dout;
  pair_t      st_bus2;
  logic       ps_st_req, ps_st_write, pm_st_req;
  logic [7:0] ps_bus1;
  pair_t      ps_bus2, pm_st_bus2;

  assign st_req   = pre ? ps_st_req   : pm_st_req;
  assign st_write = pre && ps_st_write;
  assign st_bus2  = pre ? ps_bus2     : pm_st_bus2;
  assign st_bus1  = ps_bus1;

  wm_st u_st (
    .clk, .rst_n, .req (st_req), .write (st_write), .bus2 (st_bus2), .bus1 (st_bus1),
    .dout (st_dout), .data_ready (st_data_ready), .write_done (st_write_done)
  );

  // ---- hash table -------------------------------------------------------------
  logic    ht_cmd_valid, ht_busy, ht_done;
  ht_cmd_e ht_cmd, ps_ht_cmd;
  pair_t   ht_pair, pm_ht_pair;
  addr_t   ht_din, ht_start, ht_end;
  logic    ps_ht_cmd_valid, pm_ht_cmd_valid;

  assign ht_cmd_valid = pre ? ps_ht_cmd_valid : pm_ht_cmd_valid;
  assign ht_cmd       = pre ? ps_ht_cmd       : HT_READ;
  assign ht_pair      = pre ? ps_bus2         : pm_ht_pair;

  wm_ht u_ht (
    .clk, .rst_n, .cmd_valid (ht_cmd_valid), .cmd (ht_cmd), .pair (ht_pair),
    .din (ht_din), .hash_count (ps_bus1), .busy (ht_busy), .done (ht_done),
    .rd_start (ht_start), .rd_end (ht_end)
  );

  // ---- Bloom filter -----------------------------------------------------------
  logic  bf_clr, bf_set, bf_hit;
  pair_t bf_query;

  wm_bf #(.VEC_LOG2(BF_LOG2)) u_bf (
    .clk, .rst_n, .clr (bf_clr && pre), .set (bf_set && pre), .set_pair (ps_bus2),
    .query_pair (bf_query), .hit (bf_hit)
  );

  // ---- pattern shifter ----------------------------------------------------------
  wm_ps #(.ML(ML)) u_ps (
    .clk, .rst_n, .start (ps_start), .n_words (cm_n_words), .busy (ps_busy), .done (ps_done),
    .pb_ad_ld (ps_pb_ad_ld), .pb_ad_val (ps_pb_ad_val), .pb_ad_inc (ps_pb_ad_inc), .pb_q,
    .bus1 (ps_bus1), .bus2 (ps_bus2),
    .st_req (ps_st_req), .st_write (ps_st_write), .st_dout, .st_data_ready, .st_write_done,
    .bf_clr, .bf_set,
    .ht_cmd_valid (ps_ht_cmd_valid), .ht_cmd (ps_ht_cmd), .ht_din, .ht_done
  );

  // ---- pattern matcher ----------------------------------------------------------
  wm_pm #(.ML(ML), .SB_LOG2(SB_LOG2)) u_pm (
    .clk, .rst_n, .start (pm_start), .busy (pm_busy), .done (pm_done),
    .li_bytes, .li_avail, .li_fin, .li_take,
    .bf_pair (bf_query), .bf_hit,
    .st_req (pm_st_req), .st_bus2 (pm_st_bus2), .st_dout, .st_data_ready,
    .ht_cmd_valid (pm_ht_cmd_valid), .ht_pair (pm_ht_pair), .ht_done,
    .ht_start, .ht_end,
    .pb_ad_ld (pm_pb_ad_ld), .pb_ad_val (pm_pb_ad_val), .pb_ad_inc (pm_pb_ad_inc),
    .pb_ad, .pb_q,
    .m_valid, .m_pos, .m_addr, .m_len, .stats
  );

  // The tables are handed over only between phases.
  assert property (@(posedge clk) disable iff (!rst_n) (mode == MODE_SEARCH) |-> !ps_busy);
  assert property (@(posedge clk) disable iff (!rst_n) (mode == MODE_PRE) |-> !pm_busy);

endmodule
