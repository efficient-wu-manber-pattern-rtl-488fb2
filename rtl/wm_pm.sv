// wm_pm: Pattern Matching module (PM).
//
// The PM runs the Wu-Manber search over the trace.  The trace flows through
// the Shift Buffer, an SB-byte shift register (2k bytes by default, as in the
// paper's Fig. 2): new bytes enter the input slot at the low indices and the
// content moves towards index SB-1 by the shift amount.  The search window
// is the ML bytes at the top of the buffer, sb[SB-1] (window start, text
// offset pos) down to sb[SB-ML] (window end).  The pair examined is the two
// last bytes of the window, {sb[SB-ML+1], sb[SB-ML]}: the bytes ML and ML-1
// places from the end of the buffer (for ML = 9 these are indices 2040 and
// 2039, as printed in Fig. 2).  The rest of the buffer is look-ahead, so that
// a signature of up to SB bytes starting at the window can be compared in
// place.
//
// One window step:
//   EVAL  Bloom filter query on the pair.  A clear bit means the pair has no
//         shift-table entry: move by the maximum shift MAXS = ML-1 (m-B+1
//         with B = 2).  A set bit: read the shift table.
//   ST    A non-zero shift moves the window by that amount.  A zero shift
//         means the pair ends at least one signature prefix: fetch the
//         segment's start and end address from the hash table.
//   PLOAD/PCMP  Each signature of the segment is copied word by word from
//         the pattern buffer into the Match Buffer, an SB-byte array aligned
//         with the Shift Buffer (signature byte k at index SB-1-k), then
//         compared with the Shift Buffer over the signature's length in one
//         cycle.  Trailing zero bytes of a signature's last word are taken as
//         padding.  Every hit is reported on m_valid with the window's text
//         offset, the signature's pattern-buffer address and its length.
//         When the segment is exhausted the window moves by the length of
//         the first signature found at this position, or by 1 if none.
//   SHIFT The window moves by at most MAXS bytes per cycle; longer skips take
//         several cycles.  The move waits (stall) while the LAN interface
//         holds fewer bytes than needed, unless the trace has ended, in which
//         case the missing bytes enter as invalid.  A per-byte valid bit
//         follows every byte through the buffer; an invalid byte never
//         compares equal.
// At start the buffer is filled until the first trace byte reaches SB-1.  The
// search ends when the window's last byte is invalid, i.e. fewer than ML
// trace bytes remain; done then stays high until the next start.
//
// What follows the paper: the two 2k-byte buffers and their alignment, the
// pair position, the Bloom-filter / shift-table / hash-table sequence, the
// maximum shift, moving by one after no match and by the signature length
// after a match.  This design's choices: the valid bits, the start-up fill,
// the one-cycle compare, checking every signature of the segment before
// moving, and the rule that padding zeros are not compared.
//
// Interfaces: LAN interface byte feed (li_*), Bloom filter query (bf_*),
// shift-table read (st_*), hash-table read (ht_*), pattern-buffer AD
// register (pb_*), match report (m_*), event counters (stats).
module wm_pm
  import wm_pkg::*;
#(
  parameter int unsigned ML      = 15,  // window length = shortest signature
  parameter int unsigned SB_LOG2 = 11   // Shift / Match Buffer: 2**11 = 2048 bytes
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             busy,
  output logic             done,
  // LAN interface feed
  input  logic [15:0][7:0] li_bytes,
  input  logic [4:0]       li_avail,
  input  logic             li_fin,
  output logic [4:0]       li_take,
  // Bloom filter
  output pair_t            bf_pair,
  input  logic             bf_hit,
  // shift table (read only)
  output logic             st_req,
  output pair_t            st_bus2,
  input  logic [7:0]       st_dout,
  input  logic             st_data_ready,
  // hash table (read only)
  output logic             ht_cmd_valid,
  output pair_t            ht_pair,
  input  logic             ht_done,
  input  addr_t            ht_start,
  input  addr_t            ht_end,
  // pattern buffer
  output logic             pb_ad_ld,
  output addr_t            pb_ad_val,
  output logic             pb_ad_inc,
  input  addr_t            pb_ad,
  input  pb_word_t         pb_q,
  // match report
  output logic             m_valid,
  output logic [31:0]      m_pos,
  output addr_t            m_addr,
  output logic [15:0]      m_len,
  output pm_stats_t        stats
);

  localparam int unsigned SB   = 2**SB_LOG2;
  localparam int unsigned MAXS = ML - 1;

  typedef enum logic [3:0] {
    S_IDLE, S_FILL, S_EVAL, S_ST, S_HT, S_PLOAD, S_PCMP, S_SHIFT, S_DONE
  } state_e;

  state_e         state;
  logic [7:0]     sb [SB];   // Shift Buffer
  logic [SB-1:0]  vb;        // valid bit of each Shift Buffer byte
  logic [7:0]     mb [SB];   // Match Buffer
  logic [31:0]    pos;       // text offset of sb[SB-1]
  logic [15:0]    rem;       // bytes still to move
  logic [SB_LOG2:0] lead;    // bytes entered during start-up fill
  logic [7:0]     w;         // word index within the current signature
  logic [15:0]    len;       // current signature length in bytes
  logic           found;     // a signature matched at this window position
  logic [15:0]    skip;      // move after the segment: first match length
  addr_t          seg_end;
  addr_t          pat_addr;

  // ---- move control -------------------------------------------------------
  logic [4:0]  step;
  logic        do_move;

  always_comb begin
    step = 5'd0;
    if (state == S_FILL)
      step = (32'(SB) - 32'(lead) < 32'(MAXS)) ? 5'(32'(SB) - 32'(lead)) : 5'(MAXS);
    else if (state == S_SHIFT)
      step = (rem < 16'(MAXS)) ? 5'(rem) : 5'(MAXS);
  end

  assign do_move = (state == S_FILL || state == S_SHIFT) && (li_avail >= step || li_fin);
  assign li_take = do_move ? step : 5'd0;

  // ---- window pair ----------------------------------------------------------
  pair_t win_pair;
  assign win_pair = {sb[SB-ML+1], sb[SB-ML]};
  assign bf_pair  = win_pair;
  assign st_bus2  = win_pair;
  assign ht_pair  = win_pair;

  // ---- signature length from the last word -------------------------------
  function automatic logic [3:0] used_bytes(input logic [63:0] d);
    logic [3:0] n;
    n = 4'd0;
    for (int j = 0; j < 8; j++)
      if (d[63-8*j -: 8] != 8'h00) n = 4'(j + 1);
    return n;
  endfunction

  // ---- compare Match Buffer with Shift Buffer -----------------------------
  logic cmp_eq;
  always_comb begin
    cmp_eq = 1'b1;
    for (int k = 0; k < SB; k++)
      if (k < int'(len))
        if (!vb[SB-1-k] || mb[SB-1-k] != sb[SB-1-k]) cmp_eq = 1'b0;
  end

  // ---- Shift Buffer -------------------------------------------------------
  logic restart;
  assign restart = (state == S_IDLE || state == S_DONE) && start;

  always_ff @(posedge clk) begin
    if (do_move)
      for (int i = 0; i < SB; i++)
        sb[i] <= (i >= int'(step)) ? sb[i-int'(step)] : li_bytes[int'(step)-1-i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vb <= '0;
    end else if (restart) begin
      vb <= '0;
    end else if (do_move) begin
      for (int i = 0; i < SB; i++)
        vb[i] <= (i >= int'(step)) ? vb[i-int'(step)] : ((int'(step)-1-i) < int'(li_avail));
    end
  end

  // ---- Match Buffer: one signature word per cycle ----------------------------
  always_ff @(posedge clk) begin
    if (state == S_PLOAD)
      for (int j = 0; j < 8; j++)
        mb[SB_LOG2'(SB-1-8*int'(w)-j)] <= pb_q.data[63-8*j -: 8];
  end

  // ---- control ------------------------------------------------------------
  always_comb begin
    st_req       = (state == S_EVAL) && vb[SB-ML] && bf_hit;
    ht_cmd_valid = (state == S_ST) && st_data_ready && (st_dout == 8'd0);
    pb_ad_ld     = (state == S_HT) && ht_done;
    pb_ad_val    = ht_start;
    pb_ad_inc    = ((state == S_PLOAD) && pb_q.more) ||
                   ((state == S_PCMP) && (pb_ad + addr_t'(1) <= seg_end));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      pos      <= '0;
      rem      <= '0;
      lead     <= '0;
      w        <= '0;
      len      <= '0;
      found    <= 1'b0;
      skip     <= '0;
      seg_end  <= '0;
      pat_addr <= '0;
      m_valid  <= 1'b0;
      m_pos    <= '0;
      m_addr   <= '0;
      m_len    <= '0;
      stats    <= '0;
    end else begin
      m_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          pos   <= '0;
          lead  <= '0;
          stats <= '0;
          state <= S_FILL;
        end
        S_FILL: begin
          if (do_move) begin
            lead <= lead + (SB_LOG2+1)'(step);
            if (32'(lead) + 32'(step) == 32'(SB)) state <= S_EVAL;
          end else begin
            stats.stall <= stats.stall + 1;
          end
        end
        S_EVAL: begin
          if (!vb[SB-ML]) begin
            state <= S_DONE;
          end else begin
            stats.windows <= stats.windows + 1;
            if (!bf_hit) begin
              stats.bf_reject <= stats.bf_reject + 1;
              rem   <= 16'(MAXS);
              state <= S_SHIFT;
            end else begin
              state <= S_ST;
            end
          end
        end
        S_ST: if (st_data_ready) begin
          if (st_dout != 8'd0) begin
            stats.st_shift <= stats.st_shift + 1;
            rem   <= 16'(st_dout);
            state <= S_SHIFT;
          end else begin
            stats.ht_lookup <= stats.ht_lookup + 1;
            state <= S_HT;
          end
        end
        S_HT: if (ht_done) begin
          seg_end <= ht_end;
          w       <= '0;
          found   <= 1'b0;
          skip    <= 16'd1;
          state   <= S_PLOAD;
        end
        S_PLOAD: begin
          if (w == 8'd0) pat_addr <= pb_ad;
          if (pb_q.more) begin
            w <= w + 8'd1;
          end else begin
            len   <= 16'({w, 3'b000}) + 16'(used_bytes(pb_q.data));
            state <= S_PCMP;
          end
        end
        S_PCMP: begin
          stats.pat_checked <= stats.pat_checked + 1;
          if (cmp_eq) begin
            stats.found <= stats.found + 1;
            m_valid <= 1'b1;
            m_pos   <= pos;
            m_addr  <= pat_addr;
            m_len   <= len;
          end
          if (pb_ad + addr_t'(1) <= seg_end) begin
            w     <= '0;
            state <= S_PLOAD;
            if (cmp_eq && !found) begin found <= 1'b1; skip <= len; end
          end else begin
            rem   <= (cmp_eq && !found) ? len : skip;
            if (((cmp_eq && !found) ? len : skip) > 16'(MAXS))
              stats.long_skip <= stats.long_skip + 1;
            state <= S_SHIFT;
          end
        end
        S_SHIFT: begin
          if (do_move) begin
            pos <= pos + 32'(step);
            rem <= rem - 16'(step);
            if (rem == 16'(step)) state <= S_EVAL;
          end else begin
            stats.stall <= stats.stall + 1;
          end
        end
        S_DONE: if (start) begin
          pos   <= '0;
          lead  <= '0;
          stats <= '0;
          state <= S_FILL;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE) && (state != S_DONE);
  assign done = (state == S_DONE);

  // The LAN interface offers at most 16 bytes per cycle.
  initial assert (MAXS <= 16 && ML >= 2 && ML <= SB);

  // A signature must fit in the Match Buffer.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_PLOAD) |-> (32'(w) < 32'(SB / 8)));

endmodule
