// tb_wm_pm: self-checking test of the pattern matcher.
// The testbench programs the shift table, hash table, Bloom filter and
// pattern buffer directly from the reference model (no pattern shifter),
// streams two doped traces through a LAN interface, one with random gaps
// between words so the matcher must stall, and compares every report
// (offset, signature address, length) with the reference search.  It also
// counts that every mechanism occurred: Bloom-filter reject, non-zero shift
// from the table, hash-table lookup, compare without match, match, a skip
// longer than the maximum shift, and a stall.  Timing check: with a trace
// that has no signature pair at all, every window costs 2 cycles for a
// move of ML-1 bytes, after a fill limited by the LAN interface's 8 bytes
// per cycle.
module tb_wm_pm;
  import wm_pkg::*;
  import wm_ref_pkg::*;
  localparam int unsigned ML = 15;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic start = 0, busy, done;
  // LI
  logic s_valid = 0, s_ready, s_last = 0, li_fin, li_next = 0;
  logic [63:0] s_data = '0;
  logic [3:0] s_nbytes = '0;
  logic [15:0][7:0] li_bytes;
  logic [4:0] li_avail, li_take;
  // tables
  logic tb_own = 1;
  logic pb_wr_en = 0, pm_ad_ld, pm_ad_inc;
  addr_t pb_wr_addr = '0, pm_ad_val, pb_ad;
  pb_word_t pb_wr_data = '0, pb_q;
  logic pm_st_req, tb_st_req = 0, st_data_ready, st_write_done;
  pair_t pm_st_bus2, tb_pair = '0, pm_ht_pair, bf_q;
  logic [7:0] tb_bus1 = '0, st_dout;
  logic pm_ht_valid, tb_ht_valid = 0, ht_busy, ht_done, bf_hit, tb_bf_set = 0;
  ht_cmd_e tb_ht_cmd = HT_NEW;
  addr_t tb_din = '0, ht_start, ht_end;
  logic m_valid;
  logic [31:0] m_pos;
  addr_t m_addr;
  logic [15:0] m_len;
  pm_stats_t stats;

  wm_li u_li (.clk, .rst_n, .s_valid, .s_ready, .s_data, .s_last, .s_nbytes,
    .bytes (li_bytes), .avail (li_avail), .fin (li_fin), .take (li_take), .next (li_next));
  wm_pb u_pb (.clk, .rst_n, .wr_en (pb_wr_en), .wr_addr (pb_wr_addr), .wr_data (pb_wr_data),
    .ad_ld (pm_ad_ld), .ad_val (pm_ad_val), .ad_inc (pm_ad_inc), .ad (pb_ad), .q (pb_q));
  wm_st u_st (.clk, .rst_n, .req (tb_own ? tb_st_req : pm_st_req), .write (tb_own),
    .bus2 (tb_own ? tb_pair : pm_st_bus2), .bus1 (tb_bus1), .dout (st_dout),
    .data_ready (st_data_ready), .write_done (st_write_done));
  wm_ht u_ht (.clk, .rst_n, .cmd_valid (tb_own ? tb_ht_valid : pm_ht_valid),
    .cmd (tb_own ? tb_ht_cmd : HT_READ), .pair (tb_own ? tb_pair : pm_ht_pair), .din (tb_din),
    .hash_count (tb_bus1), .busy (ht_busy), .done (ht_done), .rd_start (ht_start), .rd_end (ht_end));
  wm_bf u_bf (.clk, .rst_n, .clr (1'b0), .set (tb_bf_set), .set_pair (tb_pair),
    .query_pair (bf_q), .hit (bf_hit));
  wm_pm dut (.clk, .rst_n, .start, .busy, .done,
    .li_bytes, .li_avail, .li_fin, .li_take,
    .bf_pair (bf_q), .bf_hit,
    .st_req (pm_st_req), .st_bus2 (pm_st_bus2), .st_dout, .st_data_ready,
    .ht_cmd_valid (pm_ht_valid), .ht_pair (pm_ht_pair), .ht_done, .ht_start, .ht_end,
    .pb_ad_ld (pm_ad_ld), .pb_ad_val (pm_ad_val), .pb_ad_inc (pm_ad_inc), .pb_ad, .pb_q,
    .m_valid, .m_pos, .m_addr, .m_len, .stats);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  match_t got[$];
  always @(posedge clk) if (m_valid) begin
    match_t g;
    g.pos = int'(m_pos); g.addr = int'(m_addr); g.len = int'(m_len);
    got.push_back(g);
  end

  task automatic send(bq_t t, bit gaps);
    for (int i = 0; i < t.size(); i += 8) begin
      int n;
      n = (t.size() - i < 8) ? t.size() - i : 8;
      @(negedge clk);
      s_valid = 1; s_data = '0;
      for (int j = 0; j < n; j++) s_data[63-8*j -: 8] = t[i+j];
      s_last = (i + 8 >= t.size()); s_nbytes = 4'(n);
      @(posedge clk);
      while (!s_ready) @(posedge clk);
      @(negedge clk); s_valid = 0;
      if (gaps && $urandom_range(0, 1) == 0) repeat ($urandom_range(1, 6)) @(negedge clk);
    end
  endtask

  task automatic run(wm_ref m, bq_t t, bit gaps, bit preload, output int cyc);
    match_t exp[$];
    got.delete();
    m.search(t, exp);
    if (preload) send(t, 0);
    fork
      if (!preload) send(t, gaps);
      begin
        @(negedge clk); start = 1; li_next = 1;
        @(negedge clk); start = 0; li_next = 0;
        cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
      end
    join
    @(negedge clk);
    check(got.size() == exp.size(), $sformatf("%0d reports, want %0d", got.size(), exp.size()));
    foreach (exp[i]) begin
      if (i < got.size())
        check(got[i].pos == exp[i].pos && got[i].addr == exp[i].addr && got[i].len == exp[i].len,
              $sformatf("report %0d: pos %0d addr %0d len %0d want %0d %0d %0d", i,
                        got[i].pos, got[i].addr, got[i].len, exp[i].pos, exp[i].addr, exp[i].len));
    end
    $display("trace %0d bytes: %0d reports, %0d cycles", t.size(), exp.size(), cyc);
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wm_ref m;
    bq_t t;
    int cyc;
    pm_stats_t acc;
    m = new(ML);
    m.gen_set(30, ML, 60);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // program the tables from the model
    foreach (m.pb[i]) begin
      @(negedge clk); pb_wr_en = 1; pb_wr_addr = addr_t'(i); pb_wr_data = m.pb[i];
    end
    @(negedge clk); pb_wr_en = 0;
    for (int p = 0; p < 65536; p++) begin
      tb_st_req = 1; tb_pair = pair_t'(p); tb_bus1 = 8'(m.get_shift(p));
      tb_bf_set = m.shift.exists(p);
      @(negedge clk);
    end
    tb_st_req = 0; tb_bf_set = 0;
    foreach (m.pats[i]) begin
      int sp;
      sp = m.suffix(m.pats[i]);
      @(negedge clk);
      tb_ht_valid = 1; tb_pair = pair_t'(sp); tb_bus1 = 8'(m.words[i]); tb_din = addr_t'(m.addr[i]);
      tb_ht_cmd = (m.seg_start[sp] == m.addr[i]) ? HT_NEW : HT_APPEND;
      @(negedge clk); tb_ht_valid = 0;
      while (!ht_done) @(negedge clk);
    end
    tb_own = 0;
    acc = '0;
    // trace 1: doped, sent with gaps
    t = m.dope(3000, 40);
    run(m, t, 1, 0, cyc);
    acc = stats;
    // trace 2: doped, sent at full rate
    t = m.dope(3000, 20);
    run(m, t, 0, 0, cyc);
    check(stats.found > 0, "matches found");
    check(stats.bf_reject > 0 && acc.bf_reject > 0, "Bloom filter rejects");
    check(stats.st_shift + acc.st_shift > 0, "non-zero shift from table");
    check(stats.ht_lookup > 0, "hash table lookups");
    check(stats.pat_checked + acc.pat_checked > stats.found + acc.found, "compares without match");
    check(stats.long_skip > 0, "long skip after match");
    check(acc.stall > 0, "stall on slow trace");
    $display("stats t1: win %0d bfrej %0d stshift %0d ht %0d cmp %0d found %0d long %0d stall %0d",
             acc.windows, acc.bf_reject, acc.st_shift, acc.ht_lookup, acc.pat_checked, acc.found, acc.long_skip, acc.stall);
    $display("stats t2: win %0d bfrej %0d stshift %0d ht %0d cmp %0d found %0d long %0d stall %0d",
             stats.windows, stats.bf_reject, stats.st_shift, stats.ht_lookup, stats.pat_checked, stats.found, stats.long_skip, stats.stall);
    // trace 3: bytes no signature contains -> only maximum shifts
    t.delete();
    for (int i = 0; i < 2800; i++) t.push_back(8'hEE);
    begin
      bit clean;
      clean = !m.shift.exists(16'hEEEE);
      if (clean) begin
        run(m, t, 0, 1, cyc);
        // fill: 2048 bytes at the LI's 8 bytes/cycle; then (2800-ML)/(ML-1)+1
        // windows of 2 cycles each (7 bytes/cycle, below the LI rate)
        check(stats.windows == 32'((2800 - ML) / (ML - 1) + 1), $sformatf("windows %0d", stats.windows));
        check(stats.bf_reject == stats.windows || stats.st_shift + stats.bf_reject == stats.windows,
              "every window moves by the maximum shift");
        check(cyc <= 2048 / 8 + 2 * int'(stats.windows) + 8 && cyc >= 2 * int'(stats.windows),
              $sformatf("%0d cycles for %0d windows: 2 cycles per window", cyc, stats.windows));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
