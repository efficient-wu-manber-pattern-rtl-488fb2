// tb_wm_top: end-to-end test of the whole engine at its default sizes.
// A random set of 60 signatures (15..90 bytes, a third of them sharing a
// suffix pair with another) is written into the pattern buffer; start runs
// preprocessing and then the search of a first doped trace, which is sent
// with random gaps so the matcher has to wait for bytes.  scan then searches
// a second trace, sent at full rate, with the same tables.  Every report is
// compared with the reference search.  The test counts each mechanism of the
// design and fails if one never happened: Bloom-filter reject, non-zero
// shift from the table, hash-table lookup, compare without match, match,
// match of a signature that is not the first of its segment, skip longer
// than the maximum shift, stall, and each controller mode change.
module tb_wm_top;
  import wm_pkg::*;
  import wm_ref_pkg::*;
  localparam int unsigned ML = 15;
  logic clk = 0, rst_n = 0;
  logic pb_wr_en = 0, start = 0, scan = 0, load = 0;
  addr_t pb_wr_addr = '0, n_words = '0;
  pb_word_t pb_wr_data = '0;
  mode_e mode;
  logic s_valid = 0, s_ready, s_last = 0;
  logic [63:0] s_data = '0;
  logic [3:0] s_nbytes = '0;
  logic m_valid;
  logic [31:0] m_pos;
  addr_t m_addr;
  logic [15:0] m_len;
  pm_stats_t stats;
  int checks = 0, failures = 0;

  wm_top dut (.*);

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

  int mode_changes[4];
  mode_e last_mode = MODE_LOAD;
  always @(negedge clk) if (rst_n) begin
    if (mode != last_mode) mode_changes[int'(mode)]++;
    last_mode = mode;
  end

  task automatic send(bq_t t, bit gaps);
    for (int i = 0; i < t.size(); i += 8) begin
      int n;
      n = (t.size() - i < 8) ? t.size() - i : 8;
      s_valid = 1; s_data = '0;
      for (int j = 0; j < n; j++) s_data[63-8*j -: 8] = t[i+j];
      s_last = (i + 8 >= t.size()); s_nbytes = 4'(n);
      @(posedge clk);
      while (!s_ready) @(posedge clk);
      #1 s_valid = 0;
      if (gaps && $urandom_range(0, 1) == 0) repeat ($urandom_range(1, 6)) @(posedge clk);
      #1;
    end
  endtask

  task automatic compare(wm_ref m, bq_t t, ref int not_first);
    match_t exp[$];
    m.search(t, exp);
    check(got.size() == exp.size(), $sformatf("%0d reports, want %0d", got.size(), exp.size()));
    foreach (exp[i]) begin
      if (i < got.size())
        check(got[i].pos == exp[i].pos && got[i].addr == exp[i].addr && got[i].len == exp[i].len,
              $sformatf("report %0d: pos %0d addr %0d len %0d want %0d %0d %0d", i,
                        got[i].pos, got[i].addr, got[i].len, exp[i].pos, exp[i].addr, exp[i].len));
      foreach (m.addr[k])
        if (m.addr[k] == exp[i].addr && m.seg_start[m.suffix(m.pats[k])] != exp[i].addr) not_first++;
    end
    $display("trace of %0d bytes: %0d reports", t.size(), exp.size());
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wm_ref m;
    bq_t t1, t2;
    pm_stats_t s1;
    int cyc, not_first;
    m = new(ML);
    m.gen_set(60, ML, 90);
    t1 = m.dope(4000, 30);
    t2 = m.dope(6000, 15);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    foreach (m.pb[i]) begin
      pb_wr_en = 1; pb_wr_addr = addr_t'(i); pb_wr_data = m.pb[i];
      @(negedge clk);
    end
    pb_wr_en = 0;
    n_words = addr_t'(m.n_words());
    start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (mode == MODE_PRE) begin @(negedge clk); cyc++; end
    $display("preprocessing of %0d signatures (%0d words): %0d cycles", m.pats.size(), m.n_words(), cyc);
    check(mode == MODE_SEARCH, "search follows preprocessing");
    // trace 1, slow
    got.delete();
    send(t1, 1);
    cyc = 0;
    while (mode != MODE_DONE) begin @(negedge clk); cyc++; end
    not_first = 0;
    compare(m, t1, not_first);
    s1 = stats;
    // trace 2, full rate, same tables
    got.delete();
    @(negedge clk); scan = 1;
    @(negedge clk); scan = 0;
    check(mode == MODE_SEARCH, "scan starts a new search");
    send(t2, 0);
    cyc = 0;
    while (mode != MODE_DONE) begin @(negedge clk); cyc++; end
    compare(m, t2, not_first);
    $display("trace 2: %0d cycles for %0d bytes (%0d.%02d bytes/cycle)", cyc, t2.size(),
             t2.size() / cyc, (100 * t2.size() / cyc) % 100);
    @(negedge clk);
    // mechanisms
    $display("windows %0d+%0d bf_reject %0d+%0d st_shift %0d+%0d ht_lookup %0d+%0d compares %0d+%0d found %0d+%0d long_skip %0d+%0d stall %0d+%0d",
             s1.windows, stats.windows, s1.bf_reject, stats.bf_reject, s1.st_shift, stats.st_shift,
             s1.ht_lookup, stats.ht_lookup, s1.pat_checked, stats.pat_checked, s1.found, stats.found,
             s1.long_skip, stats.long_skip, s1.stall, stats.stall);
    check(s1.bf_reject + stats.bf_reject > 0, "mechanism: Bloom-filter reject");
    check(s1.st_shift + stats.st_shift > 0, "mechanism: non-zero shift from table");
    check(s1.ht_lookup + stats.ht_lookup > 0, "mechanism: hash-table lookup");
    check(s1.pat_checked + stats.pat_checked > s1.found + stats.found, "mechanism: compare without match");
    check(s1.found > 0 && stats.found > 0, "mechanism: match in both traces");
    check(not_first > 0, "mechanism: match of a later signature of a segment");
    check(s1.long_skip + stats.long_skip > 0, "mechanism: long skip");
    check(s1.stall > 0, "mechanism: stall");
    check(mode_changes[int'(MODE_PRE)] == 1, "mode change: LOAD -> PRE");
    check(mode_changes[int'(MODE_SEARCH)] == 2, "mode change: -> SEARCH twice");
    check(mode_changes[int'(MODE_DONE)] == 2, $sformatf("mode change: -> DONE twice (%0d %0d %0d %0d)", mode_changes[0], mode_changes[1], mode_changes[2], mode_changes[3]));
    load = 1;
    @(negedge clk); load = 0;
    check(mode == MODE_LOAD, "mode change: DONE -> LOAD");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
