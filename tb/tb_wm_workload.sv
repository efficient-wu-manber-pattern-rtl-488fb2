// tb_wm_workload: the engine at the scale of the evaluated workload.
// 2,500 random signatures of 15..108 bytes (about 154 kB in all, the size of
// the evaluated signature file; shortest 15 bytes, so the maximum shift is
// 14) are loaded and preprocessed with the engine at its default sizes.  Then
// four synthetic traces are scanned, one per doping level and size pair of
// the evaluated trace files (1.66% / 147 kB, 11.71% / 163 kB, 39.02% /
// 238 kB, 63.98% / 404 kB).  Here the doping level is the share of trace
// bytes that belong to inserted signatures (intact or damaged), since the
// original traces and their line structure are not available.  Every report
// is compared with the software reference; throughput in bytes per cycle is
// printed for each trace.
module tb_wm_workload;
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

  task automatic send(bq_t t);
    for (int i = 0; i < t.size(); i += 8) begin
      int n;
      n = (t.size() - i < 8) ? t.size() - i : 8;
      s_valid = 1; s_data = '0;
      for (int j = 0; j < n; j++) s_data[63-8*j -: 8] = t[i+j];
      s_last = (i + 8 >= t.size()); s_nbytes = 4'(n);
      @(posedge clk);
      while (!s_ready) @(posedge clk);
      #1;
    end
    s_valid = 0;
  endtask

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wm_ref m;
    int total, cyc;
    int kb[4]   = '{147, 163, 238, 404};
    real dop[4] = '{0.0166, 0.1171, 0.3902, 0.6398};
    m = new(ML);
    m.gen_set(2500, ML, 108);
    total = 0;
    foreach (m.pats[i]) total += m.pats[i].size();
    $display("signature set: %0d signatures, %0d bytes, %0d words", m.pats.size(), total, m.n_words());
    check(m.n_words() <= 2**15, "set fits the pattern buffer");
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
    $display("preprocessing: %0d cycles", cyc);
    for (int k = 0; k < 4; k++) begin
      bq_t t;
      match_t exp[$];
      int gap;
      // mean signature bytes per insertion: 2/3 of insertions carry one
      gap = int'((2.0 / 3.0) * 61.5 * (1.0 - dop[k]) / dop[k]);
      t = m.dope(kb[k] * 1000, gap);
      exp.delete();
      m.search(t, exp);
      got.delete();
      if (k > 0) begin
        @(negedge clk); scan = 1;
        @(negedge clk); scan = 0;
      end
      fork
        send(t);
        begin
          cyc = 0;
          @(negedge clk);
          while (mode != MODE_DONE) begin @(negedge clk); cyc++; end
        end
      join
      check(got.size() == exp.size(), $sformatf("trace %0d: %0d reports, want %0d", k, got.size(), exp.size()));
      foreach (exp[i])
        if (i < got.size())
          check(got[i].pos == exp[i].pos && got[i].addr == exp[i].addr && got[i].len == exp[i].len,
                $sformatf("trace %0d report %0d differs", k, i));
      check(stats.found > 0, "signatures found");
      $display("doping %0.2f%%, %0d kB: %0d matches, %0d cycles, %0.2f bytes/cycle (%0.0f Mbps at 239 MHz)",
               dop[k] * 100.0, kb[k], exp.size(), cyc, real'(t.size()) / cyc,
               real'(t.size()) * 8.0 / cyc * 239.0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
