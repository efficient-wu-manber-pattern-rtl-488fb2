// tb_wm_ps: self-checking test of the pattern shifter.
// Loads a random signature set (some signatures share suffix pairs) into a
// pattern buffer, lets the shifter build the shift table, hash table and
// Bloom filter, then reads back all 64k shift entries, every segment of the
// hash table and the Bloom bit of every pair that got a shift, and compares
// them with the reference model.
module tb_wm_ps;
  import wm_pkg::*;
  import wm_ref_pkg::*;
  localparam int unsigned ML = 15;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  // pattern buffer
  logic pb_wr_en = 0, pb_ad_ld, pb_ad_inc;
  addr_t pb_wr_addr = '0, pb_ad_val, pb_ad;
  pb_word_t pb_wr_data = '0, pb_q;
  // PS
  logic start = 0, busy, done;
  addr_t n_words = '0;
  logic [7:0] bus1, st_dout;
  pair_t bus2;
  logic ps_st_req, ps_st_write, st_data_ready, st_write_done;
  logic bf_clr, bf_set, bf_hit;
  logic ps_ht_valid, ht_busy, ht_done;
  ht_cmd_e ps_ht_cmd;
  addr_t ht_din, ht_start, ht_end;
  // testbench access after preprocessing
  logic tb_own = 0, tb_st_req = 0, tb_ht_valid = 0;
  pair_t tb_pair = '0;

  wm_pb #(.DEPTH_LOG2(12)) u_pb (.clk, .rst_n, .wr_en (pb_wr_en), .wr_addr (pb_wr_addr),
    .wr_data (pb_wr_data), .ad_ld (pb_ad_ld), .ad_val (pb_ad_val), .ad_inc (pb_ad_inc),
    .ad (pb_ad), .q (pb_q));
  wm_st u_st (.clk, .rst_n, .req (tb_own ? tb_st_req : ps_st_req), .write (!tb_own && ps_st_write),
    .bus2 (tb_own ? tb_pair : bus2), .bus1 (bus1), .dout (st_dout),
    .data_ready (st_data_ready), .write_done (st_write_done));
  wm_ht u_ht (.clk, .rst_n, .cmd_valid (tb_own ? tb_ht_valid : ps_ht_valid),
    .cmd (tb_own ? HT_READ : ps_ht_cmd), .pair (tb_own ? tb_pair : bus2), .din (ht_din),
    .hash_count (bus1), .busy (ht_busy), .done (ht_done), .rd_start (ht_start), .rd_end (ht_end));
  wm_bf u_bf (.clk, .rst_n, .clr (bf_clr), .set (bf_set), .set_pair (bus2),
    .query_pair (tb_pair), .hit (bf_hit));
  wm_ps dut (.clk, .rst_n, .start, .n_words, .busy, .done,
    .pb_ad_ld, .pb_ad_val, .pb_ad_inc, .pb_q, .bus1, .bus2,
    .st_req (ps_st_req), .st_write (ps_st_write), .st_dout, .st_data_ready, .st_write_done,
    .bf_clr, .bf_set, .ht_cmd_valid (ps_ht_valid), .ht_cmd (ps_ht_cmd), .ht_din, .ht_done);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wm_ref m;
    int cyc;
    m = new(ML);
    m.gen_set(40, ML, 70);
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (m.pb[i]) begin
      @(negedge clk); pb_wr_en = 1; pb_wr_addr = addr_t'(i); pb_wr_data = m.pb[i];
    end
    @(negedge clk); pb_wr_en = 0;
    n_words = addr_t'(m.n_words());
    start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    $display("preprocessing: %0d signatures, %0d words, %0d cycles", m.pats.size(), m.n_words(), cyc);
    tb_own = 1;
    // shift table, all entries
    for (int p = 0; p < 65536; p++) begin
      @(negedge clk); tb_st_req = 1; tb_pair = pair_t'(p);
      @(negedge clk); tb_st_req = 0;
      check(st_data_ready && int'(st_dout) == m.get_shift(p),
            $sformatf("shift[%h] = %0d want %0d", p, st_dout, m.get_shift(p)));
    end
    // Bloom filter: every pair with a shift entry must hit
    foreach (m.shift[p]) begin
      tb_pair = pair_t'(p); #1;
      check(bf_hit, $sformatf("bloom bit of %h", p));
    end
    // hash table segments
    foreach (m.seg_start[p]) begin
      @(negedge clk); tb_ht_valid = 1; tb_pair = pair_t'(p);
      @(negedge clk); tb_ht_valid = 0;
      while (!ht_done) @(negedge clk);
      check(int'(ht_start) == m.seg_start[p] && int'(ht_end) == m.seg_end[p],
            $sformatf("segment %h: %0d..%0d want %0d..%0d", p, ht_start, ht_end, m.seg_start[p], m.seg_end[p]));
    end
    begin
      int multi;
      multi = 0;
      foreach (m.seg_n[p]) if (m.seg_n[p] > 1) multi++;
      check(multi > 0, "set has segments of several signatures");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
