// tb_wm_ht: self-checking test of the hash table.
// Builds segments as the pattern shifter would (one HT_NEW then HT_APPENDs
// with word counts), reads each segment back with HT_READ and compares start
// and end with a model (end = start + sum of counts - 1).  Checks the busy
// cycles of each command: NEW 4, APPEND 2, READ 2, done one cycle later.
module tb_wm_ht;
  import wm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, busy, done;
  ht_cmd_e cmd = HT_READ;
  pair_t pair = '0;
  addr_t din = '0, rd_start, rd_end;
  logic [7:0] hash_count = '0;
  int checks = 0, failures = 0;
  addr_t m_start [int], m_end [int];

  wm_ht dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic issue(input ht_cmd_e c, input pair_t p, input addr_t d, input logic [7:0] n,
                       input int exp_cycles);
    int cyc;
    @(negedge clk); cmd_valid = 1; cmd = c; pair = p; din = d; hash_count = n;
    @(negedge clk); cmd_valid = 0; pair = pair_t'($urandom); hash_count = 8'($urandom);
    cyc = 0;
    while (!done) begin cyc++; @(negedge clk); end
    check(cyc == exp_cycles, $sformatf("cmd %s took %0d cycles, want %0d", c.name(), cyc, exp_cycles));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr_t a;
    pair_t p;
    repeat (3) @(posedge clk);
    rst_n = 1;
    a = 32'd0;
    for (int s = 0; s < 60; s++) begin
      int np;
      p = (s == 0) ? 16'h0000 : (s == 1) ? 16'hFFFF : pair_t'($urandom);
      if (m_start.exists(int'(p))) continue;
      np = $urandom_range(1, 4);
      for (int k = 0; k < np; k++) begin
        logic [7:0] n;
        n = 8'($urandom_range(2, 255));
        if (k == 0) begin
          issue(HT_NEW, p, a, n, 4);
          m_start[int'(p)] = a;
        end else begin
          issue(HT_APPEND, p, 32'hDEAD_BEEF, n, 2);
        end
        a = a + addr_t'(n);
        m_end[int'(p)] = a - 1;
      end
    end
    foreach (m_start[k]) begin
      issue(HT_READ, pair_t'(k), '0, '0, 2);
      check(rd_start == m_start[k] && rd_end == m_end[k],
            $sformatf("pair %h start %0d end %0d want %0d %0d", k, rd_start, rd_end, m_start[k], m_end[k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
