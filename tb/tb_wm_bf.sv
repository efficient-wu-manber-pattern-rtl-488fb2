// tb_wm_bf: self-checking test of the Bloom filter.
// The expected bit index of a pair is computed here from the hash formula
// (low 16 bits of pair * 40503, top VEC_LOG2 bits).  Sets random pairs and
// checks: no set pair ever misses, a pair hits exactly when some set pair
// shares its index, and clr empties the vector.
module tb_wm_bf;
  import wm_pkg::*;
  localparam int unsigned VEC_LOG2 = 13;
  logic clk = 0, rst_n = 0;
  logic clr = 0, set = 0, hit;
  pair_t set_pair = '0, query_pair = '0;
  int checks = 0, failures = 0;
  bit marked [int];
  pair_t setl [$];

  wm_bf dut (.*);

  always #5 clk = ~clk;

  function automatic int idx(input pair_t p);
    longint unsigned prod;
    prod = (longint'(p) * 40503) % 65536;
    return int'(prod >> (16 - VEC_LOG2));
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hits, misses;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // empty after reset
    for (int i = 0; i < 50; i++) begin
      @(negedge clk); query_pair = pair_t'($urandom); #1;
      check(hit == 1'b0, "empty after reset");
    end
    for (int i = 0; i < 300; i++) begin
      @(negedge clk); set = 1; set_pair = pair_t'($urandom);
      setl.push_back(set_pair); marked[idx(set_pair)] = 1;
    end
    @(negedge clk); set = 0;
    foreach (setl[i]) begin
      query_pair = setl[i]; #1;
      check(hit == 1'b1, $sformatf("set pair %h must hit", setl[i]));
    end
    hits = 0; misses = 0;
    for (int i = 0; i < 2000; i++) begin
      query_pair = pair_t'($urandom); #1;
      check(hit == marked.exists(idx(query_pair)), $sformatf("pair %h hit=%0b", query_pair, hit));
      if (hit) hits++; else misses++;
    end
    check(misses > 0 && hits < 2000, "filter rejects most unset pairs");
    @(negedge clk); clr = 1;
    @(negedge clk); clr = 0;
    foreach (setl[i]) begin
      query_pair = setl[i]; #1;
      check(hit == 1'b0, "cleared");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
