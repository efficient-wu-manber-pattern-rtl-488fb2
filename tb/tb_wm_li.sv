// tb_wm_li: self-checking test of the LAN interface.
// Sends two traces of random bytes (lengths not multiples of 8, random gaps
// between words) and consumes random byte counts on the feed side.  Every
// consumed byte must equal the next byte of the trace; avail must never
// exceed 16; fin must rise only after the whole first trace is in staging;
// next must open the second trace.  Also checks that a word can reach the
// feed two cycles after it is accepted.
module tb_wm_li;
  localparam int unsigned DEPTH_LOG2 = 4;
  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_ready, s_last = 0;
  logic [63:0] s_data = '0;
  logic [3:0] s_nbytes = '0;
  logic [15:0][7:0] bytes;
  logic [4:0] avail, take = '0;
  logic fin, next = 0;
  int checks = 0, failures = 0;
  byte unsigned tr [2][$];

  wm_li #(.DEPTH_LOG2(DEPTH_LOG2)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producer
  initial begin
    for (int t = 0; t < 2; t++)
      for (int i = 0; i < ((t == 0) ? 1003 : 517); i++) tr[t].push_back(8'($urandom));
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency: first word to feed
    @(negedge clk);
    for (int t = 0; t < 2; t++) begin
      for (int i = 0; i < tr[t].size(); i += 8) begin
        int n;
        n = (tr[t].size() - i < 8) ? tr[t].size() - i : 8;
        s_valid = 1;
        s_data = '0;
        for (int j = 0; j < n; j++) s_data[63-8*j -: 8] = tr[t][i+j];
        s_last = (i + 8 >= tr[t].size());
        s_nbytes = 4'(n);
        @(posedge clk);
        while (!s_ready) @(posedge clk);
        @(negedge clk);
        s_valid = 0;
        if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 3)) @(negedge clk);
      end
    end
  end

  // consumer
  initial begin
    int k;
    wait (rst_n);
    // first word latency
    @(posedge clk iff (s_valid && s_ready));
    @(negedge clk); @(negedge clk);
    check(avail == 5'd8, $sformatf("first word visible after 2 cycles, avail=%0d", avail));
    for (int t = 0; t < 2; t++) begin
      k = 0;
      while (k < tr[t].size()) begin
        @(negedge clk);
        check(avail <= 5'd24, "avail within staging");
        if (fin) check(k + int'(avail) == tr[t].size(), "fin only with the whole trace staged");
        take = 5'($urandom_range(0, 14));
        if (int'(take) > int'(avail)) take = avail;
        for (int j = 0; j < int'(take); j++) begin
          check(bytes[j] == tr[t][k], $sformatf("trace %0d byte %0d got %h want %h", t, k, bytes[j], tr[t][k]));
          k++;
        end
        @(posedge clk); #1 take = 0;
      end
      @(negedge clk);
      check(fin == 1'b1 && avail == 0, "fin at end of trace");
      next = 1;
      @(negedge clk); next = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
