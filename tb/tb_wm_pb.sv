// tb_wm_pb: self-checking test of the pattern buffer.
// Loads random 65-bit words, then reads them back through the address
// register: a load of AD shows its word in the next cycle, each increment
// the following word.  Also checks the AD output.
module tb_wm_pb;
  import wm_pkg::*;
  localparam int unsigned DEPTH_LOG2 = 10;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, ad_ld = 0, ad_inc = 0;
  addr_t wr_addr = '0, ad_val = '0, ad;
  pb_word_t wr_data = '0, q;
  pb_word_t model [2**DEPTH_LOG2];
  int checks = 0, failures = 0;

  wm_pb #(.DEPTH_LOG2(DEPTH_LOG2)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 2**DEPTH_LOG2; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = addr_t'(a);
      wr_data = '{more: 1'($urandom), data: {$urandom, $urandom}};
      model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int r = 0; r < 40; r++) begin
      int base, n;
      base = $urandom_range(0, 2**DEPTH_LOG2 - 20);
      n = $urandom_range(1, 16);
      @(negedge clk); ad_ld = 1; ad_val = addr_t'(base);
      @(negedge clk); ad_ld = 0;
      check(ad == addr_t'(base) && q == model[base], $sformatf("load %0d", base));
      for (int k = 1; k < n; k++) begin
        ad_inc = 1;
        @(negedge clk); ad_inc = 0;
        check(ad == addr_t'(base + k) && q == model[base + k], $sformatf("inc %0d", base + k));
      end
      // AD holds without commands
      @(negedge clk);
      check(ad == addr_t'(base + n - 1), "AD holds");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
