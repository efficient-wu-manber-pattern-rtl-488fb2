// tb_wm_st: self-checking test of the shift table.
// Writes random shift values to random byte pairs, checks that WriteDone
// follows each write by one cycle, reads every written pair back and checks
// the value and that DataReady follows the read by one cycle.  Pairs 0x0000
// and 0xFFFF check both ends of the 64k memory.
module tb_wm_st;
  import wm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req = 0, write = 0;
  pair_t bus2 = '0;
  logic [7:0] bus1 = '0, dout;
  logic data_ready, write_done;
  int checks = 0, failures = 0;
  logic [7:0] model [int];
  pair_t addrs [$];

  wm_st dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic do_write(input pair_t a, input logic [7:0] v);
    @(negedge clk); req = 1; write = 1; bus2 = a; bus1 = v;
    @(negedge clk); req = 0; write = 0;
    check(write_done === 1'b1 && data_ready === 1'b0, $sformatf("write_done after write %h", a));
    @(negedge clk);
    check(write_done === 1'b0, "write_done is one pulse");
    model[int'(a)] = v;
  endtask

  task automatic do_read(input pair_t a, output logic [7:0] v);
    @(negedge clk); req = 1; write = 0; bus2 = a;
    @(negedge clk); req = 0;
    check(data_ready === 1'b1 && write_done === 1'b0, $sformatf("data_ready after read %h", a));
    v = dout;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] v;
    repeat (3) @(posedge clk);
    rst_n = 1;
    addrs.push_back(16'h0000);
    addrs.push_back(16'hFFFF);
    for (int i = 0; i < 200; i++) addrs.push_back(pair_t'($urandom));
    foreach (addrs[i]) do_write(addrs[i], 8'($urandom_range(0, 14)));
    // overwrite some entries
    for (int i = 0; i < 20; i++) do_write(addrs[i], 8'($urandom_range(0, 14)));
    foreach (addrs[i]) begin
      do_read(addrs[i], v);
      check(v == model[int'(addrs[i])], $sformatf("read %h got %0d want %0d", addrs[i], v, model[int'(addrs[i])]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
