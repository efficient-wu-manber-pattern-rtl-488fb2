// tb_wm_cm: self-checking test of the controller.
// Plays the shifter and the matcher: checks the mode sequence LOAD -> PRE ->
// SEARCH -> DONE, that ps_start and pm_start are single pulses issued on
// entry to their phases, that n_words is latched at start, that a second
// scan restarts the matcher and that load returns to MODE_LOAD.
module tb_wm_cm;
  import wm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0, scan = 0, load = 0;
  addr_t n_words_in = '0, n_words;
  logic ps_start, ps_done = 0, pm_start, pm_done = 1;
  mode_e mode;
  int checks = 0, failures = 0;
  int ps_pulses = 0, pm_pulses = 0;

  wm_cm dut (.*);

  always #5 clk = ~clk;
  always @(negedge clk) begin
    if (ps_start) ps_pulses++;
    if (pm_start) pm_pulses++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(mode == MODE_LOAD, "reset in LOAD");
    n_words_in = 32'd1234; start = 1;
    @(negedge clk); start = 0; n_words_in = 32'd99;
    check(mode == MODE_PRE && ps_start && n_words == 32'd1234, "PRE with ps_start and n_words");
    repeat (10) @(negedge clk);
    check(mode == MODE_PRE && ps_pulses == 1, $sformatf("PRE holds until ps_done, one ps_start (mode %s, %0d pulses)", mode.name(), ps_pulses));
    ps_done = 1;
    @(negedge clk);
    check(mode == MODE_SEARCH && pm_start, "SEARCH with pm_start");
    pm_done = 0;          // matcher leaves its done state
    repeat (10) @(negedge clk);
    check(mode == MODE_SEARCH && pm_pulses == 1, "SEARCH holds until pm_done");
    pm_done = 1;
    @(negedge clk); @(negedge clk);
    check(mode == MODE_DONE, "DONE after pm_done");
    scan = 1;
    @(negedge clk); scan = 0;
    check(mode == MODE_SEARCH && pm_start && pm_pulses == 1, "scan restarts search");
    @(negedge clk);
    check(mode == MODE_SEARCH, "stale pm_done ignored right after pm_start");
    pm_done = 0; @(negedge clk); pm_done = 1; @(negedge clk); @(negedge clk);
    check(mode == MODE_DONE && pm_pulses == 2, "second search done");
    load = 1;
    @(negedge clk); load = 0;
    check(mode == MODE_LOAD && ps_pulses == 1, "back to LOAD");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
