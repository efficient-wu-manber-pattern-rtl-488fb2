// wm_st: Shift Table (ST).
//
// A 64k x 8-bit memory holding, for every byte pair, how far the search
// window may move forward when that pair ends the window.  The byte pair on
// Bus2 is the address; during preprocessing the value on Bus1 is written when
// "write" is high, otherwise the table is read.  The memory, the Bus1/Bus2
// naming, the "write" input and the DataReady/WriteDone flags follow the
// paper.  The request strobe "req" is this design's addition: it marks the
// cycle an access is issued, so that each access yields exactly one flag.
//
// Timing: an access issued with req in cycle t completes at the clock edge
// ending cycle t.  In cycle t+1 data_ready (reads, with dout valid) or
// write_done (writes) is high for one cycle.  One access may be issued per
// cycle.  The memory itself is not reset.
module wm_st
  import wm_pkg::*;
#(
  parameter int unsigned PAIR_W = BUS2_W,  // address width: 16 gives 64k entries
  parameter int unsigned DATA_W = BUS1_W   // one byte per entry
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req,         // access strobe
  input  logic              write,       // 1 write, 0 read
  input  logic [PAIR_W-1:0] bus2,        // byte pair = address
  input  logic [DATA_W-1:0] bus1,        // shift value to write
  output logic [DATA_W-1:0] dout,        // shift value read
  output logic              data_ready,  // read finished, dout valid
  output logic              write_done   // write finished
);

  logic [DATA_W-1:0] mem [2**PAIR_W];

  always_ff @(posedge clk) begin
    if (req && write) mem[bus2] <= bus1;
    if (req && !write) dout <= mem[bus2];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data_ready <= 1'b0;
      write_done <= 1'b0;
    end else begin
      data_ready <= req && !write;
      write_done <= req && write;
    end
  end

endmodule
