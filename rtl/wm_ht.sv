// wm_ht: Hash Table (HT).
//
// For every suffix byte pair the hash table holds where, in the pattern
// buffer, the segment of patterns whose first ML bytes end in that pair
// starts and ends.  It is a 128k x 32-bit memory addressed by {StrAdd, pair}:
// the half with StrAdd = 0 holds end addresses, the half with StrAdd = 1
// start addresses (as in the paper's Fig. 3 address map 00000.. / 10000..).
// The end address stored is the address of the segment's last word.
//
// Datapath (after Fig. 3): DINReg captures DataIn (a start address);
// AddressReg is loaded from DINReg (LD) and advanced by an adder that adds
// Hash Count, the number of words a pattern occupies (given on the 8-bit
// Bus1).  A new segment writes its start address and start + count - 1; each
// further pattern of the same segment adds its count and rewrites the end.
// AddressReg therefore always holds one past the current segment end.
//
// Control: the paper states the HT is a 7-state FSM but does not list the
// states; this design's seven are IDLE, LOAD, WR_START, ADD, WR_END,
// RD_START, RD_END.
//   HT_NEW    : IDLE -> LOAD -> WR_START -> ADD -> WR_END -> IDLE  (4 cycles busy)
//   HT_APPEND : IDLE -> ADD -> WR_END -> IDLE                       (2 cycles busy)
//   HT_READ   : IDLE -> RD_START -> RD_END -> IDLE                  (2 cycles busy)
// A command is accepted in IDLE when cmd_valid is high; done pulses for one
// cycle after the last state, with rd_start/rd_end valid for HT_READ.
// pair and hash_count are captured with the command.
module wm_ht
  import wm_pkg::*;
#(
  parameter int unsigned PAIR_W = BUS2_W,  // 16: 2 x 64k = 128k words
  parameter int unsigned DW     = AW       // 32-bit words
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  ht_cmd_e           cmd,
  input  logic [PAIR_W-1:0] pair,        // Bus2
  input  logic [DW-1:0]     din,         // DataIn: segment start address (HT_NEW)
  input  logic [BUS1_W-1:0] hash_count,  // Bus1: words of the pattern
  output logic              busy,
  output logic              done,
  output logic [DW-1:0]     rd_start,
  output logic [DW-1:0]     rd_end
);

  typedef enum logic [2:0] {
    S_IDLE, S_LOAD, S_WR_START, S_ADD, S_WR_END, S_RD_START, S_RD_END
  } state_e;

  state_e            state;
  logic [DW-1:0]     mem [2**(PAIR_W+1)];
  logic [DW-1:0]     din_reg;
  logic [DW-1:0]     address_reg;
  logic [PAIR_W-1:0] pair_q;
  logic [BUS1_W-1:0] count_q;

  // Memory ports: one write, one synchronous read, both at {StrAdd, pair}.
  always_ff @(posedge clk) begin
    unique case (state)
      S_WR_START: mem[{1'b1, pair_q}] <= din_reg;
      S_WR_END:   mem[{1'b0, pair_q}] <= address_reg - DW'(1);
      S_RD_START: rd_start <= mem[{1'b1, pair_q}];
      S_RD_END:   rd_end   <= mem[{1'b0, pair_q}];
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      din_reg     <= '0;
      address_reg <= '0;
      pair_q      <= '0;
      count_q     <= '0;
      done        <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          pair_q  <= pair;
          count_q <= hash_count;
          unique case (cmd)
            HT_NEW:    begin din_reg <= din; state <= S_LOAD; end
            HT_APPEND: state <= S_ADD;
            HT_READ:   state <= S_RD_START;
            default:   state <= S_IDLE;
          endcase
        end
        S_LOAD:     begin address_reg <= din_reg; state <= S_WR_START; end
        S_WR_START: state <= S_ADD;
        S_ADD:      begin address_reg <= address_reg + DW'(count_q); state <= S_WR_END; end
        S_WR_END:   begin done <= 1'b1; state <= S_IDLE; end
        S_RD_START: state <= S_RD_END;
        S_RD_END:   begin done <= 1'b1; state <= S_IDLE; end
        default:    state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
