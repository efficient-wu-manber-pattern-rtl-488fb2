// wm_li: LAN Interface (LI).
//
// The trace to be scanned enters here as a stream of 64-bit words (first
// byte in [63:56]); the last word of the trace is flagged with s_last and
// carries s_nbytes (1..8) valid bytes.  Words wait in the LI buffer, a FIFO
// of 2**DEPTH_LOG2 words, and are unpacked into a 24-byte staging register
// that feeds the input slot of the pattern matcher.  The matcher moves its
// window by a variable number of bytes (up to 14 with the paper's sizes), so
// the staging register lets it take any number of bytes per cycle:
// bytes[0] is the oldest of the first 16 staged bytes offered, avail how
// many bytes are staged (0..24), and the
// matcher returns with take how many it consumed in this cycle.  Once the
// last trace word has entered staging, fin is high: no more bytes will come,
// and the matcher may then consume beyond avail (the remainder is padding it
// marks invalid).
//
// The paper names this module and says that the trace is stored in its
// buffer as 64-bit words; the FIFO depth, the staging register and the
// handshakes are this design's choices.
//
// Several traces may follow each other: the words after a trace's last word
// wait in the FIFO until next is pulsed, which discards the unconsumed rest of
// the finished trace.  next has no effect before fin.
//
// Timing: a word is accepted when s_valid && s_ready.  Each cycle staging
// first drops min(take, avail) bytes and then appends the FIFO's head word
// if it fits (at most 16 bytes left), so staging always reaches 17 bytes or
// more, enough for any move of up to 16 bytes, and a word can pass from the
// stream to the matcher in two cycles.  The sustained rate is 8 bytes/cycle.
module wm_li #(
  parameter int unsigned DEPTH_LOG2 = 9
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // trace stream in
  input  logic                  s_valid,
  output logic                  s_ready,
  input  logic [63:0]           s_data,
  input  logic                  s_last,
  input  logic [3:0]            s_nbytes,   // valid bytes of the last word, 1..8
  // byte feed to the pattern matcher
  output logic [15:0][7:0]      bytes,      // bytes[0] oldest
  output logic [4:0]            avail,
  output logic                  fin,
  input  logic [4:0]            take,
  input  logic                  next        // after fin: drop what is left, open the next trace
);

  typedef struct packed {
    logic        last;
    logic [3:0]  nbytes;
    logic [63:0] data;
  } li_word_t;

  li_word_t                mem [2**DEPTH_LOG2];
  logic [DEPTH_LOG2-1:0]   wp, rp;
  logic [DEPTH_LOG2:0]     count;
  logic [23:0][7:0]        stg;
  logic [4:0]              cnt;
  logic                    eos;

  logic                    push, pop;
  logic [4:0]              used, rem;
  li_word_t                head;
  logic [3:0]              head_n;

  assign s_ready = (count != (DEPTH_LOG2+1)'(2**DEPTH_LOG2));
  assign push    = s_valid && s_ready;
  assign head    = mem[rp];
  assign head_n  = head.last ? head.nbytes : 4'd8;
  assign used    = (take > cnt) ? cnt : take;
  assign rem     = cnt - used;
  assign pop     = (count != '0) && (rem <= 5'd16) && !eos;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= '{last: s_last, nbytes: s_nbytes, data: s_data};
  end

  // next staging content: drop the consumed bytes, append the head word
  logic [23:0][7:0] nstg;
  always_comb begin
    for (int i = 0; i < 24; i++)
      nstg[i] = (i + int'(used) < 24) ? stg[i + int'(used)] : 8'h00;
    if (pop)
      for (int j = 0; j < 8; j++)
        if (j < int'(head_n)) nstg[int'(rem) + j] = head.data[63-8*j -: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
      stg   <= '0;
      cnt   <= '0;
      eos   <= 1'b0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
      count <= count + (DEPTH_LOG2+1)'(push) - (DEPTH_LOG2+1)'(pop);
      stg   <= nstg;
      cnt   <= rem + (pop ? 5'(head_n) : 5'd0);
      if (pop && head.last) eos <= 1'b1;
      if (next && eos) begin
        cnt <= '0;
        eos <= 1'b0;
      end
    end
  end

  assign bytes = stg[15:0];
  assign avail = cnt;
  assign fin   = eos;

endmodule
