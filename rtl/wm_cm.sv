// wm_cm: Controller module (CM).
//
// Sequences the engine through its three phases and decides which module
// drives the shared tables.  In MODE_LOAD the host writes signatures into the
// pattern buffer.  A start pulse latches the number of words loaded and moves
// to MODE_PRE, in which the pattern shifter owns the pattern buffer, the
// shift table, the hash table and the Bloom filter; when it reports done the
// controller moves to MODE_SEARCH and starts the pattern matcher, which then
// owns them; when the matcher reports done the controller enters MODE_DONE.
// From MODE_DONE, scan pulses the matcher again for a further trace with the
// same tables, and load returns to MODE_LOAD for a new signature set.
//
// The paper says only that the controller drives the data paths,
// multiplexers, registers and control signals of all modules; this phase
// sequence and the ownership rule are this design's reading of Section IV's
// load / preprocess / search order.  ps_start and pm_start are one-cycle
// pulses issued on entry to a phase.
module wm_cm
  import wm_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,      // patterns loaded: preprocess, then search
  input  logic  scan,       // in MODE_DONE: search another trace
  input  logic  load,       // in MODE_DONE: back to loading
  input  addr_t n_words_in,
  output addr_t n_words,
  output logic  ps_start,
  input  logic  ps_done,
  output logic  pm_start,
  input  logic  pm_done,
  output mode_e mode
);

  logic pm_started;   // matcher left its done state after pm_start

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode       <= MODE_LOAD;
      n_words    <= '0;
      ps_start   <= 1'b0;
      pm_start   <= 1'b0;
      pm_started <= 1'b0;
    end else begin
      ps_start <= 1'b0;
      pm_start <= 1'b0;
      unique case (mode)
        MODE_LOAD: if (start) begin
          n_words  <= n_words_in;
          ps_start <= 1'b1;
          mode     <= MODE_PRE;
        end
        MODE_PRE: if (ps_done && !ps_start) begin
          pm_start   <= 1'b1;
          pm_started <= 1'b0;
          mode       <= MODE_SEARCH;
        end
        MODE_SEARCH: begin
          if (!pm_done && !pm_start) pm_started <= 1'b1;
          if (pm_done && pm_started) mode <= MODE_DONE;
        end
        MODE_DONE: begin
          if (scan) begin
            pm_start   <= 1'b1;
            pm_started <= 1'b0;
            mode       <= MODE_SEARCH;
          end else if (load) begin
            mode <= MODE_LOAD;
          end
        end
        default: mode <= MODE_LOAD;
      endcase
    end
  end

endmodule
