// busy_manager: drives the busy line back to the trigger board.
//
// Busy is asserted in the cycle after a trigger is accepted (evt_start_i) and
// stays high until the Packager has finished that event (evt_done_i).  It is
// also high while the output FIFO has fewer than MAX_PKT_WORDS free words (it
// could not take another event of the largest size), while the data-hold
// service line from the data processing unit is high, and outside DAQ mode.
// busy_o is a register output (no glitches on the line).  The length of the
// last event-busy period, in clock cycles, is kept in last_len_o for
// diagnostics, and the number of accepted events in evt_cnt_o.
// From the paper: busy inhibits triggers until the event is collected and
// processed, and is kept while the output buffer is full.  This design's
// choices: the free-space rule, the hold and idle-mode terms, the counters.
module busy_manager #(
  parameter int unsigned FREE_W        = 13,
  parameter int unsigned MAX_PKT_WORDS = 1942
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              daq_mode_i,
  input  logic              evt_start_i,
  input  logic              evt_done_i,
  input  logic              hold_i,
  input  logic [FREE_W-1:0] out_free_i,
  output logic              busy_o,
  output logic              evt_active_o,
  output logic              full_o,
  output logic [31:0]       last_len_o,
  output logic [31:0]       evt_cnt_o
);
  logic        active_q;
  logic [31:0] len_q;

  assign full_o       = (32'(out_free_i) < 32'(MAX_PKT_WORDS));
  assign evt_active_o = active_q;

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      active_q   <= 1'b0;
      len_q      <= '0;
      last_len_o <= '0;
      evt_cnt_o  <= '0;
      busy_o     <= 1'b1;
    end else begin
      if (evt_start_i) begin
        active_q  <= 1'b1;
        len_q     <= 32'd1;
        evt_cnt_o <= evt_cnt_o + 32'd1;
      end else if (active_q && evt_done_i) begin
        active_q   <= 1'b0;
        last_len_o <= len_q + 32'd1;
      end else if (active_q) begin
        len_q <= len_q + 32'd1;
      end
      busy_o <= !daq_mode_i || hold_i || full_o || evt_start_i ||
                (active_q && !evt_done_i);
    end
  end
endmodule
