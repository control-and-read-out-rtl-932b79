// packager: the event builder.  It collects one event from the stave FIFOs
// and writes it as one DIR event packet.
//
// On evt_start_i it latches the event number, time stamp, bar pattern and the
// turret mask (three staves per turret are enabled).  While the data-hold
// line (hold_i) is low it writes the five header words, then visits the staves
// in order 0..14: a stave that is not enabled is skipped; for an enabled one it
// waits for that stave's done pulse (remembered in a pending register, so the
// staves may finish in any order), selects the stave's FIFO through the
// multiplexer, writes a stave header {4'hF, stave, word count} and pops and
// copies that many words.  A word with the truncation flags of all staves and
// the CRC-16 of every previous word close the packet; the CRC word carries
// last_o.  evt_done_o pulses when the packet is complete.
// Words go to the output FIFO in DAQ mode (fifo_push_o) and to the decoder in
// idle mode (dec_valid_o), which is the demultiplexer drawn after the
// Packager.  Writing stalls while out_ready_i is low.
// The FSM state is kept in a Hamming(7,4) register; an undefined state code
// returns to IDLE and sets the sticky fsm_err_o.
// From the paper: asynchronous pulling of data from the 15 controls through a
// multiplexer, a compact packet with event number, trigger time stamp and a
// CRC word, the routing to the output FIFO or the decoder.  The packet layout
// (see tdaq_pkg), the CRC polynomial and the visiting order are this design's.
module packager (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        daq_mode_i,
  input  logic        hold_i,
  // event information from the trigger manager
  input  logic        evt_start_i,
  input  logic [15:0] evt_num_i,
  input  logic [31:0] evt_time_i,
  input  logic [4:0]  evt_bars_i,
  input  logic [4:0]  evt_turrets_i,
  // stave controls
  input  logic [14:0] stave_done_i,
  input  logic [14:0] stave_trunc_i,
  // multiplexer
  output logic [3:0]  sel_o,
  input  logic [15:0] rdata_i,
  input  logic        empty_i,
  input  logic [7:0]  count_i,
  output logic        pop_o,
  // packet output
  input  logic        out_ready_i,
  output logic [15:0] data_o,
  output logic        last_o,
  output logic        fifo_push_o,
  output logic        dec_valid_o,
  output logic        evt_done_o,
  // SEU handling
  input  logic [6:0]  upset_i,
  output logic        seu_corr_o,
  output logic        fsm_err_o
);
  import tdaq_pkg::*;

  typedef enum logic [3:0] {
    P_IDLE  = 4'd0,
    P_HDR   = 4'd1,
    P_SEL   = 4'd2,
    P_SHDR  = 4'd3,
    P_SDATA = 4'd4,
    P_TRUNC = 4'd5,
    P_CRC   = 4'd6,
    P_DONE  = 4'd7
  } pstate_e;

  pstate_e state, state_d;
  logic [3:0] state_raw;

  ham_state_reg #(.RESET_VAL(4'(P_IDLE))) u_state (
    .clk_i, .rst_ni, .d_i(4'(state_d)), .upset_i,
    .q_o(state_raw), .corrected_o(seu_corr_o)
  );
  assign state = pstate_e'(state_raw);
  wire state_legal = (state_raw <= 4'(P_DONE));

  logic [15:0] num_q;
  logic [31:0] time_q;
  logic [4:0]  bars_q, tur_q;
  logic [14:0] en_q, pend_q, trunc_q;
  logic [2:0]  hdr_idx_q;
  logic [3:0]  stave_q;
  logic [7:0]  left_q;
  logic [15:0] crc_q;
  logic        fsm_err_q;

  assign sel_o = stave_q;

  // word presented in this cycle
  logic        wr;
  logic [15:0] word;
  always_comb begin
    wr   = 1'b0;
    word = '0;
    unique case (state)
      P_HDR: begin
        wr = !hold_i;
        unique case (hdr_idx_q)
          3'd0:    word = PKT_SYNC;
          3'd1:    word = num_q;
          3'd2:    word = time_q[31:16];
          3'd3:    word = time_q[15:0];
          default: word = {6'b0, bars_q, tur_q};
        endcase
      end
      P_SHDR:  begin wr = 1'b1; word = {4'hF, stave_q, count_i}; end
      P_SDATA: begin wr = (left_q != 8'd0) && !empty_i; word = rdata_i; end
      P_TRUNC: begin wr = 1'b1; word = {1'b0, trunc_q}; end
      P_CRC:   begin wr = 1'b1; word = crc_q; end
      default: ;
    endcase
  end
  wire fire = wr && out_ready_i;

  assign data_o      = word;
  assign last_o      = (state == P_CRC);
  assign fifo_push_o = fire && daq_mode_i;
  assign dec_valid_o = fire && !daq_mode_i;
  assign pop_o       = (state == P_SDATA) && fire;
  assign evt_done_o  = (state == P_DONE);
  assign fsm_err_o   = fsm_err_q;

  wire stave_ready = pend_q[stave_q] || stave_done_i[stave_q];

  always_comb begin
    state_d = state;
    if (!state_legal) state_d = P_IDLE;
    else unique case (state)
      P_IDLE:  if (evt_start_i) state_d = P_HDR;
      P_HDR:   if (fire && hdr_idx_q == 3'd4) state_d = P_SEL;
      P_SEL:   if (!en_q[stave_q]) state_d = (stave_q == 4'd14) ? P_TRUNC : P_SEL;
               else if (stave_ready) state_d = P_SHDR;
      P_SHDR:  if (fire) state_d = (count_i == 8'd0) ?
                                   ((stave_q == 4'd14) ? P_TRUNC : P_SEL) : P_SDATA;
      P_SDATA: if (fire && left_q == 8'd1) state_d = (stave_q == 4'd14) ? P_TRUNC : P_SEL;
      P_TRUNC: if (fire) state_d = P_CRC;
      P_CRC:   if (fire) state_d = P_DONE;
      P_DONE:  state_d = P_IDLE;
      default: state_d = P_IDLE;
    endcase
  end

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      num_q     <= '0;
      time_q    <= '0;
      bars_q    <= '0;
      tur_q     <= '0;
      en_q      <= '0;
      pend_q    <= '0;
      trunc_q   <= '0;
      hdr_idx_q <= '0;
      stave_q   <= '0;
      left_q    <= '0;
      crc_q     <= 16'hFFFF;
      fsm_err_q <= 1'b0;
    end else begin
      if (!state_legal) fsm_err_q <= 1'b1;
      // remember done pulses and truncation flags of this event
      pend_q <= pend_q | stave_done_i;
      for (int s = 0; s < 15; s++)
        if (stave_done_i[s]) trunc_q[s] <= stave_trunc_i[s];
      if (fire) crc_q <= crc16_word(crc_q, word);

      unique case (state)
        P_IDLE: if (evt_start_i) begin
          num_q     <= evt_num_i;
          time_q    <= evt_time_i;
          bars_q    <= evt_bars_i;
          tur_q     <= evt_turrets_i;
          for (int t = 0; t < 5; t++) en_q[t*3 +: 3] <= {3{evt_turrets_i[t]}};
          pend_q    <= stave_done_i;
          trunc_q   <= '0;
          hdr_idx_q <= '0;
          stave_q   <= '0;
          crc_q     <= 16'hFFFF;
        end
        P_HDR: if (fire) hdr_idx_q <= hdr_idx_q + 3'd1;
        P_SEL: if (!en_q[stave_q] && stave_q != 4'd14) stave_q <= stave_q + 4'd1;
        P_SHDR: if (fire) begin
          left_q <= count_i;
          if (count_i == 8'd0 && stave_q != 4'd14) stave_q <= stave_q + 4'd1;
        end
        P_SDATA: if (fire) begin
          left_q <= left_q - 8'd1;
          if (left_q == 8'd1 && stave_q != 4'd14) stave_q <= stave_q + 4'd1;
        end
        default: ;
      endcase
    end
  end
endmodule
