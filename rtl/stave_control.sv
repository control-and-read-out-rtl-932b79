// stave_control: the per-stave read-out controller ("Control" module).  One
// instance serves one stave: two master sensor chips sharing one clock line
// and one half-duplex Control Logic Bus (CLB) data line.
//
// Event read-out (start_i pulse):
//   1. WAKE   - turn the stave clock on (clk_en_o) and let it run WAKE_CYCLES;
//   2. TRIG   - send the broadcast read-out command (OP_TRIGGER);
//   3. STROBE - wait STROBE_DELAY cycles, the tuned delay after which the
//               chips hold the event in their output buffers;
//   4. READ   - for master 0 then master 1, repeatedly read the chip's
//               output-buffer register over the CLB (OP_READ, 4 characters
//               out, bus released, 3 characters back: chip id, data low,
//               data high) and push every data word into the stave FIFO;
//               a master is finished after CHIPS_PER_MASTER chip-trailer or
//               chip-empty words (one per chip it serialises);
//   5. FINISH - turn the clock off again (in DAQ mode) and pulse done_o.
// Read-out stops early, with truncated_o set for that event, if the FIFO is
// full, if READOUT_TIMEOUT cycles have passed since start_i (the maximum busy
// time), if a chip does not complete its answer within RESP_TIMEOUT +
// TURN_CYCLES cycles, or if the answer carries the wrong chip identifier.
// In idle mode the stave clock stays on, and a single register write or read
// can be requested on the cfg_* port (cfg_req_i pulse, result on cfg_done_o).
// The FSM state is held in a Hamming(7,4) register; an undefined state code
// returns the FSM to IDLE and sets the sticky fsm_err_o flag.
//
// From the paper: parallel per-stave read-out, the read-out command followed
// by a tuned delay and data collection into a FIFO, read-out over the slow
// CLB instead of the fast serial links, clock gating, the 200 us maximum busy
// time, Hamming(7,4) state registers.  This design's choices: the command and
// data-word formats (see tdaq_pkg), the default delays and time-outs, the
// master chip identifiers, the end-of-event rule.
module stave_control #(
  parameter int unsigned WAKE_CYCLES     = 8,
  parameter int unsigned STROBE_DELAY    = 200,   // 5 us at 40 MHz
  parameter int unsigned READOUT_TIMEOUT = 8000,  // 200 us at 40 MHz
  parameter int unsigned RESP_TIMEOUT    = 64,
  parameter int unsigned TURN_CYCLES     = 2,     // bus released between command and answer
  parameter logic [7:0]  MASTER0_ID      = 8'h00,
  parameter logic [7:0]  MASTER1_ID      = 8'h08
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        daq_mode_i,
  // event read-out
  input  logic        start_i,
  output logic        busy_o,
  output logic        done_o,
  output logic        truncated_o,
  // stave clock gate
  output logic        clk_en_o,
  // CLB line
  output logic        clb_o,
  output logic        clb_oe_o,
  input  logic        clb_i,
  // stave FIFO write side
  output logic        push_o,
  output logic [15:0] wdata_o,
  input  logic        fifo_full_i,
  // single register access (idle mode)
  input  logic        cfg_req_i,
  input  logic        cfg_we_i,
  input  logic [7:0]  cfg_chip_i,
  input  logic [15:0] cfg_addr_i,
  input  logic [15:0] cfg_wdata_i,
  output logic        cfg_done_o,
  output logic        cfg_err_o,
  output logic [15:0] cfg_rdata_o,
  // SEU handling
  input  logic [6:0]  upset_i,
  output logic        seu_corr_o,
  output logic        fsm_err_o
);
  import tdaq_pkg::*;

  typedef enum logic [3:0] {
    S_IDLE    = 4'd0,
    S_WAKE    = 4'd1,
    S_TRIG    = 4'd2,
    S_STROBE  = 4'd3,
    S_RD_CMD  = 4'd4,
    S_RD_RESP = 4'd5,
    S_RD_EVAL = 4'd6,
    S_FINISH  = 4'd7,
    S_CFG_CMD = 4'd8,
    S_CFG_RSP = 4'd9,
    S_CFG_END = 4'd10
  } state_e;

  state_e state, state_d;
  logic [3:0] state_raw;

  ham_state_reg #(.RESET_VAL(4'(S_IDLE))) u_state (
    .clk_i, .rst_ni, .d_i(4'(state_d)), .upset_i,
    .q_o(state_raw), .corrected_o(seu_corr_o)
  );
  assign state = state_e'(state_raw);
  wire state_legal = (state_raw <= 4'(S_CFG_END));

  // ---------------- character I/O ----------------
  logic       tx_valid, tx_ready, hold_bus, rx_en, rx_valid, rx_ferr;
  logic [7:0] tx_byte, rx_byte;

  clb_char_io u_io (
    .clk_i, .rst_ni,
    .tx_valid_i(tx_valid), .tx_byte_i(tx_byte), .tx_ready_o(tx_ready),
    .hold_bus_i(hold_bus), .rx_en_i(rx_en),
    .rx_valid_o(rx_valid), .rx_byte_o(rx_byte), .rx_frame_err_o(rx_ferr),
    .clb_o, .clb_oe_o, .clb_i
  );

  // ---------------- datapath registers ----------------
  logic [7:0]  cmd_q [6];       // command characters
  logic [2:0]  cmd_len_q, cmd_idx_q;
  logic [1:0]  rsp_idx_q;       // answer characters received
  logic [23:0] rsp_q;           // {data hi, data lo, chip id}
  logic [15:0] wait_q;          // generic down counter
  logic [15:0] evt_timer_q;     // cycles since start_i
  logic        master_q;        // master being read
  logic [2:0]  ends_q;          // chip trailers seen for this master
  logic        trunc_q, fsm_err_q, cfg_we_q, cfg_err_q;
  logic [7:0]  cur_chip;
  logic        all_sent;

  assign cur_chip = master_q ? MASTER1_ID : MASTER0_ID;
  assign all_sent = (cmd_idx_q == cmd_len_q) && tx_ready;
  wire   evt_timeout = (evt_timer_q >= 16'(READOUT_TIMEOUT));
  wire [15:0] rsp_word = rsp_q[23:8];
  wire        bad_id   = (rsp_q[7:0] != cur_chip);  // answer from the wrong chip

  // ---------------- next state ----------------
  always_comb begin
    state_d = state;
    if (!state_legal) state_d = S_IDLE;
    else unique case (state)
      S_IDLE:    if (start_i) state_d = S_WAKE;
                 else if (cfg_req_i) state_d = S_CFG_CMD;
      S_WAKE:    if (wait_q == 16'd0) state_d = S_TRIG;
      S_TRIG:    if (all_sent) state_d = S_STROBE;
      S_STROBE:  if (wait_q == 16'd0) state_d = S_RD_CMD;
      S_RD_CMD:  if (all_sent) state_d = S_RD_RESP;
      S_RD_RESP: if (rx_valid && rsp_idx_q == 2'd2) state_d = S_RD_EVAL;
                 else if (wait_q == 16'd0 || rx_ferr || evt_timeout) state_d = S_FINISH;
      S_RD_EVAL: begin
                   if (evt_timeout || bad_id || (fifo_full_i && rsp_word != WORD_NO_DATA))
                     state_d = S_FINISH;
                   else if (is_chip_end(rsp_word) && ends_q == 3'(CHIPS_PER_MASTER - 1))
                     state_d = master_q ? S_FINISH : S_RD_CMD;
                   else
                     state_d = S_RD_CMD;
                 end
      S_FINISH:  state_d = S_IDLE;
      S_CFG_CMD: if (all_sent) state_d = cfg_we_q ? S_CFG_END : S_CFG_RSP;
      S_CFG_RSP: if ((rx_valid && rsp_idx_q == 2'd2) || wait_q == 16'd0 || rx_ferr)
                   state_d = S_CFG_END;
      S_CFG_END: state_d = S_IDLE;
      default:   state_d = S_IDLE;
    endcase
  end

  // ---------------- character control ----------------
  wire sending = (state == S_TRIG) || (state == S_RD_CMD) || (state == S_CFG_CMD);
  assign tx_valid = sending && (cmd_idx_q < cmd_len_q);
  assign tx_byte  = cmd_q[cmd_idx_q];
  assign hold_bus = sending || (state == S_WAKE) || (state == S_STROBE);
  assign rx_en    = (state == S_RD_RESP) || (state == S_CFG_RSP);

  // ---------------- registers ----------------
  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      for (int i = 0; i < 6; i++) cmd_q[i] <= '0;
      cmd_len_q   <= '0;
      cmd_idx_q   <= '0;
      rsp_idx_q   <= '0;
      rsp_q       <= '0;
      wait_q      <= '0;
      evt_timer_q <= '0;
      master_q    <= 1'b0;
      ends_q      <= '0;
      trunc_q     <= 1'b0;
      fsm_err_q   <= 1'b0;
      cfg_we_q    <= 1'b0;
      cfg_err_q   <= 1'b0;
      cfg_rdata_o <= '0;
    end else begin
      if (!state_legal) fsm_err_q <= 1'b1;
      if (tx_valid && tx_ready) cmd_idx_q <= cmd_idx_q + 3'd1;
      if (wait_q != 16'd0) wait_q <= wait_q - 16'd1;
      if (state != S_IDLE && evt_timer_q != 16'hFFFF) evt_timer_q <= evt_timer_q + 16'd1;
      if (rx_valid) begin
        rsp_q     <= {rx_byte, rsp_q[23:8]};
        rsp_idx_q <= rsp_idx_q + 2'd1;
      end

      unique case (state)
        S_IDLE: begin
          if (start_i) begin
            wait_q      <= 16'(WAKE_CYCLES);
            evt_timer_q <= '0;
            trunc_q     <= 1'b0;
            master_q    <= 1'b0;
            ends_q      <= '0;
            cmd_q[0]    <= OP_TRIGGER;
            cmd_len_q   <= 3'd1;
            cmd_idx_q   <= '0;
          end else if (cfg_req_i) begin
            cfg_we_q  <= cfg_we_i;
            cfg_err_q <= 1'b0;
            cmd_q[0]  <= cfg_we_i ? OP_WRITE : OP_READ;
            cmd_q[1]  <= cfg_chip_i;
            cmd_q[2]  <= cfg_addr_i[7:0];
            cmd_q[3]  <= cfg_addr_i[15:8];
            cmd_q[4]  <= cfg_wdata_i[7:0];
            cmd_q[5]  <= cfg_wdata_i[15:8];
            cmd_len_q <= cfg_we_i ? 3'd6 : 3'd4;
            cmd_idx_q <= '0;
            rsp_idx_q <= '0;
          end
        end
        S_TRIG: if (all_sent) wait_q <= 16'(STROBE_DELAY);
        S_STROBE: if (wait_q == 16'd0) begin
          cmd_q[0]  <= OP_READ;
          cmd_q[1]  <= cur_chip;
          cmd_q[2]  <= DATA_REG_ADDR[7:0];
          cmd_q[3]  <= DATA_REG_ADDR[15:8];
          cmd_len_q <= 3'd4;
          cmd_idx_q <= '0;
        end
        S_RD_CMD: if (all_sent) begin
          wait_q    <= 16'(RESP_TIMEOUT + TURN_CYCLES);
          rsp_idx_q <= '0;
        end
        S_RD_RESP: if (!(rx_valid && rsp_idx_q == 2'd2) &&
                       (wait_q == 16'd0 || rx_ferr || evt_timeout)) trunc_q <= 1'b1;
        S_RD_EVAL: begin
          cmd_idx_q <= '0;
          if (evt_timeout || bad_id || (fifo_full_i && rsp_word != WORD_NO_DATA)) begin
            trunc_q <= 1'b1;
          end else if (is_chip_end(rsp_word)) begin
            if (ends_q == 3'(CHIPS_PER_MASTER - 1)) begin
              ends_q   <= '0;
              master_q <= 1'b1;
              cmd_q[1] <= MASTER1_ID;
            end else begin
              ends_q <= ends_q + 3'd1;
            end
          end
        end
        S_CFG_CMD: if (all_sent) begin
          wait_q    <= 16'(RESP_TIMEOUT + TURN_CYCLES);
          rsp_idx_q <= '0;
        end
        S_CFG_RSP: begin
          if (rx_valid && rsp_idx_q == 2'd2) begin
            cfg_rdata_o <= {rx_byte, rsp_q[23:16]};
            cfg_err_q   <= (rsp_q[15:8] != cmd_q[1]);
          end else if (wait_q == 16'd0 || rx_ferr) begin
            cfg_err_q <= 1'b1;
          end
        end
        default: ;
      endcase
    end
  end

  // a word is stored when it is real data and the FIFO has room
  assign push_o  = (state == S_RD_EVAL) && !evt_timeout && !bad_id && !fifo_full_i &&
                   (rsp_word != WORD_NO_DATA);
  assign wdata_o = rsp_word;

  assign busy_o      = (state != S_IDLE) && (state != S_CFG_CMD) &&
                       (state != S_CFG_RSP) && (state != S_CFG_END);
  assign done_o      = (state == S_FINISH);
  assign truncated_o = trunc_q;
  assign cfg_done_o  = (state == S_CFG_END);
  assign cfg_err_o   = cfg_err_q;
  assign fsm_err_o   = fsm_err_q;
  // clock gating: always on in idle mode, only during read-out in DAQ mode
  assign clk_en_o    = !daq_mode_i || busy_o;
endmodule
