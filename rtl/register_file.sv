// register_file: the data processing unit's (DPCU) window onto the tracker
// read-out board, reached over the SpaceWire link.
//
// Link framing (this design's choice), on the codec's byte interface:
//   read  request : 0x01, addr[15:8], addr[7:0]              -> 0x81, d[15:8], d[7:0]
//   write request : 0x02, addr[15:8], addr[7:0], d[15:8], d[7:0] -> 0x82 (done)
//   refused access: answer 0xE1 (read) or 0xE2 (write); unknown opcode: 0xEE
// Register map (16-bit registers):
//   0x0000 CMD        W: command code to execute, R: last code
//   0x0001 CMD_STATUS R: {pending, error, 13'b0, done}
//   0x0002 CMD_OUT    R: command output (register read data, MCU result)
//   0x0010 STATUS     R: {daq_mode, busy, data_ready, out_full, evt_active,
//                         fsm_error, seu_seen, mcu_cmd_pending, 8'b0}
//   0x0011 EVT_COUNT  R: accepted triggers     0x0012 LOST     R: lost triggers
//   0x0013 LAST_BUSY  R: last busy length (cycles, saturated to 16 bits)
//   0x0014 PKT_PEND   R: complete packets waiting in the output FIFO
//   0x0015 PWR_GOOD   R: power-good lines of the 15 staves
//   0x0016/0x0017 TIME_HI/TIME_LO R: time stamp counter
//   0x0020 EVT_DATA   R: next word of the first available event packet (pops it)
//   0x0021 EVT_FLAGS  R: {out FIFO empty, 14'b0, last flag of the word just read}
//   0x0030 DIG_PWR    0x0031 ANA_PWR    0x0032 BIAS   RW: stave switches, bit per stave
//   0x0040..0x005F LUT RW: trigger look-up table entries
//   0x0060 CFG_STAVE  0x0061 CFG_CHIP  0x0062 CFG_ADDR  0x0063 CFG_DATA  0x0064 LUT_MODE  RW
// Commands: 0x01 start DAQ mode, 0x02 stop DAQ mode (back to idle), 0x03
// sensor register write and 0x04 sensor register read on stave CFG_STAVE over
// its control bus, 0x05 fill the trigger LUT from LUT_MODE, 0x06 clear the
// upset-seen flag, 0x10..0x1F calibration and self-test tasks handed to the
// microcontroller (mcu_cmd_valid_o) whose result word comes back on mcu_done_i.
// In DAQ mode only the read-only diagnostic registers, the event-packet
// window and the command "stop DAQ" are served; every other access is refused.
// The link FSM state is held in a Hamming(7,4) register.
// From the paper: the shared register file with command register, command
// output section, first available event packet and status/health sections,
// the DAQ/idle access rules, stave power and bias control.  Addresses, codes,
// and the link framing are this design's choices.
module register_file (
  input  logic        clk_i,
  input  logic        rst_ni,
  // SpaceWire codec byte interface
  input  logic        rx_valid_i,
  input  logic [7:0]  rx_data_i,
  output logic        tx_valid_o,
  output logic [7:0]  tx_data_o,
  input  logic        tx_ready_i,
  // mode
  output logic        daq_mode_o,
  // output FIFO (event packets): {last, word}
  input  logic [16:0] fifo_rdata_i,
  input  logic        fifo_empty_i,
  output logic        fifo_pop_o,
  input  logic        pkt_written_i,     // packager wrote a packet's last word
  output logic        data_ready_o,
  // status inputs
  input  logic        busy_i,
  input  logic        out_full_i,
  input  logic        evt_active_i,
  input  logic        fsm_err_i,
  input  logic        seu_i,
  input  logic [31:0] evt_count_i,
  input  logic [15:0] lost_i,
  input  logic [31:0] last_busy_i,
  input  logic [31:0] time_i,
  input  logic [14:0] pwr_good_i,
  // stave power switches
  output logic [14:0] dig_pwr_en_o,
  output logic [14:0] ana_pwr_en_o,
  output logic [14:0] bias_en_o,
  // trigger LUT
  output logic        lut_we_o,
  output logic [4:0]  lut_addr_o,
  output logic [4:0]  lut_wdata_o,
  input  logic [4:0]  lut_rdata_i,
  output logic        lut_fill_o,
  output logic [1:0]  lut_mode_o,
  // sensor register access through the stave controls
  output logic [14:0] cfg_req_o,
  output logic        cfg_we_o,
  output logic [7:0]  cfg_chip_o,
  output logic [15:0] cfg_addr_o,
  output logic [15:0] cfg_wdata_o,
  input  logic [14:0] cfg_done_i,
  input  logic [14:0] cfg_err_i,
  input  logic [15:0] cfg_rdata_i [15],
  // microcontroller tasks
  output logic        mcu_cmd_valid_o,
  output logic [7:0]  mcu_cmd_o,
  input  logic        mcu_done_i,
  input  logic [15:0] mcu_result_i,
  // SEU handling
  input  logic [6:0]  upset_i,
  output logic        seu_corr_o
);
  typedef enum logic [3:0] {
    L_OP = 4'd0, L_A1 = 4'd1, L_A2 = 4'd2, L_D1 = 4'd3, L_D2 = 4'd4,
    L_EXEC = 4'd5, L_TX0 = 4'd6, L_TX1 = 4'd7, L_TX2 = 4'd8
  } lstate_e;

  localparam logic [15:0] A_CMD = 16'h0000, A_CMD_ST = 16'h0001, A_CMD_OUT = 16'h0002,
    A_STATUS = 16'h0010, A_EVTCNT = 16'h0011, A_LOST = 16'h0012, A_LBUSY = 16'h0013,
    A_PKTP = 16'h0014, A_PGOOD = 16'h0015, A_TIMEH = 16'h0016, A_TIMEL = 16'h0017,
    A_EVT = 16'h0020, A_EVTF = 16'h0021, A_DIG = 16'h0030, A_ANA = 16'h0031,
    A_BIAS = 16'h0032, A_CSTAVE = 16'h0060, A_CCHIP = 16'h0061, A_CADDR = 16'h0062,
    A_CDATA = 16'h0063, A_LMODE = 16'h0064;

  localparam logic [7:0] C_START = 8'h01, C_STOP = 8'h02, C_CLBW = 8'h03, C_CLBR = 8'h04,
    C_LUTF = 8'h05, C_CLR = 8'h06;

  lstate_e state, state_d;
  logic [3:0] state_raw;
  ham_state_reg #(.RESET_VAL(4'(L_OP))) u_state (
    .clk_i, .rst_ni, .d_i(4'(state_d)), .upset_i,
    .q_o(state_raw), .corrected_o(seu_corr_o)
  );
  assign state = lstate_e'(state_raw);

  logic        wr_q;
  logic [15:0] addr_q, wdata_q, rdata_q;
  logic [7:0]  resp_q;
  logic [7:0]  cmd_q;
  logic        cmd_pend_q, cmd_err_q, cmd_done_q, mcu_pend_q;
  logic [15:0] cmd_out_q;
  logic [3:0]  cfg_stave_q;
  logic [1:0]  lut_mode_q;
  logic        daq_q, last_q, seu_seen_q;
  logic [15:0] pkt_pend_q;

  // ---- access rules ----
  function automatic logic daq_read_ok(input logic [15:0] a);
    return (a == A_CMD_ST) || (a == A_CMD_OUT) || (a >= A_STATUS && a <= A_TIMEL) ||
           (a == A_EVT) || (a == A_EVTF);
  endfunction

  wire is_lut = (addr_q[15:5] == 11'h002);   // 0x0040..0x005F
  wire allowed = !daq_q ? 1'b1 :
                 wr_q ? (addr_q == A_CMD && wdata_q[7:0] == C_STOP) : daq_read_ok(addr_q);

  // ---- read multiplexer ----
  logic [15:0] rmux;
  always_comb begin
    rmux = 16'h0000;
    if (is_lut) rmux = {11'b0, lut_rdata_i};
    else unique case (addr_q)
      A_CMD:    rmux = {8'b0, cmd_q};
      A_CMD_ST: rmux = {cmd_pend_q, cmd_err_q, 13'b0, cmd_done_q};
      A_CMD_OUT: rmux = cmd_out_q;
      A_STATUS: rmux = {daq_q, busy_i, data_ready_o, out_full_i, evt_active_i,
                        fsm_err_i, seu_seen_q, mcu_pend_q, 8'b0};
      A_EVTCNT: rmux = evt_count_i[15:0];
      A_LOST:   rmux = lost_i;
      A_LBUSY:  rmux = (last_busy_i > 32'hFFFF) ? 16'hFFFF : last_busy_i[15:0];
      A_PKTP:   rmux = pkt_pend_q;
      A_PGOOD:  rmux = {1'b0, pwr_good_i};
      A_TIMEH:  rmux = time_i[31:16];
      A_TIMEL:  rmux = time_i[15:0];
      A_EVT:    rmux = fifo_rdata_i[15:0];
      A_EVTF:   rmux = {fifo_empty_i, 14'b0, last_q};
      A_DIG:    rmux = {1'b0, dig_pwr_en_o};
      A_ANA:    rmux = {1'b0, ana_pwr_en_o};
      A_BIAS:   rmux = {1'b0, bias_en_o};
      A_CSTAVE: rmux = {12'b0, cfg_stave_q};
      A_CCHIP:  rmux = {8'b0, cfg_chip_o};
      A_CADDR:  rmux = cfg_addr_o;
      A_CDATA:  rmux = cfg_wdata_o;
      A_LMODE:  rmux = {14'b0, lut_mode_q};
      default:  rmux = 16'hDEAD;
    endcase
  end

  // ---- link FSM ----
  always_comb begin
    state_d = state;
    unique case (state)
      L_OP:   if (rx_valid_i) state_d = (rx_data_i == 8'h01 || rx_data_i == 8'h02) ? L_A1 : L_TX0;
      L_A1:   if (rx_valid_i) state_d = L_A2;
      L_A2:   if (rx_valid_i) state_d = wr_q ? L_D1 : L_EXEC;
      L_D1:   if (rx_valid_i) state_d = L_D2;
      L_D2:   if (rx_valid_i) state_d = L_EXEC;
      L_EXEC: state_d = L_TX0;
      L_TX0:  if (tx_ready_i) state_d = (resp_q == 8'h81) ? L_TX1 : L_OP;
      L_TX1:  if (tx_ready_i) state_d = L_TX2;
      L_TX2:  if (tx_ready_i) state_d = L_OP;
      default: state_d = L_OP;
    endcase
  end

  assign tx_valid_o = (state == L_TX0) || (state == L_TX1) || (state == L_TX2);
  assign tx_data_o  = (state == L_TX1) ? rdata_q[15:8] : (state == L_TX2) ? rdata_q[7:0] : resp_q;

  wire exec_ok   = (state == L_EXEC) && allowed;
  wire exec_cmd  = exec_ok && wr_q && addr_q == A_CMD;
  assign fifo_pop_o  = exec_ok && !wr_q && addr_q == A_EVT && !fifo_empty_i;
  assign lut_we_o    = exec_ok && wr_q && is_lut;
  assign lut_addr_o  = addr_q[4:0];
  assign lut_wdata_o = wdata_q[4:0];
  assign lut_mode_o  = lut_mode_q;
  assign daq_mode_o  = daq_q;
  assign data_ready_o = (pkt_pend_q != 16'd0);

  wire [15:0] cfg_rd_sel = cfg_rdata_i[cfg_stave_q];

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      wr_q <= 1'b0; addr_q <= '0; wdata_q <= '0; rdata_q <= '0; resp_q <= '0;
      cmd_q <= '0; cmd_pend_q <= 1'b0; cmd_err_q <= 1'b0; cmd_done_q <= 1'b0;
      mcu_pend_q <= 1'b0; cmd_out_q <= '0; cfg_stave_q <= '0; lut_mode_q <= '0;
      daq_q <= 1'b0; last_q <= 1'b0; seu_seen_q <= 1'b0; pkt_pend_q <= '0;
      dig_pwr_en_o <= '0; ana_pwr_en_o <= '0; bias_en_o <= '0;
      cfg_chip_o <= '0; cfg_addr_o <= '0; cfg_wdata_o <= '0; cfg_we_o <= 1'b0;
      cfg_req_o <= '0; lut_fill_o <= 1'b0; mcu_cmd_valid_o <= 1'b0; mcu_cmd_o <= '0;
    end else begin
      cfg_req_o       <= '0;
      lut_fill_o      <= 1'b0;
      mcu_cmd_valid_o <= 1'b0;
      if (seu_i) seu_seen_q <= 1'b1;

      // complete packets in the output FIFO
      pkt_pend_q <= pkt_pend_q + (pkt_written_i ? 16'd1 : 16'd0)
                               - ((fifo_pop_o && fifo_rdata_i[16]) ? 16'd1 : 16'd0);

      unique case (state)
        L_OP: if (rx_valid_i) begin
          wr_q   <= (rx_data_i == 8'h02);
          resp_q <= 8'hEE;
        end
        L_A1: if (rx_valid_i) addr_q[15:8] <= rx_data_i;
        L_A2: if (rx_valid_i) addr_q[7:0]  <= rx_data_i;
        L_D1: if (rx_valid_i) wdata_q[15:8] <= rx_data_i;
        L_D2: if (rx_valid_i) wdata_q[7:0]  <= rx_data_i;
        L_EXEC: begin
          if (!allowed) begin
            resp_q <= wr_q ? 8'hE2 : 8'hE1;
          end else if (!wr_q) begin
            resp_q  <= 8'h81;
            rdata_q <= rmux;
            if (addr_q == A_EVT) last_q <= fifo_rdata_i[16] && !fifo_empty_i;
          end else begin
            resp_q <= 8'h82;
            unique case (addr_q)
              A_DIG:    dig_pwr_en_o <= wdata_q[14:0];
              A_ANA:    ana_pwr_en_o <= wdata_q[14:0];
              A_BIAS:   bias_en_o    <= wdata_q[14:0];
              A_CSTAVE: cfg_stave_q  <= (wdata_q[3:0] > 4'd14) ? 4'd14 : wdata_q[3:0];
              A_CCHIP:  cfg_chip_o   <= wdata_q[7:0];
              A_CADDR:  cfg_addr_o   <= wdata_q;
              A_CDATA:  cfg_wdata_o  <= wdata_q;
              A_LMODE:  lut_mode_q   <= wdata_q[1:0];
              default: ;
            endcase
          end
        end
        default: ;
      endcase

      // command execution
      if (exec_cmd && !cmd_pend_q) begin
        cmd_q      <= wdata_q[7:0];
        cmd_done_q <= 1'b0;
        cmd_err_q  <= 1'b0;
        unique case (wdata_q[7:0])
          C_START: begin daq_q <= 1'b1; cmd_done_q <= 1'b1; end
          C_STOP:  begin daq_q <= 1'b0; cmd_done_q <= 1'b1; end
          C_CLBW, C_CLBR: begin
            cfg_we_o   <= (wdata_q[7:0] == C_CLBW);
            cfg_req_o  <= 15'(1) << cfg_stave_q;
            cmd_pend_q <= 1'b1;
          end
          C_LUTF: begin lut_fill_o <= 1'b1; cmd_done_q <= 1'b1; end
          C_CLR:  begin seu_seen_q <= 1'b0; cmd_done_q <= 1'b1; end
          default: begin
            if (wdata_q[7:4] == 4'h1) begin
              mcu_cmd_valid_o <= 1'b1;
              mcu_cmd_o       <= wdata_q[7:0];
              mcu_pend_q      <= 1'b1;
              cmd_pend_q      <= 1'b1;
            end else begin
              cmd_err_q  <= 1'b1;
              cmd_done_q <= 1'b1;
            end
          end
        endcase
      end else if (exec_cmd && cmd_pend_q) begin
        cmd_err_q <= 1'b1;                  // a command is still running
      end

      if (cmd_pend_q && !mcu_pend_q && cfg_done_i[cfg_stave_q]) begin
        cmd_pend_q <= 1'b0;
        cmd_done_q <= 1'b1;
        cmd_err_q  <= cfg_err_i[cfg_stave_q];
        cmd_out_q  <= cfg_rd_sel;
      end
      if (mcu_pend_q && mcu_done_i) begin
        mcu_pend_q <= 1'b0;
        cmd_pend_q <= 1'b0;
        cmd_done_q <= 1'b1;
        cmd_out_q  <= mcu_result_i;
      end
    end
  end
endmodule
