// tdaq_top: the tracker read-out (TDAQ) FPGA firmware, fixed-logic part.
//
// Fifteen stave controllers (three per turret, five turrets) each drive one
// stave's gated clock and half-duplex control bus, read its two master chips
// after a trigger and fill a private ECC FIFO.  The trigger manager accepts the
// general trigger with the five TR1-bar lines, chooses the turrets through its
// look-up table and starts the matching controllers.  The packager pulls the
// finished staves through the multiplexer into one event packet with event
// number, time stamp and CRC, which goes to the output FIFO in DAQ mode, or
// to the decoder and the microcontroller buffer in idle mode.  The busy manager
// holds the trigger board off while an event is being read and packed or the
// output FIFO is full.  The register file, behind the SpaceWire codec's byte
// interface, lets the data processing unit run commands, read event packets
// and status, switch stave power and bias, and program the trigger table.
//
// Interface: one clock clk_i (40 MHz assumed: one control-bus bit per clock);
// rst_ni is the board reset service line (active low), synchronised inside.
// The SpaceWire codec, the microcontroller, the line transceivers and the
// stave power switches are outside this module; their signals are ports.
// Each stave's bidirectional data line is split into clb_o / clb_oe_o /
// clb_i for the I/O buffer.  Stave clocks leave as clock enables
// (stave_clk_en_o) for the FPGA's clock-gating buffers.
// seu_test_sel_i / seu_test_mask_i inject bit flips into one FSM state code
// word at a time, for ground tests of the upset protection; tie them to zero
// in flight.  Every corrected upset (state registers, FIFOs, buffer) sets the
// upset-seen flag in the status register.
// The block structure follows the paper's firmware diagram; the widths,
// depths, formats and defaults are this design's choices (see the modules).
module tdaq_top #(
  parameter int unsigned STROBE_DELAY    = 200,
  parameter int unsigned READOUT_TIMEOUT = 8000,
  parameter int unsigned OUT_FIFO_DEPTH  = 4096,
  parameter int unsigned MCU_BUF_DEPTH   = 1024,
  parameter int unsigned TS_PRESCALE     = 40
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // trigger board
  input  logic        gen_trig_i,
  input  logic [4:0]  bars_i,
  output logic        busy_o,
  // data processing unit service lines
  input  logic        hold_i,
  input  logic        time_sync_i,
  output logic        data_ready_o,
  // SpaceWire codec byte interface
  input  logic        spw_rx_valid_i,
  input  logic [7:0]  spw_rx_data_i,
  output logic        spw_tx_valid_o,
  output logic [7:0]  spw_tx_data_o,
  input  logic        spw_tx_ready_i,
  // staves
  output logic [14:0] stave_clk_en_o,
  output logic [14:0] clb_o,
  output logic [14:0] clb_oe_o,
  input  logic [14:0] clb_i,
  output logic [14:0] dig_pwr_en_o,
  output logic [14:0] ana_pwr_en_o,
  output logic [14:0] bias_en_o,
  input  logic [14:0] pwr_good_i,
  // microcontroller
  output logic        mcu_cmd_valid_o,
  output logic [7:0]  mcu_cmd_o,
  input  logic        mcu_done_i,
  input  logic [15:0] mcu_result_i,
  input  logic        mcu_soft_trig_i,
  input  logic [4:0]  mcu_soft_bars_i,
  input  logic        mcu_buf_clear_i,
  input  logic        mcu_buf_rd_en_i,
  input  logic [$clog2(MCU_BUF_DEPTH)-1:0]   mcu_buf_addr_i,
  output logic [31:0] mcu_buf_data_o,
  output logic [$clog2(MCU_BUF_DEPTH+1)-1:0] mcu_buf_count_o,
  output logic        mcu_buf_overflow_o,
  output logic        mcu_pkt_done_o,
  output logic        mcu_crc_ok_o,
  // upset injection for ground tests: flips the bits of seu_test_mask_i in one
  // FSM state code word for every cycle the select is non-zero
  // (1..15 stave controller 0..14, 16 packager, 17 register file link)
  input  logic [4:0]  seu_test_sel_i,
  input  logic [6:0]  seu_test_mask_i
);
  import tdaq_pkg::*;

  localparam int unsigned SFW  = $clog2(STAVE_FIFO_DEPTH + 1);   // 8
  localparam int unsigned OFW  = $clog2(OUT_FIFO_DEPTH + 1);

  // ---------------- reset synchroniser ----------------
  logic [1:0] rst_sync_q;
  always_ff @(posedge clk_i) rst_sync_q <= {rst_sync_q[0], rst_ni};
  wire rst_n = rst_sync_q[1];

  // ---------------- shared signals ----------------
  logic        daq_mode, evt_active, evt_done, out_full;
  logic [14:0] start, st_done, st_trunc, st_full, st_corr, st_ferr, sf_corr;
  logic        of_corr, buf_corr;
  logic        evt_start;
  logic [15:0] evt_num, lost;
  logic [31:0] evt_time, time_now, last_busy, evt_count;
  logic [4:0]  evt_bars, evt_turrets;
  logic        lut_we, lut_fill;
  logic [4:0]  lut_addr, lut_wdata, lut_rdata;
  logic [1:0]  lut_mode;
  logic [14:0] cfg_req, cfg_done, cfg_err;
  logic        cfg_we;
  logic [7:0]  cfg_chip;
  logic [15:0] cfg_addr, cfg_wdata;
  logic [15:0] cfg_rdata [15];

  // stave FIFO signals
  logic [14:0] sf_push, sf_pop, sf_empty;
  logic [15:0] sf_wdata [15];
  logic [15:0] sf_rdata [15];
  logic [SFW-1:0] sf_count [15];

  // ---------------- trigger manager ----------------
  trigger_manager #(.TS_PRESCALE(TS_PRESCALE)) u_trig (
    .clk_i, .rst_ni(rst_n), .daq_mode_i(daq_mode), .inhibit_i(busy_o),
    .evt_active_i(evt_active),
    .gen_trig_i, .bars_i, .time_sync_i,
    .soft_trig_i(mcu_soft_trig_i), .soft_bars_i(mcu_soft_bars_i),
    .lut_we_i(lut_we), .lut_addr_i(lut_addr), .lut_wdata_i(lut_wdata),
    .lut_rdata_o(lut_rdata), .lut_fill_i(lut_fill), .lut_mode_i(lut_mode),
    .start_o(start), .evt_start_o(evt_start), .evt_num_o(evt_num),
    .evt_time_o(evt_time), .evt_bars_o(evt_bars), .evt_turrets_o(evt_turrets),
    .lost_o(lost), .time_o(time_now));

  // ---------------- stave controls and FIFOs ----------------
  for (genvar s = 0; s < 15; s++) begin : g_stave
    stave_control #(.STROBE_DELAY(STROBE_DELAY), .READOUT_TIMEOUT(READOUT_TIMEOUT)) u_ctrl (
      .clk_i, .rst_ni(rst_n), .daq_mode_i(daq_mode),
      .start_i(start[s]), .busy_o(), .done_o(st_done[s]), .truncated_o(st_trunc[s]),
      .clk_en_o(stave_clk_en_o[s]),
      .clb_o(clb_o[s]), .clb_oe_o(clb_oe_o[s]), .clb_i(clb_i[s]),
      .push_o(sf_push[s]), .wdata_o(sf_wdata[s]), .fifo_full_i(st_full[s]),
      .cfg_req_i(cfg_req[s]), .cfg_we_i(cfg_we), .cfg_chip_i(cfg_chip),
      .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
      .cfg_done_o(cfg_done[s]), .cfg_err_o(cfg_err[s]), .cfg_rdata_o(cfg_rdata[s]),
      .upset_i(seu_test_sel_i == 5'(s + 1) ? seu_test_mask_i : 7'd0), .seu_corr_o(st_corr[s]), .fsm_err_o(st_ferr[s]));

    ecc_fifo #(.WIDTH(16), .DEPTH(STAVE_FIFO_DEPTH)) u_fifo (
      .clk_i, .rst_ni(rst_n),
      .push_i(sf_push[s]), .wdata_i(sf_wdata[s]),
      .pop_i(sf_pop[s]), .rdata_o(sf_rdata[s]),
      .empty_o(sf_empty[s]), .full_o(st_full[s]), .count_o(sf_count[s]),
      .corr_o(sf_corr[s]),
      .upset_en_i(1'b0), .upset_addr_i('0), .upset_mask_i('0));
  end

  // ---------------- multiplexer and packager ----------------
  logic [3:0]  mux_sel;
  logic [15:0] mux_rdata;
  logic        mux_empty, mux_pop;
  logic [SFW-1:0] mux_count;

  stave_mux #(.N_IN(15), .WIDTH(16), .CW(SFW)) u_mux (
    .sel_i(mux_sel), .rdata_i(sf_rdata), .empty_i(sf_empty), .count_i(sf_count),
    .pop_o(sf_pop), .pop_i(mux_pop),
    .rdata_o(mux_rdata), .empty_o(mux_empty), .count_o(mux_count));

  logic [15:0] pk_data;
  logic        pk_last, pk_fifo_push, pk_dec_valid, pk_corr, pk_ferr;
  logic        of_full;

  packager u_pack (
    .clk_i, .rst_ni(rst_n), .daq_mode_i(daq_mode), .hold_i,
    .evt_start_i(evt_start), .evt_num_i(evt_num), .evt_time_i(evt_time),
    .evt_bars_i(evt_bars), .evt_turrets_i(evt_turrets),
    .stave_done_i(st_done), .stave_trunc_i(st_trunc),
    .sel_o(mux_sel), .rdata_i(mux_rdata), .empty_i(mux_empty), .count_i(mux_count),
    .pop_o(mux_pop),
    .out_ready_i(!of_full), .data_o(pk_data), .last_o(pk_last),
    .fifo_push_o(pk_fifo_push), .dec_valid_o(pk_dec_valid), .evt_done_o(evt_done),
    .upset_i(seu_test_sel_i == 5'd16 ? seu_test_mask_i : 7'd0), .seu_corr_o(pk_corr), .fsm_err_o(pk_ferr));

  // ---------------- output FIFO ----------------
  logic [16:0]    of_rdata;
  logic           of_empty, of_pop;
  logic [OFW-1:0] of_count;

  ecc_fifo #(.WIDTH(17), .DEPTH(OUT_FIFO_DEPTH)) u_out_fifo (
    .clk_i, .rst_ni(rst_n),
    .push_i(pk_fifo_push), .wdata_i({pk_last, pk_data}),
    .pop_i(of_pop), .rdata_o(of_rdata),
    .empty_o(of_empty), .full_o(of_full), .count_o(of_count),
    .corr_o(of_corr),
    .upset_en_i(1'b0), .upset_addr_i('0), .upset_mask_i('0));

  // ---------------- busy manager ----------------
  busy_manager #(.FREE_W(OFW), .MAX_PKT_WORDS(MAX_PKT_WORDS)) u_busy (
    .clk_i, .rst_ni(rst_n), .daq_mode_i(daq_mode),
    .evt_start_i(evt_start), .evt_done_i(evt_done), .hold_i,
    .out_free_i(OFW'(OUT_FIFO_DEPTH) - of_count),
    .busy_o, .evt_active_o(evt_active), .full_o(out_full),
    .last_len_o(last_busy), .evt_cnt_o(evt_count));

  // ---------------- register file ----------------
  logic rf_corr;
  register_file u_regs (
    .clk_i, .rst_ni(rst_n),
    .rx_valid_i(spw_rx_valid_i), .rx_data_i(spw_rx_data_i),
    .tx_valid_o(spw_tx_valid_o), .tx_data_o(spw_tx_data_o), .tx_ready_i(spw_tx_ready_i),
    .daq_mode_o(daq_mode),
    .fifo_rdata_i(of_rdata), .fifo_empty_i(of_empty), .fifo_pop_o(of_pop),
    .pkt_written_i(pk_fifo_push && pk_last), .data_ready_o,
    .busy_i(busy_o), .out_full_i(out_full), .evt_active_i(evt_active),
    .fsm_err_i(|st_ferr || pk_ferr), .seu_i(|st_corr || |sf_corr || pk_corr || rf_corr || of_corr || buf_corr),
    .evt_count_i(evt_count), .lost_i(lost), .last_busy_i(last_busy), .time_i(time_now),
    .pwr_good_i,
    .dig_pwr_en_o, .ana_pwr_en_o, .bias_en_o,
    .lut_we_o(lut_we), .lut_addr_o(lut_addr), .lut_wdata_o(lut_wdata),
    .lut_rdata_i(lut_rdata), .lut_fill_o(lut_fill), .lut_mode_o(lut_mode),
    .cfg_req_o(cfg_req), .cfg_we_o(cfg_we), .cfg_chip_o(cfg_chip),
    .cfg_addr_o(cfg_addr), .cfg_wdata_o(cfg_wdata),
    .cfg_done_i(cfg_done), .cfg_err_i(cfg_err), .cfg_rdata_i(cfg_rdata),
    .mcu_cmd_valid_o, .mcu_cmd_o, .mcu_done_i, .mcu_result_i,
    .upset_i(seu_test_sel_i == 5'd17 ? seu_test_mask_i : 7'd0), .seu_corr_o(rf_corr));

  // ---------------- calibration path: decoder and MCU buffer ----------------
  logic        hit_valid;
  logic [31:0] hit;

  hit_decoder u_dec (
    .clk_i, .rst_ni(rst_n),
    .valid_i(pk_dec_valid), .data_i(pk_data), .last_i(pk_last),
    .hit_valid_o(hit_valid), .hit_o(hit),
    .pkt_done_o(mcu_pkt_done_o), .crc_ok_o(mcu_crc_ok_o));

  mcu_buffer #(.DEPTH(MCU_BUF_DEPTH), .WIDTH(32)) u_buf (
    .clk_i, .rst_ni(rst_n),
    .wr_i(hit_valid), .wdata_i(hit), .clear_i(mcu_buf_clear_i),
    .rd_en_i(mcu_buf_rd_en_i), .rd_addr_i(mcu_buf_addr_i), .rd_data_o(mcu_buf_data_o),
    .rd_corr_o(buf_corr), .count_o(mcu_buf_count_o), .overflow_o(mcu_buf_overflow_o),
    .upset_en_i(1'b0), .upset_addr_i('0), .upset_mask_i('0));
endmodule
