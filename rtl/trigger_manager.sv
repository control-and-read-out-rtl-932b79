// trigger_manager: the "LUT mask trigger manager".  It turns a trigger from the
// trigger board into read-out start pulses for the selected staves and into
// the event identification that the Packager writes into the packet.
//
// The general trigger, the five TR1-bar lines (one per turret) and the time
// synchronisation line arrive asynchronously and pass through two-flop
// synchronisers.  On a rising edge of the general trigger, in DAQ mode and
// while the busy line (inhibit_i) is low, the bar pattern indexes a 32-entry
// look-up table whose 5-bit entry says which turrets to read; each selected
// turret starts its three stave controllers (start_o), the event number is
// incremented, and the time stamp is latched.  A trigger edge that arrives
// while inhibited is counted in lost_o.  In idle mode a software trigger from
// the microcontroller (soft_trig_i, synchronous pulse) starts a read-out of
// the turrets given by the LUT entry of its bar pattern soft_bars_i, unless an
// event is still active (evt_active_i).
// The LUT resets to "read all turrets" for every pattern.  It can be written
// entry by entry, or filled in one cycle (lut_fill_i) from a read-out mode:
// all turrets; only the turrets of hit bars; or the hit bars and their
// neighbours (three turrets centred on a single hit bar).  A pattern with no
// bar set always maps to all turrets in the filled modes.
// The time stamp counts TS_PRESCALE clock cycles per tick (1 us at 40 MHz)
// and is cleared by a rising edge on time_sync_i.
// From the paper: general trigger plus five bar triggers, the LUT mask, the
// 1- or 3-turret reduced-power read-out centred on the hit bar, event number
// and time stamp of trigger reception, the time synchronisation input.  This
// design's choices: synchronisers, LUT size and fill modes, time-stamp unit,
// the rule for an empty pattern.
module trigger_manager #(
  parameter int unsigned TS_PRESCALE = 40
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        daq_mode_i,
  input  logic        inhibit_i,
  input  logic        evt_active_i,
  // trigger board (asynchronous)
  input  logic        gen_trig_i,
  input  logic [4:0]  bars_i,
  input  logic        time_sync_i,
  // microcontroller software trigger (synchronous)
  input  logic        soft_trig_i,
  input  logic [4:0]  soft_bars_i,
  // LUT programming
  input  logic        lut_we_i,
  input  logic [4:0]  lut_addr_i,
  input  logic [4:0]  lut_wdata_i,
  output logic [4:0]  lut_rdata_o,
  input  logic        lut_fill_i,
  input  logic [1:0]  lut_mode_i,     // 0 all, 1 hit turrets, 2 hit +- 1
  // outputs
  output logic [14:0] start_o,
  output logic        evt_start_o,
  output logic [15:0] evt_num_o,
  output logic [31:0] evt_time_o,
  output logic [4:0]  evt_bars_o,
  output logic [4:0]  evt_turrets_o,
  output logic [15:0] lost_o,
  output logic [31:0] time_o
);
  logic [1:0] trig_sync_q, ts_sync_q;
  logic       trig_prev_q, ts_prev_q;
  logic [4:0] bar_s1_q, bar_s2_q;
  logic [4:0] lut_q [32];
  logic [$clog2(TS_PRESCALE)-1:0] pre_q;
  logic [31:0] time_q;

  wire trig_edge = trig_sync_q[1] && !trig_prev_q;
  wire ts_edge   = ts_sync_q[1] && !ts_prev_q;
  wire hw_fire   = trig_edge && daq_mode_i && !inhibit_i && !evt_start_o && !evt_active_i;
  wire sw_fire   = soft_trig_i && !daq_mode_i && !evt_active_i && !evt_start_o;
  wire [4:0] pattern = hw_fire ? bar_s2_q : soft_bars_i;
  wire [4:0] turrets = lut_q[pattern];

  function automatic logic [4:0] fill_entry(input logic [1:0] mode, input logic [4:0] p);
    if (p == 5'd0 || mode == 2'd0 || mode == 2'd3) return 5'b11111;
    if (mode == 2'd1) return p;
    return p | {p[3:0], 1'b0} | {1'b0, p[4:1]};
  endfunction

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      trig_sync_q <= '0;
      ts_sync_q   <= '0;
      trig_prev_q <= 1'b0;
      ts_prev_q   <= 1'b0;
      bar_s1_q    <= '0;
      bar_s2_q    <= '0;
    end else begin
      trig_sync_q <= {trig_sync_q[0], gen_trig_i};
      ts_sync_q   <= {ts_sync_q[0], time_sync_i};
      trig_prev_q <= trig_sync_q[1];
      ts_prev_q   <= ts_sync_q[1];
      bar_s1_q    <= bars_i;
      bar_s2_q    <= bar_s1_q;
    end
  end

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      for (int i = 0; i < 32; i++) lut_q[i] <= 5'b11111;
    end else if (lut_fill_i) begin
      for (int i = 0; i < 32; i++) lut_q[i] <= fill_entry(lut_mode_i, 5'(i));
    end else if (lut_we_i) begin
      lut_q[lut_addr_i] <= lut_wdata_i;
    end
  end
  assign lut_rdata_o = lut_q[lut_addr_i];

  always_ff @(posedge clk_i) begin
    if (!rst_ni || ts_edge) begin
      pre_q  <= '0;
      time_q <= '0;
    end else if (pre_q == ($clog2(TS_PRESCALE))'(TS_PRESCALE - 1)) begin
      pre_q  <= '0;
      time_q <= time_q + 32'd1;
    end else begin
      pre_q <= pre_q + 1'b1;
    end
  end
  assign time_o = time_q;

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      start_o       <= '0;
      evt_start_o   <= 1'b0;
      evt_num_o     <= '0;
      evt_time_o    <= '0;
      evt_bars_o    <= '0;
      evt_turrets_o <= '0;
      lost_o        <= '0;
    end else begin
      start_o     <= '0;
      evt_start_o <= 1'b0;
      if (hw_fire || sw_fire) begin
        for (int t = 0; t < 5; t++) start_o[t*3 +: 3] <= {3{turrets[t]}};
        evt_start_o   <= 1'b1;
        evt_num_o     <= evt_num_o + 16'd1;
        evt_time_o    <= time_q;
        evt_bars_o    <= pattern;
        evt_turrets_o <= turrets;
      end
      if (trig_edge && daq_mode_i && !hw_fire && lost_o != 16'hFFFF) lost_o <= lost_o + 16'd1;
    end
  end
endmodule
