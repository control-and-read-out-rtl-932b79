// tb_tdaq_top: end-to-end test of the read-out firmware at its default
// parameters, with two behavioural master-chip models on each of the 15
// staves, a data processing unit driving the register file over the link's
// byte interface, and a minimal microcontroller.
// Sequence: power the staves, program test clusters into the chips with
// sensor-register commands, run an idle-mode calibration event through the
// decoder into the microcontroller buffer, then in DAQ mode: full read-out,
// one-turret read-out with a time-stamp check after a time-counter
// synchronisation, three-turret read-out, single-bit upsets injected into
// three FSM state registers during an event, a double upset that drives the
// packager into an undefined state (error flag, cleared by the board
// reset), triggers lost while busy, the data hold line, a truncated (oversized) event, and an output FIFO filled until
// busy stays high.  Every packet is read back through the register file and
// checked word by word, CRC included.  Each mechanism is counted and a
// mechanism that never happened counts as a failure.
module tb_tdaq_top;
  import tdaq_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #12.5 clk = ~clk;   // 40 MHz

  logic gtrig, hold, tsync, busy, dready;
  logic [4:0] bars;
  logic rxv, txv, txr;
  logic [7:0] rxd, txd;
  logic [14:0] cken, clbo, clboe, clbi, dig, ana, bias, pgood;
  logic mvalid, mdone, strig, bclr, brd, bovf, pdone, crcok;
  logic [7:0] mcmd;
  logic [15:0] mres;
  logic [4:0] sbars;
  logic [9:0] baddr;
  logic [31:0] bdata;
  logic [10:0] bcount;
  logic [14:0] m0o, m0oe, m1o, m1oe;
  logic [4:0] seu_sel = 5'd0;
  logic [6:0] seu_mask = 7'd0;

  tdaq_top dut (.clk_i(clk), .rst_ni(rst_n), .gen_trig_i(gtrig), .bars_i(bars), .busy_o(busy),
    .hold_i(hold), .time_sync_i(tsync), .data_ready_o(dready),
    .spw_rx_valid_i(rxv), .spw_rx_data_i(rxd), .spw_tx_valid_o(txv), .spw_tx_data_o(txd), .spw_tx_ready_i(txr),
    .stave_clk_en_o(cken), .clb_o(clbo), .clb_oe_o(clboe), .clb_i(clbi),
    .dig_pwr_en_o(dig), .ana_pwr_en_o(ana), .bias_en_o(bias), .pwr_good_i(pgood),
    .mcu_cmd_valid_o(mvalid), .mcu_cmd_o(mcmd), .mcu_done_i(mdone), .mcu_result_i(mres),
    .mcu_soft_trig_i(strig), .mcu_soft_bars_i(sbars), .mcu_buf_clear_i(bclr), .mcu_buf_rd_en_i(brd),
    .mcu_buf_addr_i(baddr), .mcu_buf_data_o(bdata), .mcu_buf_count_o(bcount),
    .mcu_buf_overflow_o(bovf), .mcu_pkt_done_o(pdone), .mcu_crc_ok_o(crcok),
    .seu_test_sel_i(seu_sel), .seu_test_mask_i(seu_mask));

  for (genvar s = 0; s < 15; s++) begin : g_st
    assign clbi[s] = clboe[s] ? clbo[s] : m0oe[s] ? m0o[s] : m1oe[s] ? m1o[s] : 1'b1;
    altai_master_model #(.CHIP_ID(8'h00)) m0 (.clk_i(clk), .clk_en_i(cken[s]), .line_i(clbi[s]), .line_o(m0o[s]), .line_oe_o(m0oe[s]));
    altai_master_model #(.CHIP_ID(8'h08)) m1 (.clk_i(clk), .clk_en_i(cken[s]), .line_i(clbi[s]), .line_o(m1o[s]), .line_oe_o(m1oe[s]));
  end
  assign pgood = dig & ana;   // power-good follows the switches

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_accepted = 0, n_lost = 0, n_gate_on = 0, n_one = 0, n_three = 0, n_full = 0;
  logic [31:0] last_ts;
  int n_tsync = 0, n_fsm_err = 0, n_seu = 0, n_trunc = 0, n_hold = 0, n_calib = 0, n_clb_cfg = 0, n_full_busy = 0, n_mcu = 0;
  bit daq_on = 1'b0;   // set by the START/STOP commands this bench issues
  logic [14:0] cken_q = '0;
  logic [14:0] gated_staves = '0;
  always @(negedge clk) begin
    for (int s = 0; s < 15; s++) if (cken[s] && !cken_q[s] && daq_on) begin
      n_gate_on++; gated_staves[s] = 1'b1;
    end
    cken_q = cken;
  end

  // ---------------- trigger-to-command latency ----------------
  // clocks from the general-trigger input rising to the moment the chips of
  // stave 6 (a stave of the middle turret) have received the read-out command
  int cyc = 0, t_trig = 0, lat_max = 0, n_lat = 0;
  int unsigned ntrig_q = 0;
  logic gtrig_q = 1'b0;
  always @(posedge clk) begin
    cyc++;
    if (gtrig && !gtrig_q) t_trig = cyc;
    gtrig_q = gtrig;
    if (g_st[6].m0.n_trig != ntrig_q) begin
      ntrig_q = g_st[6].m0.n_trig;
      if (daq_on) begin
        n_lat++;
        if (cyc - t_trig > lat_max) lat_max = cyc - t_trig;
      end
    end
  end

  // ---------------- DPCU: link byte protocol ----------------
  logic [7:0] rx [$];
  always @(negedge clk) if (txv && txr) rx.push_back(txd);

  task automatic send_bytes(input logic [7:0] b [$]);
    foreach (b[i]) begin @(negedge clk); rxv = 1; rxd = b[i]; @(negedge clk); rxv = 0; end
  endtask
  task automatic wait_resp(input int n);
    int t; t = 0;
    while (rx.size() < n && t < 100) begin @(negedge clk); t++; end
  endtask
  task automatic rd(input logic [15:0] a, output logic [15:0] d);
    rx.delete();
    send_bytes('{8'h01, a[15:8], a[7:0]});
    wait_resp(3);
    d = (rx.size() == 3 && rx[0] == 8'h81) ? {rx[1], rx[2]} : 16'hXBAD;
    if (rx.size() != 3 || rx[0] != 8'h81) begin failures++; $display("FAIL: read %h refused", a); end
  endtask
  task automatic wr(input logic [15:0] a, input logic [15:0] v);
    rx.delete();
    send_bytes('{8'h02, a[15:8], a[7:0], v[15:8], v[7:0]});
    wait_resp(1);
    if (rx.size() != 1 || rx[0] != 8'h82) begin failures++; $display("FAIL: write %h refused", a); end
  endtask
  task automatic command(input logic [7:0] code);
    logic [15:0] st;
    wr(16'h0000, {8'h00, code});
    if (code == 8'h01) daq_on = 1'b1;
    if (code == 8'h02) daq_on = 1'b0;
    for (int i = 0; i < 400; i++) begin
      rd(16'h0001, st);
      if (!st[15]) break;
    end
    check(st[0] && !st[14], $sformatf("command %h done without error", code));
  endtask
  task automatic clb_write(input int stave, input logic [7:0] chip, input logic [15:0] a, input logic [15:0] v);
    wr(16'h0060, 16'(stave)); wr(16'h0061, {8'h0, chip}); wr(16'h0062, a); wr(16'h0063, v);
    command(8'h03);
    n_clb_cfg++;
  endtask

  // ---------------- MCU: answers tasks after a few cycles ----------------
  initial begin
    mdone = 0; mres = 0;
    forever begin
      @(negedge clk);
      if (mvalid) begin
        n_mcu++;
        repeat (20) @(negedge clk);
        mres = {8'hCA, mcmd}; mdone = 1; @(negedge clk); mdone = 0;
      end
    end
  end

  // ---------------- expected data of one stave ----------------
  int cluster [15];
  function automatic void stave_words(input int s, ref logic [15:0] w [$]);
    w.delete();
    if (cluster[s] == 0) w.push_back(16'hE000);
    else begin
      w.push_back(16'hA000); w.push_back({3'b110, 5'd3, 8'h00});
      for (int p = 0; p < cluster[s]; p++) w.push_back({2'b01, 4'(p % 16), 10'(100 + p)});
      w.push_back(16'hB000);
    end
    for (int c = 1; c < 5; c++) w.push_back({4'hE, 4'(c), 8'h00});
    for (int c = 8; c < 13; c++) w.push_back({4'hE, 4'(c), 8'h00});
  endfunction
  // chip header and empty words carry a bunch counter in the low byte
  function automatic logic [15:0] mask_bc(input logic [15:0] w);
    return (w[15:12] == 4'hA || w[15:12] == 4'hE) ? {w[15:8], 8'h00} : w;
  endfunction

  // ---------------- read one packet and check it ----------------
  int pkt_words;
  task automatic read_packet(input logic [15:0] exp_num, input logic [4:0] exp_tur,
                             input logic [4:0] exp_bars, input bit expect_trunc);
    logic [15:0] w, crc, flags;
    logic [15:0] sw [$];
    int staves_seen = 0;
    crc = 16'hFFFF;
    pkt_words = 0;
    rd(16'h0020, w); crc = crc16_word(crc, w); check(w == PKT_SYNC, $sformatf("sync word %h", w));
    rd(16'h0020, w); crc = crc16_word(crc, w); check(w == exp_num, $sformatf("event number %0d exp %0d", w, exp_num));
    rd(16'h0020, w); crc = crc16_word(crc, w); last_ts[31:16] = w;
    rd(16'h0020, w); crc = crc16_word(crc, w); last_ts[15:0] = w;
    rd(16'h0020, w); crc = crc16_word(crc, w);
    check(w == {6'b0, exp_bars, exp_tur}, $sformatf("bars/turrets word %h", w));
    pkt_words = 5;
    forever begin
      rd(16'h0020, w); crc = crc16_word(crc, w); pkt_words++;
      if (w[15:12] != 4'hF) break;
      begin
        int s, n;
        s = int'(w[11:8]); n = int'(w[7:0]);
        staves_seen++;
        check(exp_tur[s/3], $sformatf("stave %0d belongs to a selected turret", s));
        stave_words(s, sw);
        if (!expect_trunc) check(n == sw.size(), $sformatf("stave %0d word count %0d exp %0d", s, n, sw.size()));
        for (int k = 0; k < n; k++) begin
          rd(16'h0020, w); crc = crc16_word(crc, w); pkt_words++;
          if (k < sw.size() && !(expect_trunc && k >= 20)) check(mask_bc(w) == sw[k], $sformatf("stave %0d word %0d %h exp %h", s, k, w, sw[k]));
        end
      end
    end
    flags = w;
    check(staves_seen == 3 * $countones(exp_tur), $sformatf("staves in packet %0d", staves_seen));
    check((flags != 0) == expect_trunc, $sformatf("truncation flags %h", flags));
    rd(16'h0020, w); pkt_words++;
    check(w == crc, $sformatf("CRC %h exp %h", w, crc));
    rd(16'h0021, w); check(w[0], "last flag on CRC word");
  endtask

  // ---------------- upset injection: one bit flip for one clock ----------------
  task automatic upset(input logic [4:0] target, input int bit_no);
    @(negedge clk); seu_sel = target; seu_mask = 7'(1 << bit_no);
    @(negedge clk); seu_sel = 5'd0; seu_mask = 7'd0;
  endtask

  // ---------------- trigger ----------------
  int busy_cycles;
  task automatic trigger(input logic [4:0] b);
    @(negedge clk); bars = b; gtrig = 1;
    repeat (8) @(negedge clk); gtrig = 0;
  endtask
  task automatic trigger_and_wait(input logic [4:0] b);
    int t;
    trigger(b);
    t = 0;
    while (busy && t < 20000) begin @(negedge clk); t++; end
    busy_cycles = t + 8;
    n_accepted++;
  endtask

  logic [15:0] v;
  int evnum = 0;

  initial begin
    gtrig = 0; hold = 0; tsync = 0; bars = 0; rxv = 0; rxd = 0; txr = 1;
    strig = 0; sbars = 0; bclr = 0; brd = 0; baddr = 0;
    foreach (cluster[i]) cluster[i] = 0;
    repeat (5) @(negedge clk); rst_n = 1; repeat (5) @(negedge clk);

    // power and bias on for all staves
    wr(16'h0030, 16'h7FFF); wr(16'h0031, 16'h7FFF); wr(16'h0032, 16'h7FFF);
    check(dig == 15'h7FFF && ana == 15'h7FFF && bias == 15'h7FFF, "stave power switches");
    rd(16'h0015, v); check(v == 16'h7FFF, "power good read-back");

    // test clusters of 2 pixels on chip 0 of each stave (one chip per stave)
    for (int s = 0; s < 15; s++) begin clb_write(s, 8'h00, 16'h0200, 16'd2); cluster[s] = 2; end
    wr(16'h0060, 16'd4); wr(16'h0061, 16'h0000); wr(16'h0062, 16'h0200); command(8'h04);
    rd(16'h0002, v); check(v == 16'd2, "sensor register read-back over the control bus");

    // idle-mode calibration event through the decoder
    @(negedge clk); bclr = 1; @(negedge clk); bclr = 0;
    @(negedge clk); sbars = 5'b00000; strig = 1; @(negedge clk); strig = 0;
    begin
      int t; t = 0;
      while (!pdone && t < 20000) begin @(negedge clk); t++; end
    end
    @(negedge clk);
    check(crcok, "calibration packet CRC");
    check(bcount == 11'd30, $sformatf("calibration hits in MCU buffer %0d", bcount));
    @(negedge clk); brd = 1; baddr = 10'd3; @(negedge clk); brd = 0; @(negedge clk);
    // 4th hit: stave 1, chip 0, region 3, encoder 1, address 101
    check(bdata == {5'b0, 4'd1, 4'd0, 10'(3 * 32 + 2 + (1 ^ 0)), 9'd50}, $sformatf("decoded hit %h", bdata));
    n_calib++;
    evnum++;
    command(8'h12);
    rd(16'h0002, v); check(v == 16'hCA12, "MCU task result");
    rd(16'h0010, v); check(!v[15] && !dready, "still idle, nothing in the output FIFO");
    check(!v[9] && !v[10], "no upset seen, no FSM error");

    // ---- DAQ mode ----
    command(8'h01);
    repeat (10) @(negedge clk);
    check(cken == 15'h0, "stave clocks gated off in DAQ mode");
    check(!busy, "not busy in DAQ mode");

    // full read-out, with single-bit upsets in three state registers on the way
    fork
      trigger_and_wait(5'b00100);
      begin
        repeat (400) @(negedge clk); upset(5'd6, 2);     // stave controller 5, while reading
        repeat (100) @(negedge clk); upset(5'd16, 6);    // packager, while waiting for staves
        upset(5'd17, 0);                                 // register-file link, idle
      end
    join
    evnum++;
    $display("busy for a 2-pixel event on 15 staves: %0d cycles (%0d us)", busy_cycles, busy_cycles / 40);
    check(busy_cycles < 8000, "busy shorter than the 200 us maximum");
    check(cken == 15'h0, "clocks gated off again after read-out");
    check(dready, "data ready");
    read_packet(16'(evnum), 5'b11111, 5'b00100, 0);
    n_full++;
    check(!dready, "no packet left");
    rd(16'h0010, v);
    check(v[9] && !v[10], $sformatf("upsets corrected and reported, no FSM error (status %h)", v));
    if (v[9]) n_seu++;
    rd(16'h0013, v); check(int'(v) >= busy_cycles - 20 && int'(v) <= busy_cycles + 20, $sformatf("busy length register %0d", v));

    // one-turret mode (the upset flag is cleared while idle)
    command(8'h02); command(8'h06);
    rd(16'h0010, v); check(!v[9], "upset-seen flag cleared");
    wr(16'h0064, 16'd1); command(8'h05); command(8'h01);
    gated_staves = '0;
    // time-counter synchronisation 10 us before the trigger: the time stamp
    // restarts from zero and counts microseconds
    @(negedge clk); tsync = 1; repeat (4) @(negedge clk); tsync = 0;
    repeat (396) @(negedge clk);
    trigger_and_wait(5'b00100); evnum++;
    check(gated_staves == 15'b000000111000000, $sformatf("clock enabled only on turret 2 staves (%b)", gated_staves));
    read_packet(16'(evnum), 5'b00100, 5'b00100, 0);
    check(last_ts >= 32'd10 && last_ts <= 32'd11, $sformatf("time stamp %0d us after the synchronisation", last_ts));
    if (last_ts <= 32'd11) n_tsync++;
    n_one++;

    // three-turret mode centred on the hit bar
    command(8'h02); wr(16'h0064, 16'd2); command(8'h05); command(8'h01);
    trigger_and_wait(5'b01000); evnum++;
    read_packet(16'(evnum), 5'b11100, 5'b01000, 0);
    n_three++;

    // trigger while busy is lost
    begin
      logic [15:0] lost0, lost1;
      rd(16'h0012, lost0);
      trigger(5'b00010); evnum++; n_accepted++;
      repeat (40) @(negedge clk);
      check(busy, "busy during read-out");
      trigger(5'b00010);
      while (busy) @(negedge clk);
      rd(16'h0012, lost1);
      check(lost1 == lost0 + 16'd1, "trigger during busy counted as lost");
      n_lost += int'(lost1 - lost0);
      read_packet(16'(evnum), 5'b00111, 5'b00010, 0);
    end

    // hold line: busy, triggers refused until released
    hold = 1; repeat (4) @(negedge clk);
    check(busy, "busy while hold is high");
    trigger(5'b00001);
    repeat (20) @(negedge clk);
    rd(16'h0011, v); check(int'(v) == evnum, $sformatf("no event accepted during hold (%0d)", v));
    hold = 0; repeat (4) @(negedge clk);
    check(!busy, "busy released after hold");
    n_hold++;

    // oversized event: truncated at the stave FIFO depth
    command(8'h02); wr(16'h0064, 16'd1); command(8'h05);
    clb_write(0, 8'h00, 16'h0200, 16'd150); cluster[0] = 150;
    command(8'h01);
    trigger_and_wait(5'b00001); evnum++;
    $display("busy for a 150-pixel event: %0d cycles (%0d us)", busy_cycles, busy_cycles / 40);
    read_packet(16'(evnum), 5'b00001, 5'b00001, 1);
    n_trunc++;

    // fill the output FIFO without reading: busy must stay on when it is full
    command(8'h02); clb_write(0, 8'h00, 16'h0200, 16'd2); cluster[0] = 2;
    wr(16'h0064, 16'd0); command(8'h05); command(8'h01);
    begin
      int k; k = 0;
      while (k < 20) begin
        trigger_and_wait(5'b00001); evnum++; k++;
        rd(16'h0010, v);
        if (v[12]) break;     // output FIFO cannot take another packet
      end
      check(v[12], "output FIFO reported full");
      repeat (50) @(negedge clk);
      check(busy, "busy held by the full output FIFO");
      n_full_busy++;
      rd(16'h0014, v);
      check(int'(v) == k, $sformatf("%0d packets pending", v));
      for (int i = 0; i < k; i++) read_packet(16'(evnum - k + 1 + i), 5'b11111, 5'b00001, 0);
      repeat (5) @(negedge clk);
      check(!busy && !dready, "busy released after the DPCU read the packets");
    end
    command(8'h02);

    // a double upset in the idle packager's state word (code bits 0 and 6) is
    // mis-corrected to the undefined state 12: the packager must return to
    // idle and raise the FSM error flag; the board reset line clears it
    @(negedge clk); seu_sel = 5'd16; seu_mask = 7'b1000001; @(negedge clk); seu_sel = 5'd0; seu_mask = 7'd0;
    repeat (4) @(negedge clk);
    rd(16'h0010, v);
    check(v[10], $sformatf("FSM error flag after an undefined state (status %h)", v));
    if (v[10]) n_fsm_err++;
    rst_n = 0; repeat (5) @(negedge clk); rst_n = 1; repeat (5) @(negedge clk);
    rd(16'h0010, v);
    check(!v[10] && !v[9] && !v[15], $sformatf("board reset clears the error flags (status %h)", v));
    check(dig == 15'h0 && ana == 15'h0 && bias == 15'h0, "stave power off after reset");

    // the command must reach the stave within a few hundred ns of the trigger
    $display("trigger to read-out command at the chips: at most %0d clocks (%0d ns)", lat_max, lat_max * 25);
    check(n_lat > 0 && lat_max <= 24, $sformatf("trigger-to-command latency %0d clocks", lat_max));

    // mechanisms exercised
    $display("tsync=%0d fsm_err=%0d seu=%0d accepted=%0d lost=%0d gate_on=%0d full=%0d one=%0d three=%0d trunc=%0d hold=%0d calib=%0d clbcfg=%0d fullbusy=%0d mcu=%0d",
             n_tsync, n_fsm_err, n_seu, n_accepted, n_lost, n_gate_on, n_full, n_one, n_three, n_trunc, n_hold, n_calib, n_clb_cfg, n_full_busy, n_mcu);
    check(n_accepted > 0, "trigger accepted");
    check(n_lost > 0, "trigger lost while busy");
    check(n_gate_on > 0, "clock gating");
    check(n_full > 0 && n_one > 0 && n_three > 0, "turret selection modes");
    check(n_trunc > 0, "truncation");
    check(n_hold > 0, "hold");
    check(n_seu > 0, "state-register upset corrected");
    check(n_fsm_err > 0, "undefined FSM state flagged");
    check(n_tsync > 0, "time-counter synchronisation");
    check(n_calib > 0, "calibration path");
    check(n_clb_cfg > 0, "sensor configuration");
    check(n_full_busy > 0, "output FIFO full");
    check(n_mcu > 0, "MCU task");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
