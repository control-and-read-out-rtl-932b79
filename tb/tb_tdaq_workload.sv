// tb_tdaq_workload: the firmware at its default parameters under the trigger
// patterns the detector is specified for, with the data processing unit (DPCU)
// reading packets at the same time over a link paced at 20 Mbit/s (one
// character of 10 bits every 20 clocks of 40 MHz).
// Phases, each a train of triggers at 1 kHz (one every 40000 clocks):
//   1. 2-pixel cluster on one chip per stave, one turret read out
//   2. the same, three turrets (centred on the hit bar)
//   3. the same, all five turrets
//   4. large clusters (20 pixels on every chip of master 0 of every stave),
//      all five turrets: read-out runs into the 200 us time-out, the packets
//      are truncated, and the slow link lets the output FIFO fill so that
//      busy stays high and later triggers are lost.
// For every accepted event the bench measures the busy length and each
// stave's clock-gate length, and reads the packet back, checking its words
// (the part before any truncation), the truncation flags and the CRC.  A
// trigger counts as accepted when a stave clock starts right after it;
// accepted plus lost triggers must equal the triggers sent, and the lost
// counter register must agree.
module tb_tdaq_workload;
  import tdaq_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #12.5 clk = ~clk;   // 40 MHz

  logic gtrig, hold, tsync, busy, dready;
  logic [4:0] bars;
  logic rxv, txv, txr;
  logic [7:0] rxd, txd;
  logic [14:0] cken, clbo, clboe, clbi, dig, ana, bias, pgood;
  logic mvalid, bovf, pdone, crcok;
  logic [7:0] mcmd;
  logic [31:0] bdata;
  logic [10:0] bcount;
  logic [14:0] m0o, m0oe, m1o, m1oe;

  tdaq_top dut (.clk_i(clk), .rst_ni(rst_n), .gen_trig_i(gtrig), .bars_i(bars), .busy_o(busy),
    .hold_i(hold), .time_sync_i(tsync), .data_ready_o(dready),
    .spw_rx_valid_i(rxv), .spw_rx_data_i(rxd), .spw_tx_valid_o(txv), .spw_tx_data_o(txd), .spw_tx_ready_i(txr),
    .stave_clk_en_o(cken), .clb_o(clbo), .clb_oe_o(clboe), .clb_i(clbi),
    .dig_pwr_en_o(dig), .ana_pwr_en_o(ana), .bias_en_o(bias), .pwr_good_i(pgood),
    .mcu_cmd_valid_o(mvalid), .mcu_cmd_o(mcmd), .mcu_done_i(1'b0), .mcu_result_i(16'h0),
    .mcu_soft_trig_i(1'b0), .mcu_soft_bars_i(5'h0), .mcu_buf_clear_i(1'b0), .mcu_buf_rd_en_i(1'b0),
    .mcu_buf_addr_i(10'h0), .mcu_buf_data_o(bdata), .mcu_buf_count_o(bcount),
    .mcu_buf_overflow_o(bovf), .mcu_pkt_done_o(pdone), .mcu_crc_ok_o(crcok),
    .seu_test_sel_i(5'd0), .seu_test_mask_i(7'd0));

  for (genvar s = 0; s < 15; s++) begin : g_st
    assign clbi[s] = clboe[s] ? clbo[s] : m0oe[s] ? m0o[s] : m1oe[s] ? m1o[s] : 1'b1;
    altai_master_model #(.CHIP_ID(8'h00)) m0 (.clk_i(clk), .clk_en_i(cken[s]), .line_i(clbi[s]), .line_o(m0o[s]), .line_oe_o(m0oe[s]));
    altai_master_model #(.CHIP_ID(8'h08)) m1 (.clk_i(clk), .clk_en_i(cken[s]), .line_i(clbi[s]), .line_o(m1o[s]), .line_oe_o(m1oe[s]));
  end
  assign pgood = dig & ana;

  localparam int PERIOD   = 40000;   // 1 kHz
  localparam int CHAR_CYC = 20;      // 20 Mbit/s, 10-bit characters

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- link at 20 Mbit/s ----------------
  logic [7:0] rx [$];
  int tx_pace = 0;
  always @(negedge clk) begin
    // ready is offered for the coming rising edge; the byte on offer now is
    // the one that edge takes
    tx_pace = (tx_pace + 1) % CHAR_CYC;
    txr = (tx_pace == 0);
    if (txv && txr) rx.push_back(txd);
  end
  semaphore link = new(1);
  task automatic send_bytes(input logic [7:0] b [$]);
    foreach (b[i]) begin @(negedge clk); rxv = 1; rxd = b[i]; @(negedge clk); rxv = 0; repeat (CHAR_CYC - 2) @(negedge clk); end
  endtask
  task automatic wait_resp(input int n);
    int t; t = 0;
    while (rx.size() < n && t < 400) begin @(negedge clk); t++; end
  endtask
  task automatic rd(input logic [15:0] a, output logic [15:0] d);
    link.get(1);
    rx.delete();
    send_bytes('{8'h01, a[15:8], a[7:0]});
    wait_resp(3);
    d = (rx.size() == 3 && rx[0] == 8'h81) ? {rx[1], rx[2]} : 16'hDEAD;
    if (rx.size() != 3 || rx[0] != 8'h81) begin failures++; $display("FAIL: read %h refused", a); end
    link.put(1);
  endtask
  task automatic wr(input logic [15:0] a, input logic [15:0] v);
    link.get(1);
    rx.delete();
    send_bytes('{8'h02, a[15:8], a[7:0], v[15:8], v[7:0]});
    wait_resp(1);
    if (rx.size() != 1 || rx[0] != 8'h82) begin failures++; $display("FAIL: write %h refused", a); end
    link.put(1);
  endtask
  task automatic command(input logic [7:0] code);
    logic [15:0] st;
    wr(16'h0000, {8'h00, code});
    for (int i = 0; i < 400; i++) begin
      rd(16'h0001, st);
      if (!st[15]) break;
    end
    check(st[0] && !st[14], $sformatf("command %h", code));
  endtask
  task automatic clb_write(input int stave, input logic [7:0] chip, input logic [15:0] v);
    wr(16'h0060, 16'(stave)); wr(16'h0061, {8'h0, chip}); wr(16'h0062, 16'h0200); wr(16'h0063, v);
    command(8'h03);
  endtask

  // ---------------- expected stave data ----------------
  int cl [15][10];   // cluster size per stave and chip (0-4 master 0, 5-9 master 1)
  function automatic void stave_words(input int s, ref logic [15:0] w [$]);
    w.delete();
    for (int k = 0; k < 10; k++) begin
      int c; logic [3:0] id;
      c = k % 5; id = 4'((k / 5) * 8 + c);
      if (cl[s][k] == 0) w.push_back({4'hE, id, 8'h00});
      else begin
        w.push_back({4'hA, id, 8'h00}); w.push_back({3'b110, 5'(c + 3), 8'h00});
        for (int p = 0; p < cl[s][k]; p++) w.push_back({2'b01, 4'(p % 16), 10'(100 + p)});
        w.push_back(16'hB000);
      end
    end
  endfunction
  function automatic logic [15:0] mask_bc(input logic [15:0] w);
    return (w[15:12] == 4'hA || w[15:12] == 4'hE) ? {w[15:8], 8'h00} : w;
  endfunction

  // ---------------- monitors: busy and clock-gate lengths ----------------
  int busy_len [$];
  int gate_max = 0, gate_cnt [15];
  bit daq_on = 1'b0;
  always @(negedge clk) begin : mon
    static int b = 0;
    if (daq_on) begin
      if (busy) b++;
      else if (b > 0) begin busy_len.push_back(b); b = 0; end
      for (int s = 0; s < 15; s++) begin
        if (cken[s]) gate_cnt[s]++;
        else if (gate_cnt[s] > 0) begin
          if (gate_cnt[s] > gate_max) gate_max = gate_cnt[s];
          gate_cnt[s] = 0;
        end
      end
    end else b = 0;
  end
  int starts = 0;
  logic any_q = 1'b0;
  always @(negedge clk) begin
    if (daq_on && (|cken) && !any_q) starts++;
    any_q = |cken;
  end

  // ---------------- packet reader (runs alongside the triggers) ----------------
  typedef struct { logic [4:0] tur; logic [4:0] bars; bit trunc; } evt_t;
  evt_t expq [$];
  int pkts_read = 0;
  logic [15:0] last_num = 16'd0;
  bit have_num = 1'b0;
  task automatic read_packet();
    logic [15:0] w, crc, num;
    logic [15:0] sw [$];
    evt_t e;
    int seen;
    seen = 0; crc = 16'hFFFF;
    e = expq.pop_front();
    rd(16'h0020, w); crc = crc16_word(crc, w); check(w == PKT_SYNC, "sync word");
    rd(16'h0020, num); crc = crc16_word(crc, num);
    check(!have_num || num == last_num + 16'd1, $sformatf("event number %0d follows %0d", num, last_num));
    last_num = num; have_num = 1'b1;
    rd(16'h0020, w); crc = crc16_word(crc, w);
    rd(16'h0020, w); crc = crc16_word(crc, w);
    rd(16'h0020, w); crc = crc16_word(crc, w);
    check(w == {6'b0, e.bars, e.tur}, $sformatf("bars/turrets %h", w));
    forever begin
      rd(16'h0020, w); crc = crc16_word(crc, w);
      if (w[15:12] != 4'hF) break;
      begin
        int s, n;
        s = int'(w[11:8]); n = int'(w[7:0]); seen++;
        check(e.tur[s/3], $sformatf("stave %0d selected", s));
        stave_words(s, sw);
        if (!e.trunc) check(n == sw.size(), $sformatf("stave %0d count %0d exp %0d", s, n, sw.size()));
        else check(n > 0 && n < sw.size(), $sformatf("stave %0d truncated count %0d", s, n));
        for (int k = 0; k < n; k++) begin
          rd(16'h0020, w); crc = crc16_word(crc, w);
          if (k < sw.size()) check(mask_bc(w) == sw[k], $sformatf("stave %0d word %0d %h exp %h", s, k, w, sw[k]));
        end
      end
    end
    check(seen == 3 * $countones(e.tur), "number of stave blocks");
    begin
      logic [15:0] staves;
      staves = '0;
      for (int s = 0; s < 15; s++) staves[s] = e.tur[s/3];
      check(w == (e.trunc ? staves : 16'h0), $sformatf("truncation flags %h", w));
    end
    rd(16'h0020, w);
    check(w == crc, "packet CRC");
    pkts_read++;
  endtask

  // ---------------- one phase ----------------
  int sent = 0, accepted = 0;
  task automatic run_phase(input string name, input int n_trig, input logic [4:0] b, input logic [4:0] tur, input bit trunc,
                           input int busy_limit);
    int acc0, st0, bmax;
    bit stop;
    acc0 = accepted; stop = 0;
    busy_len.delete(); gate_max = 0;
    fork
      begin
        for (int i = 0; i < n_trig; i++) begin
          st0 = starts;
          @(negedge clk); bars = b; gtrig = 1;
          repeat (10) @(negedge clk); gtrig = 0;
          sent++;
          if (starts != st0) begin accepted++; expq.push_back('{tur: tur, bars: b, trunc: trunc}); end
          repeat (PERIOD - 11) @(negedge clk);
        end
        stop = 1;
      end
      begin
        while (!stop || dready || expq.size() > 0) begin
          if (dready) read_packet(); else @(negedge clk);
          if (stop && expq.size() == 0) break;
        end
      end
    join
    repeat (20) @(negedge clk);
    bmax = 0;
    foreach (busy_len[i]) if (busy_len[i] > bmax && busy_len[i] < PERIOD) bmax = busy_len[i];
    $display("%s: %0d triggers, %0d accepted, longest event busy %0d clocks (%0d us), longest clock gate %0d clocks (%0d us)",
             name, n_trig, accepted - acc0, bmax, bmax / 40, gate_max, gate_max / 40);
    check(bmax > 0 && bmax <= busy_limit, $sformatf("%s: busy %0d within %0d", name, bmax, busy_limit));
    check(gate_max > 0 && gate_max <= bmax, $sformatf("%s: clock gate shorter than busy", name));
  endtask

  logic [15:0] v;
  initial begin
    gtrig = 0; hold = 0; tsync = 0; bars = 0; rxv = 0; rxd = 0;
    foreach (cl[s, k]) cl[s][k] = 0;
    foreach (gate_cnt[s]) gate_cnt[s] = 0;
    repeat (5) @(negedge clk); rst_n = 1; repeat (5) @(negedge clk);
    wr(16'h0030, 16'h7FFF); wr(16'h0031, 16'h7FFF); wr(16'h0032, 16'h7FFF);
    for (int s = 0; s < 15; s++) begin clb_write(s, 8'h00, 16'd2); cl[s][0] = 2; end

    // 1 turret
    wr(16'h0064, 16'd1); command(8'h05); command(8'h01); daq_on = 1;
    run_phase("cluster 2, 1 turret", 5, 5'b00100, 5'b00100, 0, 4000);
    command(8'h02); daq_on = 0;
    // 3 turrets
    wr(16'h0064, 16'd2); command(8'h05); command(8'h01); daq_on = 1;
    run_phase("cluster 2, 3 turrets", 5, 5'b00100, 5'b01110, 0, 4000);
    command(8'h02); daq_on = 0;
    // 5 turrets
    wr(16'h0064, 16'd0); command(8'h05); command(8'h01); daq_on = 1;
    run_phase("cluster 2, 5 turrets", 5, 5'b00100, 5'b11111, 0, 4000);
    check(accepted == sent, "every small event accepted at 1 kHz");
    command(8'h02); daq_on = 0;

    // large clusters on every chip of master 0
    for (int s = 0; s < 15; s++) for (int c = 0; c < 5; c++) begin clb_write(s, 8'(c), 16'd20); cl[s][c] = 20; end
    command(8'h01); daq_on = 1;
    run_phase("cluster 20 x 5 chips, 5 turrets", 4, 5'b00100, 5'b11111, 1, 8000 + MAX_PKT_WORDS + 100);
    check(accepted < sent, "large events at 1 kHz over the slow link fill the output FIFO and cost triggers");
    rd(16'h0012, v);
    check(int'(v) == sent - accepted, $sformatf("lost counter %0d = %0d sent - %0d accepted", v, sent, accepted));
    check(pkts_read == accepted, "every accepted event read back");
    command(8'h02); daq_on = 0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
