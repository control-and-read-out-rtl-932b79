// tb_packager: builds events from 15 stave FIFOs (the design's own FIFO and
// multiplexer) with random contents, random turret masks and stave done
// pulses in random order, and compares the packet word by word with one
// assembled here, including a CRC-16 computed bit-serially in this bench.
// Also checks the hold line, output back-pressure, truncation flags, the
// idle-mode routing to the decoder, and that the packet needs exactly one
// cycle per word when nothing stalls.
// Setup: 10 ns clock, default packager, 128-deep stave FIFOs; the stave
// data and done pulses are generated here.  Packet layout and CRC are this
// design's; the event-builder role, the event number, time stamp and CRC word
// follow the source.
module tb_packager;
  import tdaq_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic daq, hold, evs, ready, last, fpush, dvalid, edone, corr, ferr, pop, mempty;
  logic [15:0] evn, data, mrdata;
  logic [31:0] evtime;
  logic [4:0] evb, evt;
  logic [14:0] sdone, strunc, spush, spop, sempty;
  logic [3:0] sel;
  logic [7:0] mcount;
  logic [15:0] swdata [15];
  logic [15:0] srdata [15];
  logic [7:0] scount [15];
  logic [14:0] sfull;

  for (genvar s = 0; s < 15; s++) begin : g_f
    ecc_fifo #(.WIDTH(16), .DEPTH(128)) f (.clk_i(clk), .rst_ni(rst_n), .push_i(spush[s]), .wdata_i(swdata[s]),
      .pop_i(spop[s]), .rdata_o(srdata[s]), .empty_o(sempty[s]), .full_o(sfull[s]), .count_o(scount[s]),
      .corr_o(), .upset_en_i(1'b0), .upset_addr_i('0), .upset_mask_i('0));
  end
  stave_mux #(.N_IN(15), .WIDTH(16), .CW(8)) mux (.sel_i(sel), .rdata_i(srdata), .empty_i(sempty),
    .count_i(scount), .pop_o(spop), .pop_i(pop), .rdata_o(mrdata), .empty_o(mempty), .count_o(mcount));

  packager dut (.clk_i(clk), .rst_ni(rst_n), .daq_mode_i(daq), .hold_i(hold), .evt_start_i(evs),
    .evt_num_i(evn), .evt_time_i(evtime), .evt_bars_i(evb), .evt_turrets_i(evt),
    .stave_done_i(sdone), .stave_trunc_i(strunc), .sel_o(sel), .rdata_i(mrdata), .empty_i(mempty),
    .count_i(mcount), .pop_o(pop), .out_ready_i(ready), .data_o(data), .last_o(last),
    .fifo_push_o(fpush), .dec_valid_o(dvalid), .evt_done_o(edone), .upset_i(7'd0),
    .seu_corr_o(corr), .fsm_err_o(ferr));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [15:0] crc_serial(input logic [15:0] w [$]);
    logic [15:0] r;
    logic fb;
    r = 16'hFFFF;
    foreach (w[i]) for (int b = 15; b >= 0; b--) begin
      fb = r[15] ^ w[i][b];
      r = r << 1;
      if (fb) begin r[0] = ~r[0]; r[5] = ~r[5]; r[12] = ~r[12]; end
    end
    return r;
  endfunction

  logic [15:0] got [$];
  logic got_last [$];
  int n_to_dec = 0, n_to_fifo = 0;
  always @(posedge clk) if (fpush || dvalid) begin
    got.push_back(data); got_last.push_back(last);
    if (dvalid) n_to_dec++; else n_to_fifo++;
  end

  int cyc_first, cyc_last, cyc;
  always @(posedge clk) cyc++;

  task automatic one_event(input bit mode_daq, input logic [4:0] turrets, input bit stall, input bit hold_it);
    logic [15:0] exp [$];
    logic [15:0] content [15][$];
    logic [14:0] tr;
    int order [15];
    daq = mode_daq;
    got.delete(); got_last.delete();
    tr = 15'($urandom);
    // fill the FIFOs of enabled staves
    for (int s = 0; s < 15; s++) begin
      content[s].delete();
      if (turrets[s/3]) begin
        int n;
        n = $urandom % 12;
        for (int k = 0; k < n; k++) begin
          @(negedge clk); spush = 15'(1) << s; swdata[s] = 16'($urandom); content[s].push_back(swdata[s]);
        end
        @(negedge clk); spush = 0;
      end
    end
    exp.push_back(PKT_SYNC); exp.push_back(evn + 16'd1);
    exp.push_back(16'hCAFE); exp.push_back(evn + 16'd1);
    exp.push_back({6'b0, 5'b10101, turrets});
    for (int s = 0; s < 15; s++) if (turrets[s/3]) begin
      exp.push_back({4'hF, 4'(s), 8'(content[s].size())});
      foreach (content[s][k]) exp.push_back(content[s][k]);
    end
    exp.push_back({1'b0, tr & {{3{turrets[4]}}, {3{turrets[3]}}, {3{turrets[2]}}, {3{turrets[1]}}, {3{turrets[0]}}}});
    exp.push_back(crc_serial(exp));
    // start
    @(negedge clk); evs = 1; evn = evn + 16'd1; evtime = {16'hCAFE, evn}; evb = 5'b10101; evt = turrets;
    hold = hold_it;
    @(negedge clk); evs = 0;
    if (hold_it) begin
      repeat (20) @(negedge clk);
      check(got.size() == 0, "nothing written while hold is high");
      hold = 0;
    end
    // done pulses in random order
    foreach (order[i]) order[i] = i;
    order.shuffle();
    foreach (order[i]) if (turrets[order[i]/3]) begin
      repeat ($urandom % 5) @(negedge clk);
      sdone = 15'(1) << order[i]; strunc = tr; @(negedge clk); sdone = 0;
    end
    // wait for done
    cyc = 0;
    while (!edone) begin
      @(negedge clk);
      if (stall) ready = ($urandom % 3) != 0;
    end
    ready = 1;
    @(negedge clk);
    check(got.size() == exp.size(), $sformatf("packet length %0d exp %0d", got.size(), exp.size()));
    foreach (exp[i]) if (i < got.size()) check(got[i] == exp[i], $sformatf("word %0d %h exp %h", i, got[i], exp[i]));
    foreach (got_last[i]) check(got_last[i] == (i == got_last.size() - 1), "last flag on the CRC word only");
  endtask

  initial begin
    daq = 1; hold = 0; evs = 0; evn = 0; evtime = 0; evb = 0; evt = 0; ready = 1;
    sdone = 0; strunc = 0; spush = 0; foreach (swdata[i]) swdata[i] = 0;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    one_event(1, 5'b11111, 0, 0);
    one_event(1, 5'b00100, 0, 1);
    one_event(1, 5'b01110, 1, 0);
    for (int i = 0; i < 5; i++) one_event(1, 5'($urandom) | 5'b00001, 1, 0);
    check(n_to_dec == 0, "DAQ mode writes only to the output FIFO");
    n_to_fifo = 0;
    one_event(0, 5'b00010, 0, 0);
    check(n_to_fifo == 0 && n_to_dec == got.size(), "idle mode writes only to the decoder");
    // throughput: staves done right after the start, no stall: one word per cycle
    begin
      int words;
      daq = 1; got.delete();
      for (int s = 0; s < 3; s++) begin
        for (int k = 0; k < 10; k++) begin @(negedge clk); spush = 15'(1) << s; swdata[s] = 16'(k); end
      end
      @(negedge clk); spush = 0;
      evs = 1; evt = 5'b00001; @(negedge clk); evs = 0;
      cyc = 0;
      sdone = 15'b111; @(negedge clk); sdone = 0;
      while (!edone) @(negedge clk);
      words = got.size();
      // header 5 + 3 x (1 + 10) + trunc + crc = 40 words; visiting 15 staves adds 12 skip cycles
      check(words == 40, $sformatf("throughput packet words %0d", words));
      check(cyc <= words + 12 + 3, $sformatf("throughput cycles %0d for %0d words", cyc, words));
    end
    check(!ferr, "no FSM error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
