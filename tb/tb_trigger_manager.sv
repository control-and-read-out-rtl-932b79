// tb_trigger_manager: default LUT (all turrets), the one-turret and
// three-turret fill modes, direct LUT writes, inhibit and the lost-trigger
// counter, idle-mode software triggers, event numbering, the time stamp and
// its synchronisation input, and the trigger-to-start latency: start is
// out on the third clock edge after the trigger input rises (two
// synchroniser flops, then the output register behind the edge detector).
// Setup: 10 ns clock, TS_PRESCALE 4 so the time stamp moves quickly.  The
// general trigger with five bar lines, the LUT mask and the 1- and 3-turret
// modes follow the source; LUT size, fill modes and time unit are this design's.
module tb_trigger_manager;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic daq, inhibit, active, gtrig, tsync, strig, lwe, lfill, evs;
  logic [4:0] bars, sbars, laddr, lwdata, lrdata, evb, evt;
  logic [1:0] lmode;
  logic [14:0] start;
  logic [15:0] evn, lost;
  logic [31:0] evtime, tnow;
  int checks = 0, failures = 0;

  trigger_manager #(.TS_PRESCALE(4)) dut (.clk_i(clk), .rst_ni(rst_n), .daq_mode_i(daq), .inhibit_i(inhibit),
    .evt_active_i(active), .gen_trig_i(gtrig), .bars_i(bars), .time_sync_i(tsync),
    .soft_trig_i(strig), .soft_bars_i(sbars), .lut_we_i(lwe), .lut_addr_i(laddr), .lut_wdata_i(lwdata),
    .lut_rdata_o(lrdata), .lut_fill_i(lfill), .lut_mode_i(lmode), .start_o(start), .evt_start_o(evs),
    .evt_num_o(evn), .evt_time_o(evtime), .evt_bars_o(evb), .evt_turrets_o(evt), .lost_o(lost), .time_o(tnow));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [14:0] staves(input logic [4:0] t);
    logic [14:0] s;
    for (int i = 0; i < 5; i++) s[3*i +: 3] = {3{t[i]}};
    return s;
  endfunction

  // pulse the general trigger; return the start vector and latency
  logic [14:0] seen;
  int lat;
  task automatic fire(input logic [4:0] b);
    seen = '0; lat = -1;
    @(negedge clk); bars = b; gtrig = 1;
    for (int i = 1; i <= 8; i++) begin
      @(negedge clk);
      if (i == 3) gtrig = 0;
      if (start != 0 && lat < 0) begin seen = start; lat = i; end
    end
  endtask

  initial begin
    daq = 0; inhibit = 0; active = 0; gtrig = 0; tsync = 0; strig = 0; lwe = 0; lfill = 0;
    bars = 0; sbars = 0; laddr = 0; lwdata = 0; lmode = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    daq = 1;
    fire(5'b00100);
    check(seen == 15'h7FFF, "default LUT reads all turrets");
    check(lat == 3, $sformatf("trigger latency %0d", lat));
    check(evn == 16'd1 && evb == 5'b00100 && evt == 5'b11111, "event 1 info");
    // one-turret mode
    @(negedge clk); lmode = 1; lfill = 1; @(negedge clk); lfill = 0;
    fire(5'b00100);
    check(seen == staves(5'b00100), "one turret");
    fire(5'b00000);
    check(seen == 15'h7FFF, "empty pattern reads all");
    // three-turret mode, centred on the hit bar
    @(negedge clk); lmode = 2; lfill = 1; @(negedge clk); lfill = 0;
    fire(5'b00100);
    check(seen == staves(5'b01110), "three turrets centred");
    fire(5'b00001);
    check(seen == staves(5'b00011), "edge bar: two turrets");
    check(evn == 16'd5, "event counter");
    // direct LUT entry
    @(negedge clk); lwe = 1; laddr = 5'd9; lwdata = 5'b10000; @(negedge clk); lwe = 0; #1;
    check(lrdata == 5'b10000, "LUT read-back");
    fire(5'd9);
    check(seen == staves(5'b10000), "LUT entry used");
    // inhibit
    inhibit = 1;
    fire(5'b00001);
    check(seen == 0 && lost == 16'd1 && evn == 16'd6, "inhibited trigger lost");
    inhibit = 0;
    // idle mode: hardware trigger ignored, software trigger served
    daq = 0;
    fire(5'b00001);
    check(seen == 0 && lost == 16'd1, "hardware trigger ignored in idle mode");
    @(negedge clk); sbars = 5'd9; strig = 1; @(negedge clk); strig = 0; #1;
    check(start == staves(5'b10000) && evs, "software trigger");
    // time stamp: prescale 4
    @(negedge clk); tsync = 1; repeat (4) @(negedge clk); tsync = 0;
    begin
      logic [31:0] t0;
      t0 = tnow; repeat (40) @(negedge clk);
      check(tnow - t0 == 32'd10, $sformatf("time stamp advances 1 per 4 clocks (%0d)", tnow - t0));
    end
    daq = 1;
    fire(5'b00010);
    check(evtime == tnow - 32'd1 || evtime == tnow || evtime == tnow - 32'd2, "time stamp latched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
