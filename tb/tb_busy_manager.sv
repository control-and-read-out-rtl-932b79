// tb_busy_manager: busy outside DAQ mode, busy from event start to event
// done, the busy-length counter, busy on hold and on a nearly full output
// FIFO, and the one-clock register delay of the busy line.
// Setup: 10 ns clock, no ports; the block runs with FREE_W 8 and
// MAX_PKT_WORDS 20 so the full-FIFO threshold is easy to reach.  Busy until
// the event is processed and busy while the output buffer is full follow the
// source; busy on hold and outside DAQ mode are this design's rules.
module tb_busy_manager;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic daq, st, dn, hold, busy, act, full;
  logic [7:0] freew;
  logic [31:0] len, cnt;
  int checks = 0, failures = 0;

  busy_manager #(.FREE_W(8), .MAX_PKT_WORDS(20)) dut (.clk_i(clk), .rst_ni(rst_n), .daq_mode_i(daq),
    .evt_start_i(st), .evt_done_i(dn), .hold_i(hold), .out_free_i(freew), .busy_o(busy),
    .evt_active_o(act), .full_o(full), .last_len_o(len), .evt_cnt_o(cnt));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    daq = 0; st = 0; dn = 0; hold = 0; freew = 100;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    check(busy, "busy in idle mode");
    daq = 1; @(negedge clk);
    check(!busy, "free in DAQ mode");
    st = 1; @(negedge clk); st = 0;
    check(busy && act, "busy after event start");
    repeat (9) @(negedge clk);
    check(busy, "busy during event");
    dn = 1; @(negedge clk); dn = 0;
    check(!busy && !act, "free after event done");
    check(len == 32'd11, $sformatf("busy length %0d", len));
    check(cnt == 32'd1, "event count");
    hold = 1; @(negedge clk); check(busy, "busy on hold"); hold = 0; @(negedge clk);
    check(!busy, "free after hold");
    freew = 19; #1; check(full, "full flag below one packet"); @(negedge clk);
    check(busy, "busy on full output FIFO");
    freew = 20; @(negedge clk); check(!busy && !full, "free with room for one packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
