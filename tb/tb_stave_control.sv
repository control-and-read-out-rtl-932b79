// tb_stave_control: self-checking test of one stave read-out controller with
// two behavioural master-chip models sharing its CLB line.
// Checks: register write/read over the CLB, a time-out on an absent chip,
// clock gating in DAQ mode, the exact word stream of an event, the cycle count
// of a read-out against a count worked out from the character timing,
// truncation on a full FIFO and on the read-out time-out, and correction of an
// injected state-register upset.
// Setup: 10 ns clock (one bus bit per clock); short delays (wake 4,
// strobe 20, time-out 1500) keep the run brief.  The read-out sequence and
// clock gating follow the source; bus framing and the chip model's answers are
// this design's assumptions about the sensor.
module tb_stave_control;
  import tdaq_pkg::*;

  localparam int unsigned WAKE = 4, STROBE = 20, TMO = 1500, TURN = 2, MTURN = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic daq_mode, start, busy, done, trunc, clk_en;
  logic clb_o, clb_oe, clb_i;
  logic push, fifo_full;
  logic [15:0] wdata;
  logic cfg_req, cfg_we, cfg_done, cfg_err;
  logic [7:0] cfg_chip;
  logic [15:0] cfg_addr, cfg_wdata, cfg_rdata;
  logic [6:0] upset;
  logic seu_corr, fsm_err;
  logic m0_o, m0_oe, m1_o, m1_oe;

  assign clb_i = clb_oe ? clb_o : m0_oe ? m0_o : m1_oe ? m1_o : 1'b1;

  stave_control #(.WAKE_CYCLES(WAKE), .STROBE_DELAY(STROBE), .READOUT_TIMEOUT(TMO),
                  .RESP_TIMEOUT(40), .TURN_CYCLES(TURN)) dut (
    .clk_i(clk), .rst_ni(rst_n), .daq_mode_i(daq_mode),
    .start_i(start), .busy_o(busy), .done_o(done), .truncated_o(trunc),
    .clk_en_o(clk_en), .clb_o, .clb_oe_o(clb_oe), .clb_i,
    .push_o(push), .wdata_o(wdata), .fifo_full_i(fifo_full),
    .cfg_req_i(cfg_req), .cfg_we_i(cfg_we), .cfg_chip_i(cfg_chip), .cfg_addr_i(cfg_addr),
    .cfg_wdata_i(cfg_wdata), .cfg_done_o(cfg_done), .cfg_err_o(cfg_err), .cfg_rdata_o(cfg_rdata),
    .upset_i(upset), .seu_corr_o(seu_corr), .fsm_err_o(fsm_err));

  altai_master_model #(.CHIP_ID(8'h00), .TURN(MTURN)) m0 (.clk_i(clk), .clk_en_i(clk_en), .line_i(clb_i), .line_o(m0_o), .line_oe_o(m0_oe));
  altai_master_model #(.CHIP_ID(8'h08), .TURN(MTURN)) m1 (.clk_i(clk), .clk_en_i(clk_en), .line_i(clb_i), .line_o(m1_o), .line_oe_o(m1_oe));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [15:0] got [$];
  always @(posedge clk) if (push) got.push_back(wdata);
  int corr_seen = 0;
  always @(posedge clk) if (seu_corr) corr_seen++;

  task automatic cfg(input bit we, input logic [7:0] chip, input logic [15:0] a, input logic [15:0] d);
    @(negedge clk);
    cfg_req = 1; cfg_we = we; cfg_chip = chip; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_req = 0;
    while (!cfg_done) @(negedge clk);
  endtask

  int cyc;
  task automatic run_event();
    got.delete();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
  endtask

  // expected cycles of one read command/answer: 4 characters out, the model's
  // turnaround plus start-bit detection, 3 characters back, one evaluation
  // cycle and the receiver's
  // one-cycle output register
  localparam int unsigned READ_CYC = 40 + 2 + MTURN + 30 + 1;

  initial begin
    daq_mode = 0; start = 0; fifo_full = 0; cfg_req = 0; cfg_we = 0;
    cfg_chip = 0; cfg_addr = 0; cfg_wdata = 0; upset = '0;
    repeat (4) @(negedge clk); rst_n = 1; @(negedge clk);

    // --- idle mode: clock on, register access ---
    check(clk_en == 1, "clock on in idle mode");
    cfg(1, 8'h00, 16'h0200, 16'd2);                   // cluster of 2 pixels on chip 0
    cfg(1, 8'h0A, 16'h0010, 16'hBEEF);
    cfg(0, 8'h0A, 16'h0010, 16'h0);
    check(cfg_rdata == 16'hBEEF && !cfg_err, $sformatf("register read-back %h", cfg_rdata));
    cfg(0, 8'h00, 16'h0200, 16'h0);
    check(cfg_rdata == 16'd2 && !cfg_err, "cluster register read-back");
    cfg(0, 8'h30, 16'h0010, 16'h0);
    check(cfg_err == 1, "absent chip gives a time-out error");

    // --- DAQ mode: gated clock, one event ---
    daq_mode = 1; @(negedge clk);
    check(clk_en == 0, "clock off in DAQ mode without trigger");
    fork
      run_event();
      begin repeat (10) @(negedge clk); check(clk_en == 1, "clock on during read-out"); end
    join
    check(clk_en == 0, "clock off after read-out");
    check(!trunc, "event not truncated");
    begin
      logic [15:0] exp [$];
      exp = '{16'hA000, 16'hC300, 16'h4064, 16'h4465, 16'hB000, 16'hE100, 16'hE200, 16'hE300, 16'hE400,
              16'hE800, 16'hE900, 16'hEA00, 16'hEB00, 16'hEC00};
      check(got.size() == exp.size(), $sformatf("word count %0d", got.size()));
      foreach (exp[i]) if (i < got.size()) check(got[i] == exp[i], $sformatf("word %0d %h exp %h", i, got[i], exp[i]));
    end
    // latency: start->wake->trigger char->strobe->14 reads->finish
    begin
      int exp_cyc;
      exp_cyc = 1 + (WAKE + 1) + 10 + (STROBE + 1) + 14 * READ_CYC + 1;
      check(cyc >= exp_cyc - 3 && cyc <= exp_cyc + 3, $sformatf("read-out cycles %0d, expected about %0d", cyc, exp_cyc));
    end
    check(m0.n_read == 9 && m1.n_read == 5, "reads per master");

    // --- SEU in the state register during read-out ---
    fork
      run_event();
      begin repeat (300) @(negedge clk); upset = 7'b0000100; @(negedge clk); upset = '0; end
    join
    check(corr_seen >= 1, "state upset detected and corrected");
    check(got.size() == 14 && !trunc && !fsm_err, "event intact after corrected upset");

    // --- FIFO full: truncation ---
    fifo_full = 1;
    run_event();
    check(trunc && got.size() == 0, "truncated on full FIFO");
    fifo_full = 0;

    // --- read-out time-out (200 us rule, shortened) ---
    daq_mode = 0; @(negedge clk);
    cfg(1, 8'h09, 16'h0200, 16'd40);
    daq_mode = 1;
    run_event();
    check(trunc, "truncated by read-out time-out");
    check(cyc <= TMO + READ_CYC + 4, $sformatf("time-out respected (%0d cycles)", cyc));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
