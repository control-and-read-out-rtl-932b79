// tb_register_file: drives the link byte protocol and checks register reads
// and writes, the stave power registers, LUT access, sensor register
// commands through the stave-control port, a microcontroller task, DAQ/idle
// access rules, the event-packet window with its last flag, the packet
// counter behind data_ready, and the refusal codes.
// Setup: 10 ns clock; the bench plays the data processing unit on the
// byte interface and a stave controller and microcontroller on the other
// ports; outputs are sampled on the falling edge.  The register sections and
// the DAQ/idle access rules follow the source; addresses, codes and framing
// are this design's.
module tb_register_file;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic rxv, txv, txr, daq, pop, pktw, dready, busy, ofull, act, ferr, seu;
  logic [7:0] rxd, txd;
  logic [16:0] frd;
  logic fempty;
  logic [31:0] evc, lbusy, tnow;
  logic [15:0] lost;
  logic [14:0] pgood, dig, ana, bias, creq, cdone, cerr;
  logic lwe, lfill, cwe, mvalid, mdone, corr;
  logic [4:0] laddr, lwdata, lrdata;
  logic [1:0] lmode;
  logic [7:0] cchip, mcmd;
  logic [15:0] caddr, cwdata, mres;
  logic [15:0] crd [15];

  register_file dut (.clk_i(clk), .rst_ni(rst_n), .rx_valid_i(rxv), .rx_data_i(rxd), .tx_valid_o(txv),
    .tx_data_o(txd), .tx_ready_i(txr), .daq_mode_o(daq), .fifo_rdata_i(frd), .fifo_empty_i(fempty),
    .fifo_pop_o(pop), .pkt_written_i(pktw), .data_ready_o(dready), .busy_i(busy), .out_full_i(ofull),
    .evt_active_i(act), .fsm_err_i(ferr), .seu_i(seu), .evt_count_i(evc), .lost_i(lost),
    .last_busy_i(lbusy), .time_i(tnow), .pwr_good_i(pgood), .dig_pwr_en_o(dig), .ana_pwr_en_o(ana),
    .bias_en_o(bias), .lut_we_o(lwe), .lut_addr_o(laddr), .lut_wdata_o(lwdata), .lut_rdata_i(lrdata),
    .lut_fill_o(lfill), .lut_mode_o(lmode), .cfg_req_o(creq), .cfg_we_o(cwe), .cfg_chip_o(cchip),
    .cfg_addr_o(caddr), .cfg_wdata_o(cwdata), .cfg_done_i(cdone), .cfg_err_i(cerr), .cfg_rdata_i(crd),
    .mcu_cmd_valid_o(mvalid), .mcu_cmd_o(mcmd), .mcu_done_i(mdone), .mcu_result_i(mres),
    .upset_i(7'd0), .seu_corr_o(corr));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // LUT model and output FIFO model
  logic [4:0] lut [32];
  assign lrdata = lut[laddr];
  always @(posedge clk) if (lwe) lut[laddr] <= lwdata;
  logic [16:0] ofifo [$];
  assign fempty = (ofifo.size() == 0);
  assign frd = fempty ? 17'h0 : ofifo[0];
  always @(posedge clk) if (pop) void'(ofifo.pop_front());

  // stave control responder: done 5 cycles after a request
  int lut_fills = 0, mcu_cmds = 0;
  logic [7:0] last_mcmd;
  initial begin
    cdone = 0;
    forever begin
      @(posedge clk);
      if (creq != 0) begin
        logic [14:0] r; r = creq;
        repeat (5) @(posedge clk);
        #1 cdone = r; @(posedge clk); #1 cdone = 0;
      end
    end
  end
  always @(negedge clk) if (lfill) lut_fills++;
  always @(negedge clk) if (mvalid) begin mcu_cmds++; last_mcmd = mcmd; end

  logic [7:0] rx [$];
  always @(negedge clk) if (txv && txr) rx.push_back(txd);

  task automatic send_bytes(input logic [7:0] b [$]);
    foreach (b[i]) begin
      @(negedge clk); rxv = 1; rxd = b[i]; @(negedge clk); rxv = 0;
      repeat ($urandom % 3) @(negedge clk);
    end
  endtask
  task automatic wait_resp(input int n);
    int t; t = 0;
    while (rx.size() < n && t < 200) begin @(negedge clk); t++; end
  endtask
  task automatic rd(input logic [15:0] a, output logic [7:0] code, output logic [15:0] d);
    rx.delete();
    send_bytes('{8'h01, a[15:8], a[7:0]});
    wait_resp(1);
    if (rx.size() > 0 && rx[0] == 8'h81) wait_resp(3);
    code = rx.size() > 0 ? rx[0] : 8'h00;
    d = (rx.size() == 3) ? {rx[1], rx[2]} : 16'h0;
  endtask
  task automatic wr(input logic [15:0] a, input logic [15:0] v, output logic [7:0] code);
    rx.delete();
    send_bytes('{8'h02, a[15:8], a[7:0], v[15:8], v[7:0]});
    wait_resp(1);
    code = rx.size() > 0 ? rx[0] : 8'h00;
  endtask

  logic [7:0] c;
  logic [15:0] d;

  initial begin
    rxv = 0; rxd = 0; txr = 1; pktw = 0; busy = 1; ofull = 0; act = 0; ferr = 0; seu = 0;
    evc = 32'd77; lbusy = 32'd2800; tnow = 32'h0001_0203; lost = 16'd3; pgood = 15'h1234;
    cerr = 0; mdone = 0; mres = 0;
    foreach (crd[i]) crd[i] = 16'(i * 16'h1111);
    foreach (lut[i]) lut[i] = 5'h1F;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);

    rd(16'h0010, c, d); check(c == 8'h81 && d[15] == 0 && d[14] == 1, "status in idle");
    rd(16'h0015, c, d); check(d == 16'h1234, "power good");
    rd(16'h0016, c, d); check(d == 16'h0001, "time high");
    wr(16'h0030, 16'h7FFF, c); check(c == 8'h82 && dig == 15'h7FFF, "digital power enable");
    wr(16'h0031, 16'h0007, c); check(ana == 15'h0007, "analog power enable");
    wr(16'h0032, 16'h0003, c); check(bias == 15'h0003, "bias enable");
    rd(16'h0031, c, d); check(d == 16'h0007, "analog power read-back");
    wr(16'h0049, 16'h0004, c); check(lut[9] == 5'h04, "LUT write");
    rd(16'h0049, c, d); check(d == 16'h0004, "LUT read");
    wr(16'h0064, 16'h0002, c); wr(16'h0000, 16'h0005, c);
    check(lut_fills == 1 && lmode == 2'd2, $sformatf("LUT fill command %0d %0d %h", lut_fills, lmode, c));
    // sensor register write on stave 3
    wr(16'h0060, 16'h0003, c); wr(16'h0061, 16'h0008, c); wr(16'h0062, 16'h0200, c); wr(16'h0063, 16'h0002, c);
    fork
      wr(16'h0000, 16'h0003, c);
      begin
        @(posedge clk iff creq != 0);
        check(creq == 15'b1000 && cwe && cchip == 8'h08 && caddr == 16'h0200 && cwdata == 16'h0002, "register write request");
      end
    join
    repeat (10) @(negedge clk);
    rd(16'h0001, c, d); check(d[0] && !d[14] && !d[15], "register write command done");
    wr(16'h0000, 16'h0004, c); repeat (10) @(negedge clk);
    rd(16'h0002, c, d); check(d == 16'h3333, $sformatf("register read result %h", d));
    // microcontroller task
    wr(16'h0000, 16'h0013, c);
    check(mcu_cmds == 1 && last_mcmd == 8'h13, "MCU task started");
    rd(16'h0001, c, d); check(d[15], "command pending");
    @(negedge clk); mres = 16'hC0DE; mdone = 1; @(negedge clk); mdone = 0;
    rd(16'h0002, c, d); check(d == 16'hC0DE, "MCU result");
    wr(16'h0000, 16'h0077, c); rd(16'h0001, c, d); check(d[14], "unknown command flagged");
    // DAQ mode
    wr(16'h0000, 16'h0001, c); check(daq, "DAQ mode on");
    wr(16'h0030, 16'h0000, c); check(c == 8'hE2 && dig == 15'h7FFF, "write refused in DAQ mode");
    rd(16'h0049, c, d); check(c == 8'hE1, "LUT read refused in DAQ mode");
    wr(16'h0000, 16'h0005, c); check(c == 8'hE2 && lut_fills == 1, "command refused in DAQ mode");
    rd(16'h0011, c, d); check(c == 8'h81 && d == 16'd77, "event count readable");
    rd(16'h0013, c, d); check(d == 16'd2800, "last busy readable");
    // event packets: two packets of 3 and 2 words
    check(!dready, "no data ready");
    ofifo.push_back({1'b0, 16'hEB90}); ofifo.push_back({1'b0, 16'h0001}); ofifo.push_back({1'b1, 16'hAAAA});
    @(negedge clk); pktw = 1; @(negedge clk); pktw = 0;
    ofifo.push_back({1'b0, 16'hEB90}); ofifo.push_back({1'b1, 16'hBBBB});
    @(negedge clk); pktw = 1; @(negedge clk); pktw = 0;
    check(dready, "data ready");
    rd(16'h0014, c, d); check(d == 16'd2, "two packets pending");
    rd(16'h0020, c, d); check(d == 16'hEB90, "packet word 0");
    rd(16'h0020, c, d); check(d == 16'h0001, "packet word 1");
    rd(16'h0021, c, d); check(d[0] == 0, "not last");
    rd(16'h0020, c, d); check(d == 16'hAAAA, "packet word 2");
    rd(16'h0021, c, d); check(d[0] == 1, "last word flagged");
    rd(16'h0014, c, d); check(d == 16'd1, "one packet pending");
    rd(16'h0020, c, d); rd(16'h0020, c, d); check(d == 16'hBBBB && !dready, "second packet read");
    rd(16'h0021, c, d); check(d[15], "FIFO empty");
    wr(16'h0000, 16'h0002, c); check(c == 8'h82 && !daq, "stop DAQ");
    rx.delete(); send_bytes('{8'h55}); wait_resp(1); check(rx.size() == 1 && rx[0] == 8'hEE, "unknown opcode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
