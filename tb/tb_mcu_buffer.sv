// tb_mcu_buffer: append records, read them back by address with one cycle of
// latency, correct injected single-bit upsets (one per nibble), drop and flag
// writes beyond the depth, and clear.
// Setup: 10 ns clock, a 16-entry instance so that overflow is reached
// quickly; read data are checked one clock after the read strobe.  The ECC
// follows the source's statement that buffers are protected; the code and
// the buffer's interface are this design's.
module tb_mcu_buffer;
  localparam int D = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic wr, clr, rd, corr, ovf, uen;
  logic [31:0] wdata, rdata;
  logic [3:0] raddr, uaddr;
  logic [4:0] count;
  logic [55:0] umask;
  logic [31:0] model [D];
  int checks = 0, failures = 0;

  mcu_buffer #(.DEPTH(D), .WIDTH(32)) dut (.clk_i(clk), .rst_ni(rst_n), .wr_i(wr), .wdata_i(wdata),
    .clear_i(clr), .rd_en_i(rd), .rd_addr_i(raddr), .rd_data_o(rdata), .rd_corr_o(corr),
    .count_o(count), .overflow_o(ovf), .upset_en_i(uen), .upset_addr_i(uaddr), .upset_mask_i(umask));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    wr = 0; clr = 0; rd = 0; wdata = 0; raddr = 0; uen = 0; uaddr = 0; umask = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int i = 0; i < D; i++) begin wr = 1; wdata = $urandom; model[i] = wdata; @(negedge clk); end
    check(count == 5'(D) && !ovf, "full count");
    wdata = 32'h12345678; @(negedge clk); wr = 0;
    check(count == 5'(D) && ovf, "overflow flagged, write dropped");
    for (int i = 0; i < D; i++) begin
      rd = 1; raddr = 4'(i); @(negedge clk); rd = 0;
      check(rdata == model[i] && !corr, $sformatf("read %0d", i));
    end
    for (int i = 0; i < D; i++) begin
      uen = 1; uaddr = 4'(i);
      for (int n = 0; n < 8; n++) umask[n*7 +: 7] = 7'(1 << ($urandom % 7));
      @(negedge clk); uen = 0;
      rd = 1; raddr = 4'(i); @(negedge clk); rd = 0;
      check(rdata == model[i] && corr, $sformatf("corrected read %0d", i));
    end
    clr = 1; @(negedge clk); clr = 0;
    check(count == 0 && !ovf, "cleared");
    wr = 1; wdata = 32'hA5A5_0F0F; @(negedge clk); wr = 0;
    rd = 1; raddr = 0; @(negedge clk); rd = 0;
    check(rdata == 32'hA5A5_0F0F && count == 1, "write after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
