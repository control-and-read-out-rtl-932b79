// tb_ecc_fifo: random pushes and pops against a queue model, fill to full and
// drain to empty, count tracking, and correction of an injected single-bit
// upset in every nibble of a stored word.
// Setup: 10 ns clock, a 16-bit, 8-deep instance, inputs changed on the
// falling edge, outputs sampled before the next rising edge.  The reference is
// a plain queue; the nibble-wise Hamming code being checked is this design's
// reading of the source's "similar error-correcting code".
module tb_ecc_fifo;
  localparam int W = 16, D = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic push, pop, empty, full, corr, uen;
  logic [W-1:0] wdata, rdata;
  logic [3:0] count;
  logic [2:0] uaddr;
  logic [27:0] umask;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];
  int npops = 0;   // the head address is the number of pops modulo the depth

  ecc_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk_i(clk), .rst_ni(rst_n), .push_i(push), .wdata_i(wdata),
    .pop_i(pop), .rdata_o(rdata), .empty_o(empty), .full_o(full), .count_o(count), .corr_o(corr),
    .upset_en_i(uen), .upset_addr_i(uaddr), .upset_mask_i(umask));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    push = 0; pop = 0; wdata = 0; uen = 0; uaddr = 0; umask = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    check(empty && !full && count == 0, "empty after reset");
    for (int i = 0; i < 400; i++) begin
      push = ($urandom % 2) == 1; pop = ($urandom % 2) == 1; wdata = W'($urandom);
      if (pop && model.size() > 0) check(rdata == model[0], $sformatf("head %h exp %h", rdata, model[0]));
      @(posedge clk);
      begin
        bit pp, po;
        pp = push && model.size() < D; po = pop && model.size() > 0;
        if (po) begin void'(model.pop_front()); npops++; end
        if (pp) model.push_back(wdata);
      end
      @(negedge clk);
      check(count == 4'(model.size()), "count");
      check(empty == (model.size() == 0) && full == (model.size() == D), "flags");
    end
    push = 0; pop = 0;
    while (!full) begin push = 1; wdata = W'($urandom); model.push_back(wdata); @(negedge clk); end
    push = 0;
    // flip one bit in each nibble of the head word
    uen = 1; uaddr = 3'(npops % D); umask = 28'b0000001_0000100_0010000_1000000; @(negedge clk); uen = 0;
    check(rdata == model[0], "upset head corrected");
    pop = 1; #1; check(corr, "correction flagged"); @(negedge clk); void'(model.pop_front());
    while (!empty) begin check(rdata == model[0], "drain"); void'(model.pop_front()); @(negedge clk); end
    pop = 0;
    check(model.size() == 0, "model drained too");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
