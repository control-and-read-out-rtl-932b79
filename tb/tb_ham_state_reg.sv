// tb_ham_state_reg: every 4-bit value is stored, every single code bit is
// flipped in turn, and the register must still read the value, flag the
// correction, and hold a clean code word after the next clock (scrubbing).
// Setup: 10 ns clock, reset value 9, upsets applied through upset_i for one
// clock.  The Hamming(7,4) state encoding is the source's; the bit order of
// the code word is the textbook one.
module tb_ham_state_reg;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [3:0] d, q;
  logic [6:0] upset;
  logic corr;
  int checks = 0, failures = 0;

  ham_state_reg #(.RESET_VAL(4'd9)) dut (.clk_i(clk), .rst_ni(rst_n), .d_i(d), .upset_i(upset), .q_o(q), .corrected_o(corr));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    d = 0; upset = 0;
    @(negedge clk); @(negedge clk);
    check(q == 4'd9 && !corr, "reset value");
    rst_n = 1;
    for (int v = 0; v < 16; v++) begin
      d = 4'(v); upset = 0; @(negedge clk);
      check(q == 4'(v) && !corr, $sformatf("store %0d", v));
      for (int b = 0; b < 7; b++) begin
        upset = 7'(1 << b); @(negedge clk);
        check(q == 4'(v), $sformatf("value %0d bit %0d corrected (got %0d)", v, b, q));
        check(corr, $sformatf("value %0d bit %0d flagged", v, b));
        upset = 0; @(negedge clk);
        check(!corr && q == 4'(v), "scrubbed");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
