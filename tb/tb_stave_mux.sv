// tb_stave_mux: random inputs; the outputs must equal the selected input and
// the pop must reach only the selected FIFO.
// Setup: purely combinational, 300 random input sets at 15 inputs of 16
// bits.  The source only names the multiplexer; its select/pop interface is
// this design's.
module tb_stave_mux;
  logic [3:0] sel;
  logic [15:0] rdata [15];
  logic [14:0] empty, pop_o;
  logic [7:0] count [15];
  logic pop;
  logic [15:0] rd;
  logic e;
  logic [7:0] c;
  int checks = 0, failures = 0;

  stave_mux #(.N_IN(15), .WIDTH(16), .CW(8)) dut (.sel_i(sel), .rdata_i(rdata), .empty_i(empty),
    .count_i(count), .pop_o(pop_o), .pop_i(pop), .rdata_o(rd), .empty_o(e), .count_o(c));

  initial begin
    for (int n = 0; n < 300; n++) begin
      foreach (rdata[i]) begin rdata[i] = 16'($urandom); count[i] = 8'($urandom); end
      empty = 15'($urandom); sel = 4'($urandom % 15); pop = 1'($urandom);
      #1;
      checks++;
      if (rd != rdata[sel] || e != empty[sel] || c != count[sel] ||
          pop_o != (pop ? 15'(1) << sel : 15'd0)) begin
        failures++; $display("FAIL: sel %0d", sel);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
