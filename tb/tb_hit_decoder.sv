// tb_hit_decoder: random packets in the packet layout (header, stave blocks
// with chip headers, region headers, hit words, empty chips and trailers,
// truncation word, CRC) are fed in with random gaps; every hit must come out
// as the record computed here, in order, and the CRC verdict must be right
// for good packets and for packets with a corrupted CRC.
// Setup: 10 ns clock, packet words offered one per clock or with random idle
// clocks; the expected records and the CRC are computed in this bench from the
// packet layout and address mapping that this design defines.
module tb_hit_decoder;
  import tdaq_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic valid, last, hv, pdone, crcok;
  logic [15:0] data;
  logic [31:0] hit;
  int checks = 0, failures = 0;
  logic [31:0] got [$];

  hit_decoder dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(valid), .data_i(data), .last_i(last),
    .hit_valid_o(hv), .hit_o(hit), .pkt_done_o(pdone), .crc_ok_o(crcok));

  int n_done = 0;
  always @(posedge clk) if (hv) got.push_back(hit);
  always @(posedge clk) if (pdone) n_done++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input logic [15:0] w, input bit l);
    while (($urandom % 3) == 0) @(negedge clk);
    valid = 1; data = w; last = l; @(negedge clk); valid = 0; last = 0;
  endtask

  task automatic packet(input bit bad_crc);
    logic [15:0] pk [$];
    logic [31:0] exp [$];
    logic [15:0] crc;
    pk = '{PKT_SYNC, 16'd7, 16'h0001, 16'h0002, 16'h001F};
    for (int s = 0; s < 15; s++) if ($urandom % 2) begin
      logic [15:0] blk [$];
      for (int c = 0; c < 3; c++) begin
        if ($urandom % 2) blk.push_back({4'hE, 4'(c), 8'h00});
        else begin
          int reg_n;
          blk.push_back({4'hA, 4'(c), 8'h11});
          reg_n = $urandom % 32;
          blk.push_back({3'b110, 5'(reg_n), 8'h00});
          for (int p = 0, n = 1 + $urandom % 4; p < n; p++) begin
            logic [3:0] enc; logic [9:0] a;
            enc = 4'($urandom); a = 10'($urandom);
            blk.push_back({2'b01, enc, a});
            exp.push_back({5'b0, 4'(s), 4'(c), 10'(reg_n * 32 + int'(enc) * 2 + int'(a[1] ^ a[0])), a[9:1]});
          end
          blk.push_back({4'hB, 4'h0, 8'h00});
        end
      end
      pk.push_back({4'hF, 4'(s), 8'(blk.size())});
      foreach (blk[i]) pk.push_back(blk[i]);
    end
    pk.push_back(16'h0000);
    crc = 16'hFFFF;
    foreach (pk[i]) crc = crc16_word(crc, pk[i]);
    got.delete();
    n_done = 0;
    foreach (pk[i]) send(pk[i], 0);
    send(bad_crc ? ~crc : crc, 1);
    @(negedge clk);
    check(n_done == 1, "one packet-done pulse");
    check(crcok == !bad_crc, $sformatf("CRC verdict %0d for bad=%0d", crcok, bad_crc));
    check(got.size() == exp.size(), $sformatf("hit count %0d exp %0d", got.size(), exp.size()));
    foreach (exp[i]) if (i < got.size()) check(got[i] == exp[i], $sformatf("hit %0d %h exp %h", i, got[i], exp[i]));
  endtask

  initial begin
    valid = 0; last = 0; data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 20; i++) packet(i % 5 == 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
