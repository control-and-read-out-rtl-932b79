// altai_master_model: behavioural model (not synthesizable) of one master
// pixel-sensor chip together with the four slave chips it serialises, as seen
// from its Control Logic Bus (CLB) line.  Used only by the test benches.
//
// Characters are start bit 0, 8 data bits LSB first, stop bit 1, one bit per
// clock, and are only seen while clk_en_i is high (the stave clock is gated).
// Commands understood:
//   OP_TRIGGER                    latch an event in every chip
//   OP_WRITE chip alo ahi dlo dhi write a register of chip CHIP_ID..CHIP_ID+4
//   OP_READ  chip alo ahi         answer chip, dlo, dhi after TURN clocks
// Register 0x0200 of a chip is its test-pulse cluster size (number of hit
// pixels it reports per event); other addresses 0x0000..0x00FF are plain
// storage.  Reading DATA_REG_ADDR pops the next word of the latched event:
// per chip either a chip-empty word or header, region header, one hit word
// per pixel and trailer; 16'hFFFF once the event is exhausted.
module altai_master_model #(
  parameter logic [7:0] CHIP_ID = 8'h00,
  parameter int unsigned TURN = 3
) (
  input  logic clk_i,
  input  logic clk_en_i,
  input  logic line_i,
  output logic line_o,
  output logic line_oe_o
);
  import tdaq_pkg::*;

  logic [15:0] regs [5][256];
  int unsigned cluster [5];
  logic [15:0] evt [$];
  logic [7:0]  bc = 8'd0;
  int unsigned n_trig = 0;
  int unsigned n_read = 0;

  initial begin
    line_o = 1'b1;
    line_oe_o = 1'b0;
    foreach (cluster[i]) cluster[i] = 0;
    foreach (regs[i, j]) regs[i][j] = 16'h0;
  end

  task automatic get_byte(output logic [7:0] b);
    // called after the start bit was seen
    for (int i = 0; i < 8; i++) begin
      @(posedge clk_i);
      b[i] = line_i;
    end
    @(posedge clk_i);  // stop bit
  endtask

  task automatic send_byte(input logic [7:0] b);
    logic [9:0] ch;
    ch = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      #1 line_o = ch[i];
      @(posedge clk_i);
    end
  endtask

  task automatic build_event();
    evt.delete();
    for (int c = 0; c < CHIPS_PER_MASTER; c++) begin
      if (cluster[c] == 0) begin
        evt.push_back({4'hE, 4'(CHIP_ID + 8'(c)), bc});
      end else begin
        evt.push_back({4'hA, 4'(CHIP_ID + 8'(c)), bc});
        evt.push_back({3'b110, 5'(c + 3), 8'h00});
        for (int p = 0; p < int'(cluster[c]); p++)
          evt.push_back({2'b01, 4'(p % 16), 10'(100 + p)});
        evt.push_back({4'hB, 4'h0, 8'h00});
      end
    end
    bc = bc + 8'd1;
  endtask

  function automatic bool_mine(input logic [7:0] chip);
    return (chip - CHIP_ID) < 8'(CHIPS_PER_MASTER);
  endfunction

  initial begin : proto
    logic [7:0] op, chip, alo, ahi, dlo, dhi;
    logic [15:0] addr, rd;
    forever begin
      @(posedge clk_i);
      if (clk_en_i && !line_i) begin
        get_byte(op);
        if (op == OP_TRIGGER) begin
          n_trig++;
          build_event();
        end else if (op == OP_WRITE || op == OP_READ) begin
          @(posedge clk_i); while (line_i || !clk_en_i) @(posedge clk_i); get_byte(chip);
          @(posedge clk_i); while (line_i || !clk_en_i) @(posedge clk_i); get_byte(alo);
          @(posedge clk_i); while (line_i || !clk_en_i) @(posedge clk_i); get_byte(ahi);
          addr = {ahi, alo};
          if (op == OP_WRITE) begin
            @(posedge clk_i); while (line_i || !clk_en_i) @(posedge clk_i); get_byte(dlo);
            @(posedge clk_i); while (line_i || !clk_en_i) @(posedge clk_i); get_byte(dhi);
            if (bool_mine(chip)) begin
              if (addr == 16'h0200) cluster[3'(chip - CHIP_ID)] = int'({dhi, dlo});
              else regs[3'(chip - CHIP_ID)][addr[7:0]] = {dhi, dlo};
            end
          end else if (bool_mine(chip)) begin
            if (addr == DATA_REG_ADDR) begin
              n_read++;
              rd = (evt.size() != 0) ? evt.pop_front() : WORD_NO_DATA;
            end else if (addr == 16'h0200) begin
              rd = 16'(cluster[3'(chip - CHIP_ID)]);
            end else begin
              rd = regs[3'(chip - CHIP_ID)][addr[7:0]];
            end
            repeat (TURN) @(posedge clk_i);
            #1 line_oe_o = 1'b1;
            send_byte(chip);
            send_byte(rd[7:0]);
            send_byte(rd[15:8]);
            #1 line_o = 1'b1;
            line_oe_o = 1'b0;
          end
        end
      end
    end
  end
endmodule
