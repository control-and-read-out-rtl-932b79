// mcu_buffer: the RAM buffer between the decoder and the microcontroller.
//
// Records written on wr_i are appended at a write pointer; the
// microcontroller reads any entry by address with one cycle of latency
// (rd_data_o valid the cycle after rd_en_i) and empties the buffer with
// clear_i.  Writes beyond DEPTH entries are dropped and set overflow_o until
// the next clear.  Every entry is stored as Hamming(7,4) code words, one per
// nibble, and corrected on read (rd_corr_o flags a corrected read).
// upset_en_i/upset_addr_i/upset_mask_i flip stored bits for fault-injection
// tests and are tied off in the design.
// The paper names an MCU-accessible RAM buffer fed by the decoder and states
// that the RAM buffers carry an error-correcting code similar to Hamming(7,4);
// depth, width and the append/clear organisation are this design's choices.
module mcu_buffer #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 32
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       wr_i,
  input  logic [WIDTH-1:0]           wdata_i,
  input  logic                       clear_i,
  input  logic                       rd_en_i,
  input  logic [$clog2(DEPTH)-1:0]   rd_addr_i,
  output logic [WIDTH-1:0]           rd_data_o,
  output logic                       rd_corr_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o,
  output logic                       overflow_o,
  input  logic                       upset_en_i,
  input  logic [$clog2(DEPTH)-1:0]   upset_addr_i,
  input  logic [(WIDTH/4)*7-1:0]     upset_mask_i
);
  import tdaq_pkg::*;

  localparam int unsigned NIB = WIDTH / 4;
  localparam int unsigned CW  = NIB * 7;

  logic [CW-1:0] mem [DEPTH];
  logic [CW-1:0] rd_code_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;

  wire do_wr = wr_i && !clear_i && (cnt_q != DEPTH[$clog2(DEPTH+1)-1:0]);

  always_ff @(posedge clk_i) begin
    if (do_wr) begin
      for (int n = 0; n < NIB; n++)
        mem[cnt_q[$clog2(DEPTH)-1:0]][n*7 +: 7] <= ham74_enc(wdata_i[n*4 +: 4]);
    end else if (upset_en_i) begin
      mem[upset_addr_i] <= mem[upset_addr_i] ^ upset_mask_i;
    end
  end

  always_ff @(posedge clk_i) begin
    if (!rst_ni)      rd_code_q <= '0;   // code word of an all-zero entry
    else if (rd_en_i) rd_code_q <= mem[rd_addr_i];
  end

  always_comb begin
    rd_corr_o = 1'b0;
    for (int n = 0; n < NIB; n++) begin
      rd_data_o[n*4 +: 4] = ham74_dec(rd_code_q[n*7 +: 7]);
      if (ham74_syndrome(rd_code_q[n*7 +: 7]) != 3'd0) rd_corr_o = 1'b1;
    end
  end

  always_ff @(posedge clk_i) begin
    if (!rst_ni || clear_i) begin
      cnt_q      <= '0;
      overflow_o <= 1'b0;
    end else if (do_wr) begin
      cnt_q <= cnt_q + 1'b1;
    end else if (wr_i) begin
      overflow_o <= 1'b1;
    end
  end
  assign count_o = cnt_q;
endmodule
