// hit_decoder: turns event packets into pixel-hit records for the
// microcontroller, on the calibration path used in idle mode.
//
// It follows the packet layout of tdaq_pkg word by word: it skips the five
// header words, then reads stave blocks (a {4'hF, stave, count} header and
// count chip words) until a word without the 4'hF tag, which is the
// truncation word, followed by the CRC word (marked by last_i).  Inside a
// stave block it remembers the chip from each chip header and the region from
// each region header, and for every hit word emits one record
//   hit_o = {5'b0, stave[3:0], chip[3:0], column[9:0], row[8:0]}
// with column = 32*region + 2*encoder + (addr[1] xor addr[0]) and
// row = addr[9:1] (the double-column address convention of this sensor
// family).  At the CRC word it compares the CRC-16 of the packet with the
// received one and pulses pkt_done_o with crc_ok_o.
// The paper names the Decoder and its place between Packager and buffer; the
// decoding rules follow this design's packet and word formats.
module hit_decoder (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        valid_i,
  input  logic [15:0] data_i,
  input  logic        last_i,
  output logic        hit_valid_o,
  output logic [31:0] hit_o,
  output logic        pkt_done_o,
  output logic        crc_ok_o
);
  import tdaq_pkg::*;

  typedef enum logic [1:0] {D_HDR, D_BLOCK, D_DATA, D_TAIL} dstate_e;

  dstate_e     state_q;
  logic [2:0]  hdr_q;
  logic [7:0]  left_q;
  logic [3:0]  stave_q, chip_q;
  logic [4:0]  region_q;
  logic [15:0] crc_q;

  wire [9:0] addr = data_i[9:0];
  wire [9:0] col  = {region_q, data_i[13:10], addr[1] ^ addr[0]};
  wire [8:0] row  = addr[9:1];

  always_ff @(posedge clk_i) begin
    hit_valid_o <= 1'b0;
    pkt_done_o  <= 1'b0;
    if (!rst_ni) begin
      state_q  <= D_HDR;
      hdr_q    <= '0;
      left_q   <= '0;
      stave_q  <= '0;
      chip_q   <= '0;
      region_q <= '0;
      crc_q    <= 16'hFFFF;
      hit_o    <= '0;
      crc_ok_o <= 1'b0;
    end else if (valid_i) begin
      if (!last_i) crc_q <= crc16_word(crc_q, data_i);
      if (last_i) begin
        crc_ok_o   <= (crc_q == data_i);
        pkt_done_o <= 1'b1;
        crc_q      <= 16'hFFFF;
        state_q    <= D_HDR;
        hdr_q      <= '0;
      end else begin
        unique case (state_q)
          D_HDR: begin
            hdr_q <= hdr_q + 3'd1;
            if (hdr_q == 3'd4) state_q <= D_BLOCK;
          end
          D_BLOCK: begin
            if (data_i[15:12] == 4'hF) begin
              stave_q <= data_i[11:8];
              left_q  <= data_i[7:0];
              if (data_i[7:0] != 8'd0) state_q <= D_DATA;
            end else begin
              state_q <= D_TAIL;       // truncation word; the CRC follows
            end
          end
          D_DATA: begin
            left_q <= left_q - 8'd1;
            if (left_q == 8'd1) state_q <= D_BLOCK;
            if (data_i[15:12] == 4'hA || data_i[15:12] == 4'hE) chip_q <= data_i[11:8];
            else if (data_i[15:13] == 3'b110) region_q <= data_i[12:8];
            else if (is_hit(data_i)) begin
              hit_valid_o <= 1'b1;
              hit_o       <= {5'b0, stave_q, chip_q, col, row};
            end
          end
          default: ;
        endcase
      end
    end
  end
endmodule
