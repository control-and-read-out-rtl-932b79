// clb_char_io: character-level transmitter and receiver for one half-duplex
// Control Logic Bus (CLB) line of a stave.
//
// A character is a start bit (0), eight data bits least-significant first and
// a stop bit (1): ten bit times, one bit per system clock (40 Mbit/s at the
// 40 MHz system clock).  The transmitter accepts a byte when tx_ready_o is
// high and tx_valid_i is asserted, and drives the line (clb_oe_o = 1) for the
// ten bit times; hold_bus_i keeps the line driven idle-high between characters
// of one command.  The receiver, enabled by rx_en_i while the line is
// released, waits for a start bit, samples the next nine bits and pulses
// rx_valid_o with the byte if the stop bit is 1 (a bad stop bit pulses
// rx_frame_err_o instead).  Sampling is synchronous: it assumes the returning
// data are aligned with the system clock, as at this bit rate after the
// board's fixed delays are compensated.
// The paper gives the CLB as a 40 Mbit/s half-duplex serial line; the
// character framing here is this design's choice.
module clb_char_io (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       tx_valid_i,
  input  logic [7:0] tx_byte_i,
  output logic       tx_ready_o,
  input  logic       hold_bus_i,
  input  logic       rx_en_i,
  output logic       rx_valid_o,
  output logic [7:0] rx_byte_o,
  output logic       rx_frame_err_o,
  output logic       clb_o,
  output logic       clb_oe_o,
  input  logic       clb_i
);
  logic [9:0] tx_sh_q;
  logic [3:0] tx_cnt_q;   // bits left to send
  logic [7:0] rx_sh_q;
  logic [3:0] rx_cnt_q;   // bits left to receive (0 = hunting start bit)

  assign tx_ready_o = (tx_cnt_q <= 4'd1);   // next character follows the stop bit
  assign clb_o      = (tx_cnt_q != 4'd0) ? tx_sh_q[0] : 1'b1;
  assign clb_oe_o   = (tx_cnt_q != 4'd0) || hold_bus_i;

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      tx_sh_q  <= '1;
      tx_cnt_q <= '0;
    end else if (tx_ready_o && tx_valid_i) begin
      tx_sh_q  <= {1'b1, tx_byte_i, 1'b0};
      tx_cnt_q <= 4'd10;
    end else if (tx_cnt_q != 4'd0) begin
      tx_sh_q  <= {1'b1, tx_sh_q[9:1]};
      tx_cnt_q <= tx_cnt_q - 4'd1;
    end
  end

  always_ff @(posedge clk_i) begin
    rx_valid_o     <= 1'b0;
    rx_frame_err_o <= 1'b0;
    if (!rst_ni) begin
      rx_sh_q   <= '0;
      rx_cnt_q  <= '0;
      rx_byte_o <= '0;
    end else if (!rx_en_i || clb_oe_o) begin
      rx_cnt_q <= '0;
    end else if (rx_cnt_q == 4'd0) begin
      if (!clb_i) rx_cnt_q <= 4'd9;          // start bit seen
    end else begin
      if (rx_cnt_q != 4'd1) rx_sh_q <= {clb_i, rx_sh_q[7:1]};
      rx_cnt_q <= rx_cnt_q - 4'd1;
      if (rx_cnt_q == 4'd1) begin
        if (clb_i) begin
          rx_valid_o <= 1'b1;
          rx_byte_o  <= rx_sh_q;
        end else begin
          rx_frame_err_o <= 1'b1;
        end
      end
    end
  end
endmodule
