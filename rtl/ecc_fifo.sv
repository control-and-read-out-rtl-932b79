// ecc_fifo: single-clock first-in first-out buffer whose storage is protected
// by Hamming(7,4) code, one code word per data nibble.
//
// Each WIDTH-bit word is split into ceil(WIDTH/4) nibbles, each nibble stored
// as a 7-bit code word; on read every nibble is corrected, so any single bit
// upset per nibble is invisible at the output.  corr_o pulses when a corrected
// word is popped.  The head word is shown on rdata_o while empty_o is low
// (first-word fall-through); pop_i consumes it.  push_i while full_o is high
// and pop_i while empty_o is high are ignored.  count_o gives the fill level.
// upset_addr_i/upset_mask_i XOR a mask into one stored code-word row on a
// push-free cycle when upset_en_i is high; they exist for fault-injection
// tests and are tied off in the design.
// The paper states only that FIFO buffers carry an error-correcting code
// similar to Hamming(7,4); nibble-wise Hamming(7,4) and the depths used are
// this design's choices.
module ecc_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 128
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     push_i,
  input  logic [WIDTH-1:0]         wdata_i,
  input  logic                     pop_i,
  output logic [WIDTH-1:0]         rdata_o,
  output logic                     empty_o,
  output logic                     full_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o,
  output logic                     corr_o,
  input  logic                     upset_en_i,
  input  logic [$clog2(DEPTH)-1:0] upset_addr_i,
  input  logic [((WIDTH+3)/4)*7-1:0] upset_mask_i
);
  import tdaq_pkg::*;

  localparam int unsigned NIB = (WIDTH + 3) / 4;
  localparam int unsigned CW  = NIB * 7;
  localparam int unsigned AW  = $clog2(DEPTH);

  logic [CW-1:0] mem [DEPTH];
  logic [AW-1:0] wptr_q, rptr_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;
  logic do_push, do_pop;

  assign do_push = push_i && (cnt_q != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign do_pop  = pop_i && (cnt_q != '0);

  function automatic logic [CW-1:0] encode(input logic [WIDTH-1:0] d);
    logic [NIB*4-1:0] dd;
    logic [CW-1:0] c;
    dd = (NIB*4)'(d);
    for (int n = 0; n < NIB; n++) c[n*7 +: 7] = ham74_enc(dd[n*4 +: 4]);
    return c;
  endfunction

  logic [CW-1:0]    head_code;
  logic [NIB*4-1:0] head_data;
  logic             head_err;

  assign head_code = mem[rptr_q];
  always_comb begin
    head_err = 1'b0;
    for (int n = 0; n < NIB; n++) begin
      head_data[n*4 +: 4] = ham74_dec(head_code[n*7 +: 7]);
      if (ham74_syndrome(head_code[n*7 +: 7]) != 3'd0) head_err = 1'b1;
    end
  end

  always_ff @(posedge clk_i) begin
    if (do_push) mem[wptr_q] <= encode(wdata_i);
    else if (upset_en_i) mem[upset_addr_i] <= mem[upset_addr_i] ^ upset_mask_i;
  end

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      wptr_q <= '0;
      rptr_q <= '0;
      cnt_q  <= '0;
    end else begin
      if (do_push) wptr_q <= (wptr_q == AW'(DEPTH - 1)) ? '0 : wptr_q + 1'b1;
      if (do_pop)  rptr_q <= (rptr_q == AW'(DEPTH - 1)) ? '0 : rptr_q + 1'b1;
      if (do_push && !do_pop) cnt_q <= cnt_q + 1'b1;
      else if (do_pop && !do_push) cnt_q <= cnt_q - 1'b1;
    end
  end

  assign rdata_o = head_data[WIDTH-1:0];
  assign empty_o = (cnt_q == '0);
  assign full_o  = (cnt_q == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign count_o = cnt_q;
  assign corr_o  = do_pop && head_err;
endmodule
