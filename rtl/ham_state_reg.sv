// ham_state_reg: a 4-bit finite-state-machine state register kept in
// Hamming(7,4) code, so that a single upset bit in the stored code word is
// corrected on the next clock edge.
//
// The register stores ham74_enc(d_i) on every rising clock edge.  q_o is the
// decoded (corrected) value of the stored code word, so an FSM that computes
// its next state from q_o and feeds it back through d_i rewrites a corrected
// code word every cycle (continuous scrubbing).  corrected_o is high in a cycle
// where the stored word has a non-zero syndrome.  upset_i is XORed into the
// stored code word; it lets a test bench (or a fault-injection harness) flip
// bits and is tied to zero in the design.
// Reset loads the code word of RESET_VAL (synchronous,
// active-low rst_ni), matching the rest of the design.
// Using Hamming(7,4) for FSM state registers follows the paper; the scrub-every
// -cycle organisation and the upset port are this design's choices.
module ham_state_reg #(
  parameter logic [3:0] RESET_VAL = 4'd0
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic [3:0] d_i,
  input  logic [6:0] upset_i,
  output logic [3:0] q_o,
  output logic       corrected_o
);
  import tdaq_pkg::*;

  logic [6:0] code_q;

  always_ff @(posedge clk_i) begin
    if (!rst_ni) code_q <= ham74_enc(RESET_VAL);
    else         code_q <= ham74_enc(d_i) ^ upset_i;
  end

  assign q_o         = ham74_dec(code_q);
  assign corrected_o = (ham74_syndrome(code_q) != 3'd0);
endmodule
