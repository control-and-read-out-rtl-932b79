// stave_mux: the multiplexer between the stave FIFOs and the Packager.
//
// sel_i chooses one of N_IN FIFOs.  The selected FIFO's head word, empty flag
// and fill level are presented to the Packager; the Packager's pop is routed
// back to the selected FIFO only.  Purely combinational: no added latency.
// The paper shows this multiplexer as a block between the FIFOs and the
// Packager; its select-and-return-pop structure is this design's choice.
module stave_mux #(
  parameter int unsigned N_IN  = 15,
  parameter int unsigned WIDTH = 16,
  parameter int unsigned CW    = 8
) (
  input  logic [$clog2(N_IN)-1:0] sel_i,
  input  logic [WIDTH-1:0]        rdata_i [N_IN],
  input  logic [N_IN-1:0]         empty_i,
  input  logic [CW-1:0]           count_i [N_IN],
  output logic [N_IN-1:0]         pop_o,
  input  logic                    pop_i,
  output logic [WIDTH-1:0]        rdata_o,
  output logic                    empty_o,
  output logic [CW-1:0]           count_o
);
  always_comb begin
    rdata_o = '0;
    empty_o = 1'b1;
    count_o = '0;
    pop_o   = '0;
    for (int i = 0; i < N_IN; i++) begin
      if (sel_i == ($clog2(N_IN))'(i)) begin
        rdata_o  = rdata_i[i];
        empty_o  = empty_i[i];
        count_o  = count_i[i];
        pop_o[i] = pop_i;
      end
    end
  end
endmodule
