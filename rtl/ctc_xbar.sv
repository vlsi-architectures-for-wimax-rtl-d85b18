// ctc_xbar: P x P crossbar switch between the SISOs and the memory banks of
// the parallel decoder.
//
// Three instances serve the decoder, as in the architecture: the address
// switch (radx) and the data switches for reading (rdata) and writing
// (wdata).  SISO k works on bank sel[k] = idx^k; because the interleaver is
// collision free the sel values form a permutation.
//   GATHER = 1: out[k] = in[sel[k]]            (bank data to SISO k)
//   GATHER = 0: out[sel[k]] = in[k]            (SISO data/address to bank)
// Purely combinational; DW is the word width.  The two modes as one
// parameterised module are this design's choice.
module ctc_xbar #(
  parameter int unsigned P      = 4,
  parameter int unsigned DW     = 24,
  parameter bit          GATHER = 1'b1
) (
  input  logic [DW-1:0]        din  [P],
  input  logic [$clog2(P)-1:0] sel  [P],
  output logic [DW-1:0]        dout [P]
);
  always_comb begin
    for (int k = 0; k < P; k++) dout[k] = '0;
    for (int k = 0; k < P; k++) begin
      if (GATHER) dout[k] = din[sel[k]];
      else        dout[sel[k]] = din[k];
    end
  end
endmodule
