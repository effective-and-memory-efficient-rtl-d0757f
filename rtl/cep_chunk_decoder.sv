// cep_chunk_decoder: Chunk-wise Embedded Parity (CEP) check of one chunk.
//
// A CEP group is four stored bits {b2, b1, b0, p}: a 3-bit data chunk and its
// even-parity bit p = b2 ^ b1 ^ b0. The decoder recomputes the parity over all
// four bits; if it is odd (a mismatch) the three data bits are forced to zero,
// otherwise they pass unchanged. This is the per-chunk decoder of the paper.
// The err_o flag is this design's addition for error reporting.
//
// Interface: grp_i = {b2, b1, b0, p}, chunk_o = {b2, b1, b0} or 3'b000, err_o.
// Timing: purely combinational.
module cep_chunk_decoder (
  input  logic [3:0] grp_i,    // {b2, b1, b0, p}
  output logic [2:0] chunk_o,  // checked chunk
  output logic       err_o     // parity mismatch, chunk zeroed
);
  always_comb begin
    err_o   = ^grp_i;
    chunk_o = err_o ? 3'b000 : grp_i[3:1];
  end
endmodule
