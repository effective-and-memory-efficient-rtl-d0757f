// cep_decoder: Chunk-wise Embedded Parity (CEP) decoder for one memory line.
//
// A LINE_W-bit line holds LINE_W/DATA_W words, word 0 in the low bits. Each
// stored word is a run of 4-bit groups; group g (bits 4g+3..4g of the word)
// is {b2, b1, b0, p}, a 3-bit chunk and its even-parity bit. Offline, the top
// 3*DATA_W/4 bits of the original value were cut into these chunks, most
// significant chunk in the highest group, and the DATA_W/4 least significant
// bits were dropped to make room for the parity bits (for FP16: stored word
// 15 14 13 p3 12 11 10 p2 9 8 7 p1 6 5 4 p0).
//
// Every group is checked in parallel by a cep_chunk_decoder, which zeroes the
// chunk on a parity mismatch. The checked chunks are then moved back to their
// original places, chunk g to bits DATA_W/4+3g+2 .. DATA_W/4+3g, and the
// DATA_W/4 LSBs of the output are set to zero. All of this follows the paper.
// The chunk check is the same for every data type; only the final reordering
// depends on DATA_W, which is therefore a parameter. err_o (one bit per
// group, group index = line bit index / 4) is this design's addition.
//
// Interface: enc_i encoded line, dec_o decoded line, err_o per-chunk flags.
// Timing: purely combinational, one parity tree deep.
module cep_decoder #(
  parameter int unsigned LINE_W = 64,
  parameter int unsigned DATA_W = 16
) (
  input  logic [LINE_W-1:0]   enc_i,
  output logic [LINE_W-1:0]   dec_o,
  output logic [LINE_W/4-1:0] err_o
);
  localparam int unsigned NWORDS  = LINE_W / DATA_W;
  localparam int unsigned NGROUPS = DATA_W / zs_pkg::CEP_GROUP_BITS;  // per word
  localparam int unsigned NLSB    = NGROUPS;                          // dropped LSBs

  initial begin
    assert (LINE_W % DATA_W == 0) else $fatal(1, "LINE_W must hold whole words");
    assert (DATA_W % zs_pkg::CEP_GROUP_BITS == 0) else $fatal(1, "DATA_W must split into 4-bit groups");
  end

  for (genvar w = 0; w < NWORDS; w++) begin : g_word
    for (genvar g = 0; g < NGROUPS; g++) begin : g_grp
      logic [2:0] chunk;
      cep_chunk_decoder u_chunk (
        .grp_i  (enc_i[w*DATA_W + 4*g +: 4]),
        .chunk_o(chunk),
        .err_o  (err_o[w*NGROUPS + g])
      );
      assign dec_o[w*DATA_W + NLSB + 3*g +: 3] = chunk;
    end
    assign dec_o[w*DATA_W +: NLSB] = '0;
  end
endmodule
