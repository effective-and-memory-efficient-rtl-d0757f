// zs_ref_pkg: reference model of MSET and CEP encoding and decoding for the
// testbenches.
//
// Written independently of the RTL, word by word and bit by bit, from the
// method definitions:
//   MSET: exponent MSB of an FP16/FP32 word is bit dw-2; the encoder copies
//         it into bits 1 and 0; the decoder takes the majority of the three,
//         writes it to bit dw-2 and clears bits 1 and 0.
//   CEP : the top 3*dw/4 bits of a word form dw/4 chunks of 3 bits; chunk k is
//         original bits dw/4+3k+2 .. dw/4+3k and is stored in bits 4k+3..4k+1
//         with its even parity in bit 4k. The decoder zeroes a chunk whose
//         4 stored bits have odd parity, puts chunks back and clears the dw/4
//         LSBs.
// Lines are up to 128 bits wide, word 0 in the low bits.
package zs_ref_pkg;

  typedef logic [127:0] line_t;

  function automatic logic [31:0] mset_enc_word(input logic [31:0] v, input int dw);
    logic [31:0] r;
    r    = v;
    r[1] = v[dw-2];
    r[0] = v[dw-2];
    return r;
  endfunction

  function automatic logic [31:0] mset_dec_word(input logic [31:0] v, input int dw);
    logic [31:0] r;
    int ones;
    ones = int'(v[dw-2]) + int'(v[1]) + int'(v[0]);
    r = v;
    r[dw-2] = (ones >= 2);
    r[1] = 1'b0;
    r[0] = 1'b0;
    return r;
  endfunction

  function automatic logic mset_word_err(input logic [31:0] v, input int dw);
    int ones;
    ones = int'(v[dw-2]) + int'(v[1]) + int'(v[0]);
    return (ones == 1) || (ones == 2);
  endfunction

  function automatic logic [31:0] cep_enc_word(input logic [31:0] v, input int dw);
    logic [31:0] r;
    int n;
    n = dw / 4;
    r = '0;
    for (int k = 0; k < n; k++) begin
      logic [2:0] c;
      for (int i = 0; i < 3; i++) c[i] = v[n + 3*k + i];
      r[4*k+3] = c[2];
      r[4*k+2] = c[1];
      r[4*k+1] = c[0];
      r[4*k]   = c[2] ^ c[1] ^ c[0];
    end
    return r;
  endfunction

  function automatic logic [31:0] cep_dec_word(input logic [31:0] v, input int dw,
                                               output logic [7:0] errs);
    logic [31:0] r;
    int n, ones;
    n = dw / 4;
    r = '0;
    errs = '0;
    for (int k = 0; k < n; k++) begin
      ones = 0;
      for (int i = 0; i < 4; i++) ones += int'(v[4*k+i]);
      errs[k] = (ones % 2) == 1;
      if (!errs[k]) begin
        r[n + 3*k + 2] = v[4*k+3];
        r[n + 3*k + 1] = v[4*k+2];
        r[n + 3*k]     = v[4*k+1];
      end
    end
    return r;
  endfunction

  // Whole-line helpers. enc: 0 = MSET, 1 = CEP.
  function automatic line_t enc_line(input line_t v, input int lw, input int dw, input bit cep);
    line_t r;
    r = '0;
    for (int w = 0; w < lw/dw; w++) begin
      logic [31:0] x;
      for (int i = 0; i < dw; i++) x[i] = v[w*dw+i];
      x = cep ? cep_enc_word(x, dw) : mset_enc_word(x, dw);
      for (int i = 0; i < dw; i++) r[w*dw+i] = x[i];
    end
    return r;
  endfunction

  // Decoded line, MSET per-word error mask and CEP per-group error mask.
  function automatic line_t dec_line(input line_t v, input int lw, input int dw, input bit cep,
                                     output logic [7:0] mset_err, output logic [31:0] cep_err);
    line_t r;
    r = '0;
    mset_err = '0;
    cep_err  = '0;
    for (int w = 0; w < lw/dw; w++) begin
      logic [31:0] x;
      logic [7:0]  e;
      x = '0;
      for (int i = 0; i < dw; i++) x[i] = v[w*dw+i];
      if (cep) begin
        x = cep_dec_word(x, dw, e);
        for (int k = 0; k < dw/4; k++) cep_err[w*(dw/4)+k] = e[k];
      end else begin
        mset_err[w] = mset_word_err(x, dw);
        x = mset_dec_word(x, dw);
      end
      for (int i = 0; i < dw; i++) r[w*dw+i] = x[i];
    end
    return r;
  endfunction

  // What a fault-free round trip must give: the original with the bits the
  // scheme gives up cleared (MSET: bits 1,0; CEP: the dw/4 LSBs).
  function automatic line_t trunc_line(input line_t v, input int lw, input int dw, input bit cep);
    line_t r;
    r = v;
    for (int w = 0; w < lw/dw; w++) begin
      if (cep) for (int i = 0; i < dw/4; i++) r[w*dw+i] = 1'b0;
      else begin r[w*dw+1] = 1'b0; r[w*dw] = 1'b0; end
    end
    for (int i = lw; i < 128; i++) r[i] = 1'b0;
    return r;
  endfunction

  function automatic line_t rand_line();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

endpackage
