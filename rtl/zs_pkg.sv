// zs_pkg: shared types and constants of the zero-space parameter-protection
// decoders (MSET and CEP).
//
// The decoders sit in the read-data path of a memory controller. Memory lines
// are LINE_W bits wide and hold LINE_W/DATA_W floating-point parameters, word 0
// in the least significant bits. The geometry constants below follow the
// method descriptions: MSET keeps two copies of the exponent MSB in the two
// mantissa LSBs; CEP cuts every word into 4-bit groups, each a 3-bit data chunk
// followed by its even-parity bit. The run-time mode encoding is a choice of
// this design.
package zs_pkg;

  // Default memory line width (64-bit line is the main case; 128 is also used).
  parameter int unsigned LINE_W_DEF = 64;

  // CEP geometry: 3 data bits + 1 even-parity bit per group.
  parameter int unsigned CEP_CHUNK_BITS = 3;
  parameter int unsigned CEP_GROUP_BITS = CEP_CHUNK_BITS + 1;

  // MSET: the exponent MSB sits just below the sign bit of an IEEE word.
  function automatic int unsigned mset_exp_msb(input int unsigned data_w);
    return data_w - 2;
  endfunction

  // Decoding scheme of the read path.
  typedef enum logic [1:0] {
    MODE_MSET_FP16 = 2'd0,
    MODE_MSET_FP32 = 2'd1,
    MODE_CEP_FP16  = 2'd2,
    MODE_CEP_FP32  = 2'd3
  } zs_mode_e;

endpackage
