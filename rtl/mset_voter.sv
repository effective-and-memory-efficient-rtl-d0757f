// mset_voter: 2-out-of-3 majority vote for one MSET-protected bit.
//
// MSET stores the most significant exponent bit of a floating-point parameter
// three times: in place and as copies in the two mantissa LSBs. This voter
// takes the three copies and returns the value that at least two of them
// agree on, so a flip of any single copy is corrected. It also flags whether
// the copies disagreed, which the paper does not ask for; the flag is this
// design's addition for error reporting.
//
// Interface: three 1-bit copies in, voted bit and a disagreement flag out.
// Timing: purely combinational.
module mset_voter (
  input  logic orig_i,      // exponent MSB as stored in place
  input  logic copy1_i,     // copy in mantissa bit 1
  input  logic copy0_i,     // copy in mantissa bit 0
  output logic voted_o,     // majority value
  output logic mismatch_o   // the three copies were not all equal
);
  always_comb begin
    voted_o    = (orig_i & copy1_i) | (orig_i & copy0_i) | (copy1_i & copy0_i);
    mismatch_o = (orig_i != copy1_i) || (orig_i != copy0_i);
  end
endmodule
