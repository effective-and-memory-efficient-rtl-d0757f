// mset_decoder: Most Significant Exponent Triplication (MSET) decoder for one
// memory line.
//
// A LINE_W-bit line holds LINE_W/DATA_W IEEE floating-point parameters (FP16
// with DATA_W=16, FP32 with DATA_W=32), word 0 in bits [DATA_W-1:0]. Offline,
// each word's exponent MSB (bit DATA_W-2) was copied into its two mantissa
// LSBs (bits 1 and 0). For every word in parallel this decoder votes the three
// copies with mset_voter, writes the majority back into bit DATA_W-2 and
// clears bits 1 and 0; all other bits pass unchanged. This follows the paper.
// The per-word disagreement flag (err_o) is this design's addition.
//
// Interface: enc_i encoded line, dec_o decoded line, err_o one bit per word.
// Timing: purely combinational, one voter deep.
module mset_decoder #(
  parameter int unsigned LINE_W = 64,
  parameter int unsigned DATA_W = 16
) (
  input  logic [LINE_W-1:0]        enc_i,
  output logic [LINE_W-1:0]        dec_o,
  output logic [LINE_W/DATA_W-1:0] err_o
);
  localparam int unsigned NWORDS = LINE_W / DATA_W;
  localparam int unsigned EMSB   = zs_pkg::mset_exp_msb(DATA_W);

  initial begin
    assert (LINE_W % DATA_W == 0) else $fatal(1, "LINE_W must hold whole words");
    assert (DATA_W == 16 || DATA_W == 32) else $fatal(1, "MSET is defined for FP16 and FP32");
  end

  for (genvar w = 0; w < NWORDS; w++) begin : g_word
    logic [DATA_W-1:0] word, fixed;
    logic              voted;

    assign word = enc_i[w*DATA_W +: DATA_W];

    mset_voter u_voter (
      .orig_i    (word[EMSB]),
      .copy1_i   (word[1]),
      .copy0_i   (word[0]),
      .voted_o   (voted),
      .mismatch_o(err_o[w])
    );

    always_comb begin
      fixed       = word;
      fixed[EMSB] = voted;
      fixed[1:0]  = 2'b00;
    end

    assign dec_o[w*DATA_W +: DATA_W] = fixed;
  end
endmodule
