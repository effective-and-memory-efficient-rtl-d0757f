// tb_mset_decoder: self-checking test of the MSET line decoder.
//
// Four instances cover 64- and 128-bit lines with FP16 and FP32 words. Random
// parameter lines are encoded by the reference model in zs_ref_pkg, random
// bit flips are injected (none, one, or several per line), and the decoder
// output and error flags are compared with the reference decoder. Without
// faults the output must also equal the original line with the bits the
// scheme gives up cleared. Single flips are placed in the protected bits to
// test the correction path explicitly. A watchdog ends the run after 100000
// clock cycles.
module tb_mset_decoder;
  import zs_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [63:0]  e64_16, e64_32, d64_16, d64_32;
  logic [127:0] e128_16, e128_32, d128_16, d128_32;
  logic [3:0] f64_16;  logic [1:0] f64_32;
  logic [7:0] f128_16; logic [3:0] f128_32;

  mset_decoder #(.LINE_W(64),  .DATA_W(16)) u0 (.enc_i(e64_16),  .dec_o(d64_16),  .err_o(f64_16));
  mset_decoder #(.LINE_W(64),  .DATA_W(32)) u1 (.enc_i(e64_32),  .dec_o(d64_32),  .err_o(f64_32));
  mset_decoder #(.LINE_W(128), .DATA_W(16)) u2 (.enc_i(e128_16), .dec_o(d128_16), .err_o(f128_16));
  mset_decoder #(.LINE_W(128), .DATA_W(32)) u3 (.enc_i(e128_32), .dec_o(d128_32), .err_o(f128_32));

  localparam bit CEP = 1'b0;

  // Flip nflips distinct-or-not random bits of the low lw bits.
  function automatic line_t inject(input line_t v, input int lw, input int nflips);
    line_t r = v;
    for (int i = 0; i < nflips; i++) r[$urandom_range(lw-1)] ^= 1'b1;
    return r;
  endfunction

  // Choose a protected bit for a single-flip test.
  function automatic int protected_bit(input int lw, input int dw);
    int w = $urandom_range(lw/dw - 1);
    if (CEP) return w*dw + $urandom_range(dw-1);  // every stored bit is covered
    case ($urandom_range(2))
      0: return w*dw + dw - 2;
      1: return w*dw + 1;
      default: return w*dw;
    endcase
  endfunction

  task automatic check_one(input int lw, input int dw, input line_t orig, input line_t enc,
                           input bit no_fault, input bit single_protected);
    line_t got, expd;
    logic [7:0]  mexp;
    logic [31:0] cexp;
    logic [31:0] gerr, eerr;
    unique case ({lw == 128, dw == 32})
      2'b00: e64_16  = enc[63:0];
      2'b01: e64_32  = enc[63:0];
      2'b10: e128_16 = enc;
      default: e128_32 = enc;
    endcase
    #1;
    unique case ({lw == 128, dw == 32})
      2'b00: begin got = 128'(d64_16);  gerr = 32'(f64_16);  end
      2'b01: begin got = 128'(d64_32);  gerr = 32'(f64_32);  end
      2'b10: begin got = d128_16;       gerr = 32'(f128_16); end
      default: begin got = d128_32;     gerr = 32'(f128_32); end
    endcase
    expd = dec_line(enc, lw, dw, CEP, mexp, cexp);
    eerr = CEP ? cexp : 32'(mexp);
    checks++;
    if (got !== expd) begin
      failures++;
      $display("FAIL data lw=%0d dw=%0d enc=%h got=%h exp=%h", lw, dw, enc, got, expd);
    end
    checks++;
    if (gerr !== eerr) begin
      failures++;
      $display("FAIL err lw=%0d dw=%0d enc=%h got=%h exp=%h", lw, dw, enc, gerr, eerr);
    end
    if (no_fault || (single_protected && !CEP)) begin
      // fault-free, or a single flip MSET must correct: exact truncated value
      checks++;
      if (got !== trunc_line(orig, lw, dw, CEP)) begin
        failures++;
        $display("FAIL round trip lw=%0d dw=%0d orig=%h got=%h", lw, dw, orig, got);
      end
    end
  endtask

  initial begin
    static int lws[2] = '{64, 128};
    static int dws[2] = '{16, 32};
    e64_16 = '0; e64_32 = '0; e128_16 = '0; e128_32 = '0;
    foreach (lws[i]) foreach (dws[j]) begin
      for (int n = 0; n < 400; n++) begin
        line_t orig, enc;
        int mode;
        orig = rand_line();
        for (int b = lws[i]; b < 128; b++) orig[b] = 1'b0;
        enc  = enc_line(orig, lws[i], dws[j], CEP);
        mode = n % 4;
        if (mode == 0)
          check_one(lws[i], dws[j], orig, enc, 1'b1, 1'b0);
        else if (mode == 1) begin
          enc[protected_bit(lws[i], dws[j])] ^= 1'b1;
          check_one(lws[i], dws[j], orig, enc, 1'b0, 1'b1);
        end else
          check_one(lws[i], dws[j], orig, inject(enc, lws[i], $urandom_range(8, 1)), 1'b0, 1'b0);
        @(posedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
