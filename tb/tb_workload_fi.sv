// tb_workload_fi: parameter-memory fault-injection workload through the
// memory-controller read path, with 128-bit memory lines (the second line
// width the paper evaluates; the default 64-bit width is covered by
// tb_zs_mem_ctrl).
//
// Stands in for one layer of a DNN: NLINES memory lines of synthetic weights
// (sum of four uniform numbers, scaled to |w| < 1, so every weight has a clear
// exponent MSB) are generated in FP32 and FP16, encoded offline by the
// reference encoder for each of the four schemes, hit by random bit flips at
// the given bit error rate (BER_PPM flips per million stored bits) and
// streamed through zs_mem_ctrl. Every decoded line is checked against the
// reference decoder. The test also counts "blow-ups": weights that come out
// with magnitude >= 2 (exponent MSB set), the fault the paper identifies as
// most harmful. It compares the count in the raw faulty memory image with the
// count after decoding: with MSET or CEP, decoding must remove blow-ups
// (fewer after than before, and at least one before so the comparison
// means something). A watchdog ends the run after 400000 cycles.
module tb_workload_fi;
  import zs_pkg::*;
  import zs_ref_pkg::*;

  localparam int LW      = 128;
  localparam int NLINES  = 4096;
  localparam int BER_PPM = 2000;   // 2e-3

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  zs_mode_e          mode;
  logic              mem_rvalid, mem_rready;
  logic [LW-1:0]     mem_rdata;
  logic              acc_valid;
  logic [LW-1:0]     acc_data;
  zs_mode_e          acc_mode;
  logic [LW/16-1:0]  acc_mset_err;
  logic [LW/4-1:0]   acc_cep_err;

  zs_mem_ctrl #(.LINE_W(LW)) dut (
    .clk, .rst_n, .mode_i(mode),
    .mem_rvalid_i(mem_rvalid), .mem_rready_o(mem_rready), .mem_rdata_i(mem_rdata),
    .acc_valid_o(acc_valid), .acc_ready_i(1'b1), .acc_data_o(acc_data),
    .acc_mode_o(acc_mode), .acc_mset_err_o(acc_mset_err), .acc_cep_err_o(acc_cep_err)
  );

  int checks = 0, failures = 0;

  // A weight in (-1, 1): sum of four uniforms in [-0.25, 0.25).
  function automatic real rand_weight();
    real s = 0.0;
    for (int i = 0; i < 4; i++) s += (real'($urandom_range(65535)) / 65536.0 - 0.5) / 2.0;
    return s;
  endfunction

  // Double -> FP32 by truncation; tiny values flush to 0.
  function automatic logic [31:0] to_fp32(input real r);
    logic [63:0] d;
    int e;
    d = $realtobits(r);
    e = int'(d[62:52]) - 1023 + 127;
    if (e <= 0) return {d[63], 31'd0};
    return {d[63], 8'(e), d[51:29]};
  endfunction

  // FP32 -> FP16 by truncation; values below the FP16 normal range flush to 0.
  function automatic logic [15:0] to_fp16(input logic [31:0] f);
    int e;
    e = int'(f[30:23]) - 127 + 15;
    if (e <= 0) return {f[31], 15'd0};
    return {f[31], 5'(e), f[22:13]};
  endfunction

  // Exponent MSB of every word of a line (the blow-up bit).
  function automatic int blowups(input logic [LW-1:0] v, input int dw);
    int n = 0;
    for (int w = 0; w < LW/dw; w++) n += int'(v[w*dw + dw - 2]);
    return n;
  endfunction

  logic [LW-1:0] exp_q[$];

  always @(posedge clk) begin
    if (rst_n && acc_valid) begin
      logic [LW-1:0] e;
      checks++;
      e = exp_q.pop_front();
      if (acc_data !== e) begin
        failures++;
        $display("FAIL mode %s got %h exp %h", acc_mode.name(), acc_data, e);
      end
    end
  end

  initial begin
    rst_n      = 1'b0;
    mem_rvalid = 1'b0;
    mem_rdata  = '0;
    mode       = MODE_MSET_FP16;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    for (int mi = 0; mi < 4; mi++) begin
      zs_mode_e m;
      int dw, raw_blow, dec_blow, flips;
      bit cep;
      m   = zs_mode_e'(mi);
      dw  = (m == MODE_MSET_FP32 || m == MODE_CEP_FP32) ? 32 : 16;
      cep = (m == MODE_CEP_FP16 || m == MODE_CEP_FP32);
      raw_blow = 0;
      dec_blow = 0;
      flips    = 0;
      for (int l = 0; l < NLINES; l++) begin
        line_t orig, enc;
        logic [7:0]  me;
        logic [31:0] ce;
        logic [LW-1:0] dec;
        orig = '0;
        for (int w = 0; w < LW/dw; w++) begin
          logic [31:0] f;
          f = to_fp32(rand_weight());
          if (dw == 16) orig[w*16 +: 16] = to_fp16(f);
          else          orig[w*32 +: 32] = f;
        end
        enc = enc_line(orig, LW, dw, cep);
        for (int b = 0; b < LW; b++)
          if ($urandom_range(999999) < BER_PPM) begin
            enc[b] ^= 1'b1;
            orig[b] ^= 1'b1;   // the same flip in an unprotected copy
            flips++;
          end
        raw_blow += blowups(orig[LW-1:0], dw);
        dec = LW'(dec_line(enc, LW, dw, cep, me, ce));
        dec_blow += blowups(dec, dw);
        exp_q.push_back(dec);
        mode       <= m;
        mem_rvalid <= 1'b1;
        mem_rdata  <= enc[LW-1:0];
        @(posedge clk);
      end
      mem_rvalid <= 1'b0;
      wait (exp_q.size() == 0);
      @(posedge clk);
      $display("%-15s %0d lines, %0d bit flips: blow-ups unprotected %0d, decoded %0d",
               m.name(), NLINES, flips, raw_blow, dec_blow);
      checks++;
      if (raw_blow == 0 || dec_blow >= raw_blow) begin
        failures++;
        $display("FAIL %s did not reduce blow-ups", m.name());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
