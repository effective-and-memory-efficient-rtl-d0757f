// tb_cep_chunk_decoder: exhaustive self-checking test of the CEP per-chunk
// decoder. All 16 stored groups {b2,b1,b0,p} are applied. A group with an
// even number of ones must pass its three data bits; an odd one must give
// 3'b000 and raise err_o. A watchdog ends the run after 1000 clock cycles.
module tb_cep_chunk_decoder;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] grp;
  logic [2:0] chunk;
  logic       err;
  int checks = 0, failures = 0;

  cep_chunk_decoder dut (.grp_i(grp), .chunk_o(chunk), .err_o(err));

  initial begin
    for (int i = 0; i < 16; i++) begin
      int ones;
      logic [2:0] exp_chunk;
      grp  = 4'(i);
      ones = 0;
      for (int k = 0; k < 4; k++) ones += int'(grp[k]);
      exp_chunk = (ones % 2 == 0) ? {grp[3], grp[2], grp[1]} : 3'b000;
      @(posedge clk);
      checks++;
      if (chunk !== exp_chunk) begin
        failures++;
        $display("FAIL chunk grp=%b got %b exp %b", grp, chunk, exp_chunk);
      end
      checks++;
      if (err !== (ones % 2 == 1)) begin
        failures++;
        $display("FAIL err grp=%b got %b", grp, err);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
