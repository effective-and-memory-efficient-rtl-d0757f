// tb_mset_voter: exhaustive self-checking test of the MSET majority voter.
// All 8 input combinations are applied; the expected vote is the value held
// by at least two inputs, counted by adding the inputs, and the mismatch flag
// must be set unless all three agree. A watchdog ends the run after 1000
// clock cycles.
module tb_mset_voter;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic a, b, c, v, m;
  int checks = 0, failures = 0;

  mset_voter dut (.orig_i(a), .copy1_i(b), .copy0_i(c), .voted_o(v), .mismatch_o(m));

  initial begin
    for (int i = 0; i < 8; i++) begin
      int ones;
      {a, b, c} = 3'(i);
      ones = int'(a) + int'(b) + int'(c);
      @(posedge clk);
      checks++;
      if (v !== (ones >= 2)) begin
        failures++;
        $display("FAIL vote in=%b%b%b got %b", a, b, c, v);
      end
      checks++;
      if (m !== (ones == 1 || ones == 2)) begin
        failures++;
        $display("FAIL mismatch in=%b%b%b got %b", a, b, c, m);
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
