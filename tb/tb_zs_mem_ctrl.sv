// tb_zs_mem_ctrl: end-to-end self-checking test of the memory-controller read
// path, at the default 64-bit line width.
//
// A memory model feeds encoded parameter lines; each line gets a random
// scheme (MSET or CEP, FP16 or FP32), random parameter bits, and 0 to 3
// random bit flips standing in for soft errors in memory. The accelerator
// side takes lines with a random ready signal. Each line delivered to the
// accelerator is compared with the reference decoder of zs_ref_pkg (data,
// mode, error flags), and in order.
//
// Phase 1 streams lines with valid and ready held high and checks the timing:
// each line appears one cycle after it is accepted, one line per cycle.
// Phase 2 randomises both handshakes. The test counts how often each
// mechanism happened and fails if one never did: MSET vote corrections,
// CEP chunk zeroing, mode switches, accelerator stalls (output held while
// the accelerator is not ready) and memory back-pressure (line offered while
// mem_rready_o is low). A watchdog ends the run after 200000 cycles.
module tb_zs_mem_ctrl;
  import zs_pkg::*;
  import zs_ref_pkg::*;

  localparam int LW     = 64;
  localparam int N1     = 64;     // phase 1 lines
  localparam int N2     = 4000;   // phase 2 lines

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  zs_mode_e          mode;
  logic              mem_rvalid, mem_rready;
  logic [LW-1:0]     mem_rdata;
  logic              acc_valid, acc_ready;
  logic [LW-1:0]     acc_data;
  zs_mode_e          acc_mode;
  logic [LW/16-1:0]  acc_mset_err;
  logic [LW/4-1:0]   acc_cep_err;

  zs_mem_ctrl dut (
    .clk, .rst_n, .mode_i(mode),
    .mem_rvalid_i(mem_rvalid), .mem_rready_o(mem_rready), .mem_rdata_i(mem_rdata),
    .acc_valid_o(acc_valid), .acc_ready_i(acc_ready), .acc_data_o(acc_data),
    .acc_mode_o(acc_mode), .acc_mset_err_o(acc_mset_err), .acc_cep_err_o(acc_cep_err)
  );

  typedef struct {
    logic [LW-1:0]    data;
    zs_mode_e         mode;
    logic [LW/16-1:0] mset_err;
    logic [LW/4-1:0]  cep_err;
    logic [LW-1:0]    clean;     // fault-free decode
    longint           t_acc;     // cycle the line was accepted
  } exp_t;

  exp_t   q[$];
  int     checks = 0, failures = 0;
  longint cyc = 0;
  bit     phase1 = 1'b1;
  int     n_out = 0;
  longint t_first_acc = -1, t_last_out = 0;
  int     cnt_mset_fix = 0, cnt_cep_zero = 0, cnt_mode_sw = 0, cnt_stall = 0, cnt_bp = 0;
  zs_mode_e last_mode = MODE_MSET_FP16;
  bit     have_last = 1'b0;

  always @(posedge clk) cyc <= cyc + 1;

  // Build one line for the memory model and its expected result.
  function automatic exp_t make_line(input zs_mode_e m, input int nflips,
                                     output logic [LW-1:0] enc_o);
    exp_t e;
    line_t orig, enc;
    logic [7:0]  me;
    logic [31:0] ce;
    int dw;
    bit cep;
    dw   = (m == MODE_MSET_FP32 || m == MODE_CEP_FP32) ? 32 : 16;
    cep  = (m == MODE_CEP_FP16 || m == MODE_CEP_FP32);
    orig = rand_line();
    orig[127:LW] = '0;
    enc  = enc_line(orig, LW, dw, cep);
    e.clean = LW'(trunc_line(orig, LW, dw, cep));
    for (int i = 0; i < nflips; i++) enc[$urandom_range(LW-1)] ^= 1'b1;
    e.data     = LW'(dec_line(enc, LW, dw, cep, me, ce));
    e.mode     = m;
    e.mset_err = (LW/16)'(me);
    e.cep_err  = (LW/4)'(ce);
    e.t_acc    = 0;
    enc_o      = enc[LW-1:0];
    return e;
  endfunction

  // Memory-side driver: offer a line, hold it until accepted.
  task automatic send(input zs_mode_e m, input int nflips, input int valid_pct);
    exp_t e;
    logic [LW-1:0] enc;
    e = make_line(m, nflips, enc);
    while ($urandom_range(99) >= valid_pct) begin
      mem_rvalid <= 1'b0;
      @(posedge clk);
    end
    mem_rvalid <= 1'b1;
    mem_rdata  <= enc;
    mode       <= m;
    @(posedge clk);
    while (!mem_rready) begin
      cnt_bp++;
      @(posedge clk);
    end
    e.t_acc = cyc;
    q.push_back(e);
  endtask

  // Accelerator-side monitor and checker.
  always @(posedge clk) begin
    if (rst_n && acc_valid && !acc_ready) cnt_stall++;
    if (rst_n && acc_valid && acc_ready) begin
      exp_t e;
      n_out++;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL output with nothing expected at cycle %0d", cyc);
      end else begin
        e = q.pop_front();
        checks++;
        if (acc_data !== e.data || acc_mode !== e.mode ||
            acc_mset_err !== e.mset_err || acc_cep_err !== e.cep_err) begin
          failures++;
          $display("FAIL line %0d mode %s data %h exp %h mset %b/%b cep %h/%h", n_out,
                   e.mode.name(), acc_data, e.data, acc_mset_err, e.mset_err, acc_cep_err, e.cep_err);
        end
        if (phase1) begin
          if (t_first_acc < 0) t_first_acc = e.t_acc;
          t_last_out = cyc;
          checks++;
          if (cyc - e.t_acc != 1) begin
            failures++;
            $display("FAIL latency %0d cycles, expected 1", cyc - e.t_acc);
          end
        end
        if (have_last && e.mode != last_mode) cnt_mode_sw++;
        last_mode = e.mode;
        have_last = 1'b1;
        if ((e.mode == MODE_MSET_FP16 || e.mode == MODE_MSET_FP32) && e.mset_err != 0 &&
            acc_data === e.clean) cnt_mset_fix++;
        if ((e.mode == MODE_CEP_FP16 || e.mode == MODE_CEP_FP32) && e.cep_err != 0)
          cnt_cep_zero++;
      end
    end
  end

  task automatic check_count(input string what, input int n);
    checks++;
    $display("mechanism %-22s happened %0d times", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism %s never happened", what);
    end
  endtask

  initial begin
    rst_n      = 1'b0;
    mem_rvalid = 1'b0;
    mem_rdata  = '0;
    mode       = MODE_MSET_FP16;
    acc_ready  = 1'b1;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // Phase 1: full rate, checks latency and throughput.
    for (int i = 0; i < N1; i++) send(zs_mode_e'(i / 16), i % 2, 100);
    mem_rvalid <= 1'b0;
    wait (q.size() == 0);
    // N1 lines accepted back to back leave in the N1 cycles that follow.
    checks++;
    if (t_last_out - t_first_acc != longint'(N1)) begin
      failures++;
      $display("FAIL phase 1: %0d lines took %0d cycles, expected %0d",
               N1, t_last_out - t_first_acc, N1);
    end
    @(posedge clk);
    phase1 = 1'b0;

    // Phase 2: random handshakes, modes in runs, random faults.
    fork
      forever begin
        @(posedge clk);
        acc_ready <= ($urandom_range(99) < 70);
      end
    join_none
    begin
      zs_mode_e m;
      m = MODE_CEP_FP16;
      for (int i = 0; i < N2; i++) begin
        if ($urandom_range(19) == 0) m = zs_mode_e'($urandom_range(3));
        send(m, $urandom_range(3), 80);
      end
    end
    mem_rvalid <= 1'b0;
    wait (q.size() == 0);
    repeat (2) @(posedge clk);

    checks++;
    if (n_out != N1 + N2) begin
      failures++;
      $display("FAIL %0d lines delivered, expected %0d", n_out, N1 + N2);
    end
    check_count("MSET correction", cnt_mset_fix);
    check_count("CEP chunk zeroing", cnt_cep_zero);
    check_count("mode switch", cnt_mode_sw);
    check_count("accelerator stall", cnt_stall);
    check_count("memory back-pressure", cnt_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
