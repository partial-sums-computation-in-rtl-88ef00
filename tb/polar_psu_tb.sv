// polar_psu_tb: end-to-end test of the partial sums unit at N = 64 (and a
// second instance at N = 8, the size of the processing-element drawing).
//
// Random decided bits are fed over several code words. psu_scoreboard checks
// that every processing element PE(x,y) sees each partial sum it needs at the
// step the sum becomes valid and while the unit waits for the next bit. The
// run exercises, and counts: bits accepted back to back, stalls (cycles
// without a bit, during which the outputs must hold), a clear that abandons a
// code word half way, a code word started by wrap-around with no clear, and
// checks in the second half of a code word (where the generator repeats its
// rows). Any mechanism that never occurs counts as a failure. The unit
// accepts one bit per clock: the bit count per code word is checked against
// the cycle count of a back-to-back code word.
module polar_psu_tb;
  localparam int unsigned N  = 64;
  localparam int unsigned NS = 8;

  logic clk;
  logic rst_n = 1'b0;
  logic clear = 1'b0, u_valid = 1'b0, u_hat = 1'b0;
  logic clear_s = 1'b0, v_s = 1'b0, u_s = 1'b0;
  logic [N/2-1:0]  ps_stage;
  logic [N-2:0]    pe_ps;
  logic [NS/2-1:0] ps_stage_s;
  logic [NS-2:0]   pe_ps_s;
  int sb_checks, sb_failures, sb_second;
  int sbs_checks, sbs_failures, sbs_second;
  int checks = 0, failures = 0;
  int n_back_to_back = 0, n_stall = 0, n_clear_abort = 0, n_wrap = 0;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  polar_psu #(.N(N)) dut (.clk, .rst_n, .clear, .u_valid, .u_hat, .ps_stage, .pe_ps);
  psu_scoreboard #(.N(N)) sb (.clk, .rst_n, .clear, .u_valid, .u_hat, .pe_ps,
                              .checks(sb_checks), .failures(sb_failures), .second_half_checks(sb_second));

  polar_psu #(.N(NS)) dut_s (.clk, .rst_n, .clear(clear_s), .u_valid(v_s), .u_hat(u_s),
                             .ps_stage(ps_stage_s), .pe_ps(pe_ps_s));
  psu_scoreboard #(.N(NS)) sbs (.clk, .rst_n, .clear(clear_s), .u_valid(v_s), .u_hat(u_s), .pe_ps(pe_ps_s),
                                .checks(sbs_checks), .failures(sbs_failures), .second_half_checks(sbs_second));

  task automatic finish();
    checks += sb_checks + sbs_checks;
    failures += sb_failures + sbs_failures;
    $display("mechanisms: back_to_back=%0d stall=%0d clear_abort=%0d wrap=%0d second_half_checks=%0d",
             n_back_to_back, n_stall, n_clear_abort, n_wrap, sb_second + sbs_second);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end

  // Feed `count` bits; stall_pct of them are preceded by 1..3 idle cycles.
  task automatic feed(int count, int stall_pct);
    for (int i = 0; i < count; i++) begin
      if ($urandom_range(99) < stall_pct) begin
        repeat ($urandom_range(3, 1)) @(negedge clk);
        n_stall++;
      end else begin
        n_back_to_back++;
      end
      u_hat = 1'($urandom);
      u_valid = 1'b1;
      @(negedge clk);
      u_valid = 1'b0;
    end
  endtask

  task automatic do_clear();
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
  endtask

  initial begin
    time c0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // Small instance: every code word of N = 8 with a zero-one pattern.
    for (int w = 0; w < 256; w++) begin
      clear_s = 1'b1;
      @(negedge clk);
      clear_s = 1'b0;
      for (int s = 0; s < NS; s++) begin
        u_s = w[s];
        v_s = 1'b1;
        @(negedge clk);
        v_s = 1'b0;
      end
    end

    // Code word 1: back to back; one bit per cycle.
    do_clear();
    c0 = $time;
    feed(N, 0);
    check(($time - c0) == N * 10, $sformatf("one bit per cycle: %0d time units for %0d bits", $time - c0, N));
    // Code word 2: starts by wrap-around, with stalls.
    n_wrap++;
    feed(N, 30);
    // Code word 3: abandoned half way by a clear.
    do_clear();
    feed(N / 2 + 5, 20);
    do_clear();
    n_clear_abort++;
    // Code words 4 and 5: full, stalls, second one by wrap-around.
    feed(N, 25);
    n_wrap++;
    feed(N, 10);
    repeat (3) @(negedge clk);

    if (n_back_to_back == 0) begin failures++; $display("FAIL no back-to-back bits"); end
    if (n_stall == 0)        begin failures++; $display("FAIL no stalls"); end
    if (n_clear_abort == 0)  begin failures++; $display("FAIL no clear abort"); end
    if (n_wrap == 0)         begin failures++; $display("FAIL no wrap-around"); end
    if (sb_second == 0 || sbs_second == 0) begin failures++; $display("FAIL no second-half checks"); end
    finish();
  end
endmodule
