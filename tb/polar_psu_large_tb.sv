// polar_psu_large_tb: one complete code word through the partial sums unit
// at N = 2**18 (2**17 stages, 2**18 - 1 processing-element outputs), the
// largest size that simulates in a few minutes; simulation time grows with
// N**2 (every step touches all N/2 stages), so the default N = 2**20 would
// take about half an hour. Random bits are accepted back to back, with a few stalls; the
// scoreboard checks every partial sum each processing element needs, at the
// step it becomes valid. The code word must take N accepted bits, one per
// cycle when there is no stall.
module polar_psu_large_tb;
  localparam int unsigned N = 1 << 18;

  logic clk;
  logic rst_n = 1'b0;
  logic clear = 1'b0, u_valid = 1'b0, u_hat = 1'b0;
  logic [N/2-1:0] ps_stage;
  logic [N-2:0]   pe_ps;
  int sb_checks, sb_failures, sb_second;
  int checks = 0, failures = 0;
  int n_stall = 0;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  polar_psu #(.N(N)) dut (.clk, .rst_n, .clear, .u_valid, .u_hat, .ps_stage, .pe_ps);
  psu_scoreboard #(.N(N)) sb (.clk, .rst_n, .clear, .u_valid, .u_hat, .pe_ps,
                              .checks(sb_checks), .failures(sb_failures), .second_half_checks(sb_second));

  task automatic finish();
    checks += sb_checks;
    failures += sb_failures;
    $display("stalls=%0d second_half_checks=%0d", n_stall, sb_second);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin : watchdog
    repeat (N + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish();
  end

  initial begin
    time c0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    c0 = $time;
    for (int unsigned t = 0; t < N; t++) begin
      if (t % (N / 8) == 3) begin
        repeat (2) @(negedge clk);
        n_stall++;
      end
      u_hat = 1'($urandom);
      u_valid = 1'b1;
      @(negedge clk);
      u_valid = 1'b0;
    end
    checks++;
    if (($time - c0) != (N + 2 * n_stall) * 10) begin
      failures++;
      $display("FAIL cycle count %0d", ($time - c0) / 10);
    end
    checks++;
    if (n_stall == 0 || sb_second == 0) begin
      failures++;
      $display("FAIL stall or second half not exercised");
    end
    finish();
  end
endmodule
