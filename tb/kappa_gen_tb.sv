// kappa_gen_tb: self-checking test of the kappa^(x)n row generator.
//
// Instance A (WIDTH 4, the N = 8 example) is compared with the five rows
// published for the N = 8 generator example: 1000, 1100, 1010, 1111, 1000.
// Instance B (WIDTH 16) is stepped with random gaps, wraps over several code
// words and is cleared mid-row; every row is compared with Lucas' rule,
// c_{t,j} = 1 exactly when (t & j) == j, which is independent of the Pascal
// recurrence the generator uses. One row per advance (no latency beyond the
// register) is also checked.
module kappa_gen_tb;
  localparam int unsigned WB = 16;

  logic clk;
  logic rst_n = 1'b0;
  logic clear_a = 1'b0, adv_a = 1'b0;
  logic clear_b = 1'b0, adv_b = 1'b0;
  logic [3:0]    c_a;
  logic [WB-1:0] c_b;
  int checks = 0, failures = 0;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  kappa_gen #(.WIDTH(4))  dut_a (.clk, .rst_n, .clear(clear_a), .advance(adv_a), .c(c_a));
  kappa_gen #(.WIDTH(WB)) dut_b (.clk, .rst_n, .clear(clear_b), .advance(adv_b), .c(c_b));

  // Published N = 8 rows, column j in bit j.
  logic [3:0] fig_rows [5] = '{4'b0001, 4'b0011, 4'b0101, 4'b1111, 4'b0001};

  function automatic logic [WB-1:0] lucas_row(int unsigned t);
    logic [WB-1:0] row;
    for (int unsigned j = 0; j < WB; j++) row[j] = ((t & j) == j);
    return row;
  endfunction

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned t;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // Instance A against the printed rows.
    for (int i = 0; i < 5; i++) begin
      check(c_a == fig_rows[i], $sformatf("N=8 row %0d: got %b", i, c_a));
      adv_a = 1'b1;
      @(negedge clk);
      adv_a = 1'b0;
      check(c_a == fig_rows[(i + 1) % 5] || i == 4, "one row per advance");
      repeat ($urandom_range(2)) @(negedge clk);
    end
    // Instance B over several wraps with random stalls.
    t = 0;
    for (int i = 0; i < 200; i++) begin
      check(c_b == lucas_row(t), $sformatf("t=%0d got %h exp %h", t, c_b, lucas_row(t)));
      if (i == 77) begin
        clear_b = 1'b1;
        @(negedge clk);
        clear_b = 1'b0;
        t = 0;
        check(c_b == lucas_row(0), "row 0 after clear");
      end
      adv_b = ($urandom_range(3) != 0);
      @(negedge clk);
      if (adv_b) t++;
      adv_b = 1'b0;
    end
    // Row N/2 = WIDTH equals row 0 (period of the truncated rows).
    check(lucas_row(WB) == lucas_row(0), "reference period");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
