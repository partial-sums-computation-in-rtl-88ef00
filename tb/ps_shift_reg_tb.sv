// ps_shift_reg_tb: self-checking test of the shift-register partial-sum
// datapath.
//
// Instance A (DEPTH 4, N = 4, all N stages as in the N = 4 drawing) is run
// over all 16 code words u_0..u_3 and compared, stage by stage and step by
// step, with the printed table: after step 3, R_0 = u3, R_1 = S_{2,1} = u2+u3,
// R_2 = S_{1,2} = u1+u3, R_3 = S_{0,2} = u0+u1+u2+u3, and so on.
// Instance B (DEPTH 32, N = 64, the N/2 stages of the main configuration) is
// fed random bits with random stalls over several code words; the reference is
// the unshifted register-based form of the recurrence, p_m(t) =
// p_m(t-1) xor u_t c_{t,m} with c_{t,m} = ((t & m) == m), and stage d must hold
// p_{t-d}(t) for every d <= t. The coefficients are generated here, not by
// the kappa generator. One step per accepted bit is checked.
module ps_shift_reg_tb;
  localparam int unsigned NB = 64;
  localparam int unsigned DB = NB / 2;

  logic clk;
  logic rst_n = 1'b0;
  logic clear_a = 1'b0, v_a = 1'b0, u_a = 1'b0;
  logic clear_b = 1'b0, v_b = 1'b0, u_b = 1'b0;
  logic [3:0]    c_a, r_a;
  logic [DB-1:0] c_b, r_b;
  int checks = 0, failures = 0;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  ps_shift_reg #(.DEPTH(4))  dut_a (.clk, .rst_n, .clear(clear_a), .u_valid(v_a), .u_hat(u_a), .c(c_a), .r(r_a));
  ps_shift_reg #(.DEPTH(DB)) dut_b (.clk, .rst_n, .clear(clear_b), .u_valid(v_b), .u_hat(u_b), .c(c_b), .r(r_b));

  function automatic logic coef(int unsigned t, int unsigned j);
    return ((t & j) == j);
  endfunction

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] u;
    logic [3:0] exp_r [4];
    logic [NB-1:0] p;
    int unsigned t;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // Instance A: the N = 4 table, every code word.
    for (int w = 0; w < 16; w++) begin
      u = 4'(w);
      clear_a = 1'b1;
      @(negedge clk);
      clear_a = 1'b0;
      // Stage contents after each step, from the table (stages with X omitted).
      exp_r[0] = {1'b0, 1'b0, 1'b0, u[0]};
      exp_r[1] = {1'b0, 1'b0, u[0] ^ u[1], u[1]};
      exp_r[2] = {1'b0, u[0] ^ u[1] ^ u[2], u[1], u[2]};
      exp_r[3] = {u[0] ^ u[1] ^ u[2] ^ u[3], u[1] ^ u[3], u[2] ^ u[3], u[3]};
      for (int unsigned s = 0; s < 4; s++) begin
        for (int unsigned j = 0; j < 4; j++) c_a[j] = coef(s, j);
        u_a = u[s];
        v_a = 1'b1;
        @(negedge clk);
        v_a = 1'b0;
        for (int unsigned d = 0; d <= s; d++)
          check(r_a[d] == exp_r[s][d], $sformatf("N=4 word %0d step %0d stage %0d", w, s, d));
        if (s == 3) begin
          // Holds while no bit is accepted.
          repeat (2) @(negedge clk);
          check(r_a == exp_r[3], "N=4 hold without u_valid");
        end
      end
    end

    // Instance B: random bits, random stalls, three code words.
    for (int w = 0; w < 3; w++) begin
      clear_b = 1'b1;
      @(negedge clk);
      clear_b = 1'b0;
      p = '0;
      for (t = 0; t < NB; t++) begin
        for (int unsigned j = 0; j < DB; j++) c_b[j] = coef(t, j);
        u_b = 1'($urandom);
        v_b = 1'b1;
        for (int unsigned m = 0; m < NB; m++) p[m] = p[m] ^ (u_b & coef(t, m));
        @(negedge clk);
        v_b = 1'b0;
        for (int unsigned d = 0; d < DB; d++)
          if (d <= t) check(r_b[d] == p[t - d], $sformatf("N=64 word %0d t=%0d stage %0d", w, t, d));
        repeat ($urandom_range(1)) @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
