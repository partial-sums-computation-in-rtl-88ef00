// psu_scoreboard: reference model and checker for the partial sums seen by
// the processing elements of a tree SC polar decoder.
//
// It watches the bits accepted by the partial sums unit and rebuilds the
// partial sums of the factor graph the textbook way: every time a block of
// 2**q decoded bits ending at step t is complete, the block is encoded in place
// with one butterfly level (left half ^= right half), so enc[m] is then the
// partial sum S_{m,q} of every column q whose block ends at t. After each
// accepted bit, and on every later cycle until the next one, it checks for
// every column q < n whose block [a, t] has B(a,q) = 0 that processing element
// PE(m-a, q) (port index 2**q-1+m-a) sees enc[m]. This uses no kappa matrix
// and no stage arithmetic, so it is independent of the unit under test.
// It also counts the checks made in the second half of a code word.
module psu_scoreboard #(
  parameter int unsigned N = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         u_valid,
  input  logic         u_hat,
  input  logic [N-2:0] pe_ps,
  output int           checks,
  output int           failures,
  output int           second_half_checks
);
  localparam int unsigned LOG2N = $clog2(N);

  logic [N-1:0] enc;
  int unsigned  t_next;      // step of the next bit
  int           t_last;      // step of the last accepted bit, -1 if none

  initial begin
    checks = 0;
    failures = 0;
    second_half_checks = 0;
    t_next = 0;
    t_last = -1;
    enc = '0;
  end

  always @(posedge clk) begin
    if (rst_n && clear) begin
      t_next = 0;
      t_last = -1;
    end else if (rst_n && u_valid) begin
      int unsigned t;
      t = t_next;
      enc[t] = u_hat;
      for (int unsigned q = 1; q <= LOG2N; q++) begin
        int unsigned bs, a, h;
        bs = 1 << q;
        if (((t + 1) % bs) != 0) break;
        a = t + 1 - bs;
        h = bs / 2;
        for (int unsigned i = 0; i < h; i++) enc[a + i] = enc[a + i] ^ enc[a + h + i];
      end
      t_last = int'(t);
      t_next = (t + 1) % N;
    end
  end

  always @(negedge clk) begin
    if (rst_n && t_last >= 0) begin
      int unsigned t;
      t = int'(t_last);
      for (int unsigned q = 0; q < LOG2N; q++) begin
        int unsigned bs, a;
        bs = 1 << q;
        if (((t + 1) % bs) != 0) break;
        a = t + 1 - bs;
        if (((a >> q) & 1) == 0) begin
          for (int unsigned x = 0; x < bs; x++) begin
            checks++;
            if (t >= N / 2) second_half_checks++;
            if (pe_ps[bs - 1 + x] !== enc[a + x]) begin
              failures++;
              if (failures < 10)
                $display("FAIL t=%0d PE(%0d,%0d) sees %0b, S_{%0d,%0d} = %0b",
                         t, x, q, pe_ps[bs - 1 + x], a + x, q, enc[a + x]);
            end
          end
        end
      end
    end
  end
endmodule
