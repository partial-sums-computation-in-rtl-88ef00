// polar_psu: partial sums unit (PSU) of a tree successive-cancellation polar
// decoder of code length N = 2**n.
//
// The processing unit (outside this module) decides one bit u_hat per step
// and presents it with u_valid. The PSU folds each bit into the partial sums
// with a kappa^(x)n row generator (kappa_gen) and an N/2-stage shift register
// (ps_shift_reg), both N/2 bits wide. Every processing element PE(x,y) of the
// tree decoder (0 <= y < n, 0 <= x < 2**y, N-1 of them) is wired to one fixed
// stage, 2**y - 1 - x, which holds every partial sum S_{x+k*2**(y+1),y} that
// the element needs, each at its own step; no multiplexer selects partial sums.
// pe_ps[2**y-1+x] is the partial sum seen by PE(x,y) (heap order, this
// design's numbering); ps_stage gives the raw stages.
//
// Timing: a bit accepted on a rising edge updates pe_ps and ps_stage after
// that edge; they then hold until the next accepted bit, which is when a PE
// using S_{m,q} (valid from step tau(m,q)) must have consumed it. `clear`
// starts a new code word; without it the unit also wraps by itself after N bits.
// The published architecture gives the generator, the shift register and the stage
// numbering; the handshake (u_valid, clear, reset) is this design's own.
module polar_psu #(
  parameter int unsigned N = polar_psu_pkg::N_DEFAULT
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           u_valid,
  input  logic           u_hat,
  output logic [N/2-1:0] ps_stage,
  output logic [N-2:0]   pe_ps
);

  localparam int unsigned LOG2N = $clog2(N);
  localparam int unsigned HALF  = N / 2;

  logic [HALF-1:0] c_row;

  kappa_gen #(.WIDTH(HALF)) u_kappa (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (clear),
    .advance (u_valid),
    .c       (c_row)
  );

  ps_shift_reg #(.DEPTH(HALF)) u_shift (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (clear),
    .u_valid (u_valid),
    .u_hat   (u_hat),
    .c       (c_row),
    .r       (ps_stage)
  );

  // Direct PE-to-stage wiring: PE(x,y) reads stage 2**y-1-x, so column y
  // sees stages 2**y-1 .. 0 in reverse order.
  for (genvar y = 0; y < LOG2N; y++) begin : g_col
    localparam int unsigned W = 1 << y;
    assign pe_ps[W-1 +: W] = {<<{ps_stage[W-1:0]}};
  end

  initial begin
    assert (N >= 4 && (1 << LOG2N) == N) else $error("polar_psu: N must be a power of two >= 4");
  end

endmodule
