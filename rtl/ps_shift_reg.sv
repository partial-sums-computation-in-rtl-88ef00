// ps_shift_reg: shift-register partial-sum datapath of an SC polar decoder.
//
// The partial sums of a code are the bits of P(t) = U(t) x kappa^(x)n, where
// U(t) holds the bits decoded up to step t. Bit j of P obeys the recurrence
// p_j(t) = p_j(t-1) xor (u_t and c_{t,j}). Instead of updating each p_j in
// place, this datapath updates it while moving it one stage on:
//     R_0 <= u_t and c'_{t,0},
//     R_j <= R_{j-1} xor (u_t and c'_{t,j}),   j >= 1,
// so after step t stage R_d holds p_{t-d}(t) (for d <= t; stages with d > t
// hold leftovers of the previous code word and are never read). As a result the
// partial sum S_{m,q} is found at step tau = (floor(m/2**q)+1)*2**q - 1 in stage
// tau-m, and all the partial sums one processing element needs share a stage.
// The shifted coefficients c'_{t,j} = c_{t,t-j} equal c_{t,j}, so the
// kappa generator output connects unchanged. With DEPTH = N/2 (the published
// choice) only the stages that processing elements read are built; DEPTH = N
// gives the full N-stage structure drawn for N = 4.
//
// Interface and timing: u_hat with u_valid and the coefficient row c of the
// same step are sampled on the rising edge; `r` shows the stages after the
// last accepted bit (one cycle latency, one bit per cycle). `clear` and the
// asynchronous reset zero the stages; that initialisation is this design's
// choice, since the stages that are read never depend on it. An assertion
// checks that clear and u_valid are never high together.
module ps_shift_reg #(
  parameter int unsigned DEPTH = polar_psu_pkg::N_DEFAULT / 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             u_valid,
  input  logic             u_hat,
  input  logic [DEPTH-1:0] c,
  output logic [DEPTH-1:0] r
);

  logic [DEPTH-1:0] r_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_q <= DEPTH'(0);
    end else begin
      // Handshake rule: a new code word is started on a cycle without a bit.
      a_clear_without_bit : assert (!(clear && u_valid));
      if (clear) begin
        r_q <= DEPTH'(0);
      end else if (u_valid) begin
        // Shift by one stage and fold in u_t * c'_{t,j}.
        r_q <= u_hat ? ((r_q << 1) ^ c) : (r_q << 1);
      end
    end
  end

  assign r = r_q;

endmodule
