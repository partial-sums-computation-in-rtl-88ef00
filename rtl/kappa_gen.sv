// kappa_gen: generator of the rows of the polar kernel power kappa^(x)n
// (kappa = [1 0; 1 1]) without a ROM.
//
// The WIDTH registers M_0..M_{WIDTH-1} hold row t of the matrix, restricted to
// its WIDTH leftmost columns: c[j] = c_{t,j}. Each time `advance` is high the
// registers move to row t+1 through the Pascal recurrence of the published architecture,
//     M_0(t) = 1,   M_j(t) = M_{j-1}(t-1) xor M_j(t-1),
// so the register chain is a row of Pascal's triangle modulo 2
// (c_{t,j} = 1 exactly when the bits of j are a subset of the bits of t).
// With WIDTH = N/2 (the published choice) the chain delivers kappa^(x)(n-1)
// twice per code word, rows 0..N/2-1 and again for t = N/2..N-1, which are the
// coefficients the N/2-stage partial-sum shift register needs; row N/2 of the
// truncated triangle equals row 0, so the sequence wraps by itself. Because
// c_{t,j} = c_{t,t-j}, the same bits serve the shifted datapath unchanged.
//
// Interface and timing: `c` is a registered output showing row t; `advance`
// steps to the next row on the rising clock edge; `clear` (synchronous, has
// priority) and the active-low asynchronous reset return to row 0
// (1,0,...,0). Clear and reset are this design's choices; the published architecture does not
// describe how the generator is initialised.
module kappa_gen #(
  parameter int unsigned WIDTH = polar_psu_pkg::N_DEFAULT / 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             advance,
  output logic [WIDTH-1:0] c
);

  logic [WIDTH-1:0] m_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_q <= WIDTH'(1);
    end else begin
      // The first column of kappa^(x)n is all ones.
      a_first_column_one : assert (m_q[0]);
      if (clear) begin
        m_q <= WIDTH'(1);
      end else if (advance) begin
        // M_0 stays 1; M_j takes M_{j-1} xor M_j.
        m_q <= (m_q ^ (m_q << 1)) | WIDTH'(1);
      end
    end
  end

  assign c = m_q;

endmodule
