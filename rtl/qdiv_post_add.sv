// qdiv_post_add: the additions after the eight multipliers.
//
// It computes Z = Sigma4x8 * W8(0) * W8(1) * M for the products M = [m0..m7]:
//   the upper four products pass through I2 (x) H2 and then H2 (x) I2 (4 butterflies,
//   8 additions), which with the upper half of qdiv_pre_add and qdiv_coef_gen applies
//   the symmetric Toeplitz part of the matrix;
//   Sigma = [1,-1] (x) I4 then subtracts the lower four products (4 additions), which
//   removes twice the sparse part Q^4.
// The products carry the scale of 4 of the coefficients, so the result is a multiple of 4
// and the two low bits are dropped exactly. What leaves is z = R4(2) applied later, i.e.
// y = eta * R4(2) * z with eta = 1/R: z0 is the negated real part, z1..z3 the imaginary
// parts of the numerator conj(r)*q. The width is cut to NW bits, which always suffices
// because |z_i| <= |q|*|r| (see qdiv_pkg::num_w). Combinational; no clock.
module qdiv_post_add #(
  parameter int unsigned DATA_W = qdiv_pkg::DATA_W_DEF,
  parameter int unsigned MW     = qdiv_pkg::prod_w(DATA_W),   // product width
  parameter int unsigned NW     = qdiv_pkg::num_w(DATA_W)     // output width
) (
  input  logic signed [MW-1:0] m [8],   // products from qdiv_mult_bank
  output logic signed [NW-1:0] z [4]    // numerator before the sign change R4(2)
);
  logic signed [MW:0]   c0, c1, c2, c3;
  logic signed [MW+1:0] d0, d1, d2, d3;
  logic signed [MW+2:0] e [4];

  // W8(1) upper half = I2 (x) H2: butterflies on (m0,m1) and (m2,m3).
  hadamard2 #(.W(MW))   u_h0 (.a(m[0]), .b(m[1]), .sum(c0), .diff(c1));
  hadamard2 #(.W(MW))   u_h1 (.a(m[2]), .b(m[3]), .sum(c2), .diff(c3));
  // W8(0) upper half = H2 (x) I2: butterflies on (c0,c2) and (c1,c3).
  hadamard2 #(.W(MW+1)) u_h2 (.a(c0), .b(c2), .sum(d0), .diff(d2));
  hadamard2 #(.W(MW+1)) u_h3 (.a(c1), .b(c3), .sum(d1), .diff(d3));

  always_comb begin
    // Sigma4x8: upper minus lower.
    e[0] = (MW+3)'(d0) - (MW+3)'(m[4]);
    e[1] = (MW+3)'(d1) - (MW+3)'(m[5]);
    e[2] = (MW+3)'(d2) - (MW+3)'(m[6]);
    e[3] = (MW+3)'(d3) - (MW+3)'(m[7]);
    for (int i = 0; i < 4; i++) begin
      z[i] = NW'(e[i] >>> 2);   // remove the scale of 4 (the two low bits are zero)
    end
  end
endmodule
