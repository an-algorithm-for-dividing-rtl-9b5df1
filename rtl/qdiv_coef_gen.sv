// qdiv_coef_gen: computes the eight multiplier coefficients s0..s7 from the dividend q.
//
// This is procedure (6) of the algorithm, S = D~8 * W8(1) * W~8(1) * P8x4 * Q:
//   s0 = ((q0+q2) + (q1+q3)) / 4     s4 = 2*q0
//   s1 = ((q0+q2) - (q1+q3)) / 4     s5 = 2*q2
//   s2 = ((q0-q2) + (q1-q3)) / 4     s6 = 2*q3
//   s3 = ((q0-q2) - (q1-q3)) / 4     s7 = 2*q1
// The upper half is two layers of 2x2 Hadamard butterflies (4 butterflies, 8 additions);
// the lower half only copies and reorders q. The order s5=2q2, s6=2q3, s7=2q1 is the one
// of the printed 8x8 matrices W~8(0) and W~8(1); the prose of the source lists
// s5=2q1, s6=2q2, s7=2q3 instead, which does not give the right quotient.
//
// Number format: every s_i leaves this block multiplied by 4 (two extra fraction bits),
// so the factor 1/4 costs nothing and loses nothing, and the factor 2 becomes a shift by 3.
// Outputs s4..s7 are therefore plain wires from q (no logic), as the algorithm intends:
// its multiplications by powers of two are shifts.
// Combinational; no clock.
module qdiv_coef_gen #(
  parameter int unsigned DATA_W = qdiv_pkg::DATA_W_DEF,
  parameter int unsigned CW     = qdiv_pkg::coef_w(DATA_W)   // coefficient width
) (
  input  logic signed [DATA_W-1:0] q [4],   // dividend components q0..q3
  output logic signed [CW-1:0]     s [8]    // 4*s0 .. 4*s7
);
  // First layer, W~8(1) upper half = H2 (x) I2: butterflies on (q0,q2) and (q1,q3).
  logic signed [DATA_W:0]   a0, a1, a2, a3;
  // Second layer, W8(1) upper half = I2 (x) H2: butterflies on (a0,a1) and (a2,a3).
  logic signed [DATA_W+1:0] b0, b1, b2, b3;

  hadamard2 #(.W(DATA_W))   u_h0 (.a(q[0]), .b(q[2]), .sum(a0), .diff(a2));
  hadamard2 #(.W(DATA_W))   u_h1 (.a(q[1]), .b(q[3]), .sum(a1), .diff(a3));
  hadamard2 #(.W(DATA_W+1)) u_h2 (.a(a0),   .b(a1),   .sum(b0), .diff(b1));
  hadamard2 #(.W(DATA_W+1)) u_h3 (.a(a2),   .b(a3),   .sum(b2), .diff(b3));

  always_comb begin
    // 4*s_i = b_i for the upper half: the 1/4 is absorbed by the scale of 4.
    s[0] = CW'(b0);
    s[1] = CW'(b1);
    s[2] = CW'(b2);
    s[3] = CW'(b3);
    // 4*s_i = 8*q_k for the lower half (P4(1) order: q0, q2, q3, q1).
    s[4] = CW'(q[0]) <<< 3;
    s[5] = CW'(q[2]) <<< 3;
    s[6] = CW'(q[3]) <<< 3;
    s[7] = CW'(q[1]) <<< 3;
  end
endmodule
