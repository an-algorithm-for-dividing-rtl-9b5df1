// qdiv_pre_add: the divisor-side additions in front of the eight multipliers.
//
// It computes U = W8(1) * W~8(0) * P~8x4 * X with X = [r0, r1, r2, r3]:
//   P~8x4 duplicates X and negates r1..r3 (the sign changes R4(1) = diag(1,-1,-1,-1)),
//   giving x' = (r0, -r1, -r2, -r3) twice;
//   the upper copy passes through H2 (x) I2 and then I2 (x) H2 (4 butterflies, 8 additions);
//   the lower copy is only reordered by the permutation of W~8(0): (x'0, x'3, x'1, x'2).
// The reorder is the one of the printed matrix W~8(0); it pairs with the coefficient order
// of qdiv_coef_gen so that s5*u5 = -2*q2*r3, s6*u6 = -2*q3*r1 and s7*u7 = -2*q1*r2.
// Combinational; no clock.
module qdiv_pre_add #(
  parameter int unsigned DATA_W = qdiv_pkg::DATA_W_DEF,
  parameter int unsigned PW     = qdiv_pkg::pre_w(DATA_W)   // output width
) (
  input  logic signed [DATA_W-1:0] r [4],   // divisor components r0..r3
  output logic signed [PW-1:0]     u [8]    // multiplier inputs, divisor side
);
  // x' = R4(1) * X, one bit wider so that negating the most negative value is exact.
  logic signed [DATA_W:0]   xp [4];
  logic signed [DATA_W+1:0] a0, a1, a2, a3;
  logic signed [DATA_W+2:0] b0, b1, b2, b3;

  always_comb begin
    xp[0] =  (DATA_W+1)'(r[0]);
    xp[1] = -(DATA_W+1)'(r[1]);
    xp[2] = -(DATA_W+1)'(r[2]);
    xp[3] = -(DATA_W+1)'(r[3]);
  end

  // W~8(0) upper half = H2 (x) I2: butterflies on (x'0,x'2) and (x'1,x'3).
  hadamard2 #(.W(DATA_W+1)) u_h0 (.a(xp[0]), .b(xp[2]), .sum(a0), .diff(a2));
  hadamard2 #(.W(DATA_W+1)) u_h1 (.a(xp[1]), .b(xp[3]), .sum(a1), .diff(a3));
  // W8(1) upper half = I2 (x) H2: butterflies on (a0,a1) and (a2,a3).
  hadamard2 #(.W(DATA_W+2)) u_h2 (.a(a0), .b(a1), .sum(b0), .diff(b1));
  hadamard2 #(.W(DATA_W+2)) u_h3 (.a(a2), .b(a3), .sum(b2), .diff(b3));

  always_comb begin
    u[0] = PW'(b0);
    u[1] = PW'(b1);
    u[2] = PW'(b2);
    u[3] = PW'(b3);
    // Lower half: W~8(0) permutation P4(0) as printed in the 8x8 matrix.
    u[4] = PW'(xp[0]);
    u[5] = PW'(xp[3]);
    u[6] = PW'(xp[1]);
    u[7] = PW'(xp[2]);
  end
endmodule
