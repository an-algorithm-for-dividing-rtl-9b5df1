// qdiv_norm: the squared norm of the divisor, R = r0^2 + r1^2 + r2^2 + r3^2.
//
// Four squarers and three additions, arranged as a two-level adder tree. The result is
// unsigned and NRW = 2*DATA_W+1 bits wide, enough for four squares of the most negative
// component. It is the common divisor of the four quotient components (eta = 1/R).
// Combinational; no clock.
module qdiv_norm #(
  parameter int unsigned DATA_W = qdiv_pkg::DATA_W_DEF,
  parameter int unsigned NRW    = qdiv_pkg::norm_w(DATA_W)   // output width
) (
  input  logic signed [DATA_W-1:0] r [4],   // divisor components
  output logic        [NRW-1:0]    norm     // R
);
  logic [2*DATA_W-1:0] sq [4];   // r_i^2 <= 2^(2*DATA_W-2)
  logic [2*DATA_W-1:0] p01, p23;

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      sq[i] = $unsigned((2*DATA_W)'(r[i]) * (2*DATA_W)'(r[i]));
    end
    p01  = sq[0] + sq[1];
    p23  = sq[2] + sq[3];
    norm = NRW'(p01) + NRW'(p23);
  end
endmodule
