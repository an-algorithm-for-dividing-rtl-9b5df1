// qdiv_mult_bank: the eight real multipliers of the algorithm, the diagonal matrix D8.
//
// Each lane i forms m_i = s_i * u_i with its own full-width signed multiplier, as in a
// fully parallel implementation where every real multiplication has its own hardware
// multiplier. These eight are the only general multiplications of the quotient's
// numerator (the direct method needs sixteen). Combinational; no clock.
module qdiv_mult_bank #(
  parameter int unsigned DATA_W = qdiv_pkg::DATA_W_DEF,
  parameter int unsigned CW     = qdiv_pkg::coef_w(DATA_W),   // coefficient width
  parameter int unsigned PW     = qdiv_pkg::pre_w(DATA_W),    // divisor-side width
  parameter int unsigned MW     = CW + PW                     // product width
) (
  input  logic signed [CW-1:0] s [8],   // coefficients (from qdiv_coef_gen)
  input  logic signed [PW-1:0] u [8],   // divisor-side values (from qdiv_pre_add)
  output logic signed [MW-1:0] m [8]    // products
);
  always_comb begin
    for (int i = 0; i < 8; i++) begin
      m[i] = MW'(s[i]) * MW'(u[i]);
    end
  end
endmodule
