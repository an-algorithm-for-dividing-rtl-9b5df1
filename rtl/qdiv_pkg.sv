// qdiv_pkg: shared constants and types of the quaternion divider.
//
// The divider computes y = r^-1 * q (left division) of two quaternions whose four
// components are signed two's-complement numbers of DATA_W bits with a common binary
// point. The paper does not give a number format; 16-bit components and 16 fraction bits
// in the quotient are this design's choice. Every width inside the datapath is derived
// from DATA_W by the functions below, so that no intermediate value can overflow.
package qdiv_pkg;

  // Default component width and number of fraction bits of the quotient (design choice).
  localparam int unsigned DATA_W_DEF   = 16;
  localparam int unsigned QUO_FRAC_DEF = 16;

  // Width of the coefficients s0..s7. They are held scaled by 4 (two extra fraction
  // bits) so that the factor 1/4 of s0..s3 is a move of the binary point, not a rounding.
  function automatic int unsigned coef_w(int unsigned dw);
    return dw + 3;
  endfunction

  // Width of the eight values that feed the multipliers on the divisor (r) side.
  function automatic int unsigned pre_w(int unsigned dw);
    return dw + 3;
  endfunction

  // Width of one product s_i * u_i.
  function automatic int unsigned prod_w(int unsigned dw);
    return coef_w(dw) + pre_w(dw);
  endfunction

  // Width of an unscaled numerator z_i = (Q4 X)_i. |z_i| <= |q||r| <= 2^(2*dw), so
  // 2*dw+2 signed bits always hold it.
  function automatic int unsigned num_w(int unsigned dw);
    return 2 * dw + 2;
  endfunction

  // Width of the norm R = r0^2 + r1^2 + r2^2 + r3^2 (unsigned, at most 2^(2*dw)).
  function automatic int unsigned norm_w(int unsigned dw);
    return 2 * dw + 1;
  endfunction

  // Width of a quotient component: the numerator magnitude shifted by the fraction bits,
  // plus a sign bit.
  function automatic int unsigned quo_w(int unsigned dw, int unsigned qf);
    return num_w(dw) + qf;
  endfunction

  // States of the top-level sequencer.
  typedef enum logic [1:0] {
    ST_IDLE = 2'd0,   // waiting for an operand pair
    ST_MUL  = 2'd1,   // additions and the 8 multiplications, result registered
    ST_DIV  = 2'd2,   // the 4 divisions by the norm run in parallel
    ST_OUT  = 2'd3    // quotient held until the consumer takes it
  } qdiv_state_e;

endpackage
