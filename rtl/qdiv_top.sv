// qdiv_top: quaternion divider y = r^-1 * q with eight real multipliers.
//
// The numerator conj(r)*q is computed with the factorised algorithm: qdiv_coef_gen turns
// the dividend q into eight coefficients s0..s7 (additions and shifts only), qdiv_pre_add
// forms eight values from the divisor r, qdiv_mult_bank multiplies them pairwise (the only
// eight general multiplications), and qdiv_post_add combines the products into the four
// numerators. qdiv_norm forms R = |r|^2 with four squarers, and qdiv_eta_scale divides the
// four numerators by R, negating the real one. Counting butterflies as two additions, the
// numerator and the norm take 31 additions: 8 in qdiv_coef_gen, 8 in qdiv_pre_add, 12 in
// qdiv_post_add and 3 in qdiv_norm.
//
// Interface: components are signed DATA_W-bit numbers with any common binary point; the
// quotient components have QUO_FRAC fraction bits and are truncated toward zero. A valid /
// ready handshake on each side: an operand pair is taken when in_valid and in_ready are
// both high; the quotient is offered with out_valid and held, unchanged, until out_ready.
// out_dbz flags a zero divisor (the quotient then reads zero).
//
// Timing: one operation at a time. After the accepting clock edge the registered operands
// go through the combinational numerator and norm logic for one cycle (ST_MUL), the four
// dividers then run for NUM_W+QUO_FRAC cycles (ST_DIV), and out_valid rises
// NUM_W+QUO_FRAC+2 cycles after the accepting edge (50 + 2 at the defaults). The handshake,
// the register placement and the sequential dividers are this design's choices; the
// source describes only the data flow. rst_n resets the registers asynchronously; the
// assertions at the end also use it, sampled on the clock, to stay quiet during reset.
module qdiv_top #(
  parameter int unsigned DATA_W   = qdiv_pkg::DATA_W_DEF,     // component width
  parameter int unsigned QUO_FRAC = qdiv_pkg::QUO_FRAC_DEF,   // quotient fraction bits
  localparam int unsigned NUM_W   = qdiv_pkg::num_w(DATA_W),
  localparam int unsigned NRM_W   = qdiv_pkg::norm_w(DATA_W),
  localparam int unsigned QUO_W   = NUM_W + QUO_FRAC
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // operand side
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [DATA_W-1:0] q [4],   // dividend q0 + i q1 + j q2 + k q3
  input  logic signed [DATA_W-1:0] r [4],   // divisor  r0 + i r1 + j r2 + k r3
  // result side
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic signed [QUO_W-1:0] y [4],    // quotient y0 + i y1 + j y2 + k y3
  output logic                    out_dbz   // divisor was zero
);
  import qdiv_pkg::*;

  localparam int unsigned CW = coef_w(DATA_W);
  localparam int unsigned PW = pre_w(DATA_W);
  localparam int unsigned MW = CW + PW;

  qdiv_state_e state;

  logic signed [DATA_W-1:0] q_r [4];
  logic signed [DATA_W-1:0] r_r [4];
  logic signed [CW-1:0]     s [8];
  logic signed [PW-1:0]     u [8];
  logic signed [MW-1:0]     m [8];
  logic signed [NUM_W-1:0]  z [4];
  logic        [NRM_W-1:0]  norm;
  logic                     div_start, div_busy, div_done;

  // ---- numerator and norm datapath (combinational, from the operand registers) ----
  qdiv_coef_gen  #(.DATA_W(DATA_W), .CW(CW))             u_coef (.q(q_r), .s(s));
  qdiv_pre_add   #(.DATA_W(DATA_W), .PW(PW))             u_pre  (.r(r_r), .u(u));
  qdiv_mult_bank #(.DATA_W(DATA_W), .CW(CW), .PW(PW), .MW(MW)) u_mul (.s(s), .u(u), .m(m));
  qdiv_post_add  #(.DATA_W(DATA_W), .MW(MW), .NW(NUM_W)) u_post (.m(m), .z(z));
  qdiv_norm      #(.DATA_W(DATA_W), .NRW(NRM_W))         u_norm (.r(r_r), .norm(norm));

  // ---- division by the norm ----
  qdiv_eta_scale #(.DATA_W(DATA_W), .QF(QUO_FRAC), .NW(NUM_W), .DW(NRM_W), .QW(QUO_W)) u_eta (
    .clk  (clk),
    .rst_n(rst_n),
    .start(div_start),
    .z    (z),
    .norm (norm),
    .busy (div_busy),
    .done (div_done),
    .y    (y),
    .dbz  (out_dbz)
  );

  // ---- sequencer ----
  assign in_ready  = (state == ST_IDLE);
  assign out_valid = (state == ST_OUT);
  assign div_start = (state == ST_MUL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      for (int i = 0; i < 4; i++) begin
        q_r[i] <= '0;
        r_r[i] <= '0;
      end
    end else begin
      unique case (state)
        ST_IDLE: if (in_valid) begin
          q_r   <= q;
          r_r   <= r;
          state <= ST_MUL;
        end
        ST_MUL:  state <= ST_DIV;
        ST_DIV:  if (div_done) state <= ST_OUT;
        ST_OUT:  if (out_ready) state <= ST_IDLE;
        default: state <= ST_IDLE;
      endcase
    end
  end

  // A result that is offered stays offered, unchanged, until it is taken.
  out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             out_valid && !out_ready |=> out_valid && $stable(y[0]) &&
                             $stable(y[1]) && $stable(y[2]) && $stable(y[3]));
  // The dividers are only busy while the sequencer waits for them.
  div_in_step: assert property (@(posedge clk) disable iff (!rst_n)
                                div_busy |-> state == ST_DIV);
endmodule
