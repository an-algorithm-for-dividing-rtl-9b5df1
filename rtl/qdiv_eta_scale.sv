// qdiv_eta_scale: the output stage y = eta * R4(2) * z with eta = 1/R.
//
// Four dividers (qdiv_seq_div) run side by side, one per quotient component, each dividing
// its numerator by the squared norm R of the divisor: y0 = -z0/R (the circle "-eta" of the
// data flow diagram, i.e. the sign change R4(2) = diag(-1,1,1,1)), y1..y3 = z_i/R. The
// quotients carry QF fraction bits and are truncated toward zero.
//
// Timing: start loads all four; done pulses NW+QF+1 cycles later, in the same cycle for all
// four lanes; y and dbz (R = 0) hold from then until the next start. The source counts
// four real divisions here; dividing four times rather than forming 1/R once and multiplying
// keeps to that count. The sequential divider is this design's choice.
module qdiv_eta_scale #(
  parameter int unsigned DATA_W = qdiv_pkg::DATA_W_DEF,
  parameter int unsigned QF     = qdiv_pkg::QUO_FRAC_DEF,
  parameter int unsigned NW     = qdiv_pkg::num_w(DATA_W),
  parameter int unsigned DW     = qdiv_pkg::norm_w(DATA_W),
  parameter int unsigned QW     = NW + QF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [NW-1:0] z [4],   // numerators from qdiv_post_add
  input  logic        [DW-1:0] norm,    // R from qdiv_norm
  output logic                 busy,
  output logic                 done,
  output logic signed [QW-1:0] y [4],   // quotient components
  output logic                 dbz      // divisor was zero
);
  logic signed [NW-1:0] num [4];
  logic [3:0] busy_l, done_l, dbz_l;

  always_comb begin
    num[0] = -z[0];   // -eta on the real part; |z0| < 2^(NW-1), so this cannot overflow
    num[1] =  z[1];
    num[2] =  z[2];
    num[3] =  z[3];
  end

  for (genvar i = 0; i < 4; i++) begin : g_lane
    qdiv_seq_div #(.NW(NW), .DW(DW), .QF(QF), .QW(QW)) u_div (
      .clk  (clk),
      .rst_n(rst_n),
      .start(start),
      .num  (num[i]),
      .den  (norm),
      .busy (busy_l[i]),
      .done (done_l[i]),
      .quo  (y[i]),
      .dbz  (dbz_l[i])
    );
  end

  assign busy = |busy_l;
  assign done = done_l[0];
  assign dbz  = dbz_l[0];

  // The four lanes run in lock step and see the same denominator.
  lanes_in_step: assert property (@(posedge clk) disable iff (!rst_n)
                                  ((done_l == 4'b0000) || (done_l == 4'b1111)) &&
                                  ((busy_l == 4'b0000) || (busy_l == 4'b1111)) &&
                                  ((dbz_l  == 4'b0000) || (dbz_l  == 4'b1111)));
endmodule
