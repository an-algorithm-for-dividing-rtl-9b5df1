// qdiv_seq_div: one real division, numerator * 2^QF / denominator, one quotient bit per clock.
//
// A restoring radix-2 divider on magnitudes. The signed numerator is split into sign and
// magnitude, the magnitude is extended by QF zero fraction bits, and NW+QF cycles of
// shift / trial-subtract produce the magnitude of the quotient, which is then given the
// numerator's sign. The quotient is therefore truncated toward zero. The denominator is
// unsigned. A zero denominator sets dbz and returns a zero quotient.
//
// Timing: a one-cycle start pulse loads num and den; busy is high for NW+QF cycles; done
// pulses in the cycle after the last step, and quo/dbz then hold until the next start.
// The source only counts "4 divisions"; the divider circuit is this design's choice.
module qdiv_seq_div #(
  parameter int unsigned NW = qdiv_pkg::num_w(qdiv_pkg::DATA_W_DEF),    // numerator width
  parameter int unsigned DW = qdiv_pkg::norm_w(qdiv_pkg::DATA_W_DEF),   // denominator width
  parameter int unsigned QF = qdiv_pkg::QUO_FRAC_DEF,                   // fraction bits
  parameter int unsigned QW = NW + QF                                   // quotient width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [NW-1:0] num,
  input  logic        [DW-1:0] den,
  output logic                 busy,
  output logic                 done,
  output logic signed [QW-1:0] quo,
  output logic                 dbz
);
  localparam int unsigned AW = NW + QF;             // magnitude of the scaled numerator
  localparam int unsigned CW = $clog2(AW + 1);

  logic [AW-1:0] acc;      // dividend bits still to shift out / quotient bits shifted in
  logic [DW-1:0] rem;      // partial remainder, always below den
  logic [DW-1:0] den_q;
  logic [CW-1:0] cnt;
  logic          neg;

  logic [DW:0]   rem_sh;   // remainder shifted left with the next dividend bit
  logic [DW-1:0] trial;    // rem_sh - den, valid when qbit (the result is below den)
  logic          qbit;

  always_comb begin
    rem_sh = {rem, acc[AW-1]};
    trial  = rem_sh[DW-1:0] - den_q;
    qbit   = (rem_sh >= {1'b0, den_q});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      rem   <= '0;
      den_q <= '0;
      cnt   <= '0;
      neg   <= 1'b0;
      busy  <= 1'b0;
      done  <= 1'b0;
      quo   <= '0;
      dbz   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        neg   <= num[NW-1];
        acc   <= {(num[NW-1] ? AW'(-num) : AW'(num))} << QF;
        rem   <= '0;
        den_q <= den;
        cnt   <= CW'(AW);
        busy  <= 1'b1;
      end else if (busy) begin
        rem  <= qbit ? trial : rem_sh[DW-1:0];
        acc  <= {acc[AW-2:0], qbit};
        cnt  <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          dbz  <= (den_q == '0);
          if (den_q == '0)
            quo <= '0;
          else
            quo <= neg ? -QW'({acc[AW-2:0], qbit}) : QW'({acc[AW-2:0], qbit});
        end
      end
    end
  end
endmodule
