// cdiv_divider: pipelined real divider, one of the two "delta = 1/R" units.
//
// Computes q = trunc(num * 2^FRAC / den) for a signed numerator num and an
// unsigned denominator den, rounding toward zero. The result is a signed
// fixed-point number with FRAC fraction bits and QW magnitude bits in all.
// The algorithm only asks for a division by R; the radix-2 restoring
// long division used here, one quotient bit per pipeline stage, is this
// design's own choice.
//
// How it works: the magnitude of num, shifted left by FRAC, is the dividend
// D of NW + FRAC bits. Its bits above the lowest QW form the first partial
// remainder. If that already is at least den (which includes den = 0), the
// quotient would need more than QW bits: ovf is raised and q saturates to
// +/-(2^QW - 1) with the sign of num. Otherwise each of QW stages shifts the
// next dividend bit into the remainder, subtracts den when the remainder is
// not below it, and shifts the outcome into the quotient. A last stage puts
// the sign back.
//
// Timing: fully pipelined, one division accepted per cycle. A result appears
// with out_valid QW + 2 cycles after its operands were sampled with in_valid.
// rst_n resets the valid bits only (asynchronous, active low).
module cdiv_divider #(
  parameter int unsigned NW   = 35,   // numerator width, two's complement
  parameter int unsigned DW   = 32,   // denominator width, unsigned
  parameter int unsigned FRAC = 16,   // fraction bits of the quotient
  parameter int unsigned QW   = 32    // quotient magnitude bits
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [NW-1:0] num,
  input  logic [DW-1:0]       den,
  output logic                out_valid,
  output logic signed [QW:0]  q,
  output logic                ovf
);

  localparam int unsigned LW = NW + FRAC;   // dividend width
  localparam int unsigned HW = LW - QW;     // bits of the first remainder
  localparam int unsigned RW = DW + 1;      // partial remainder width
  localparam int unsigned CMPW = (HW > DW) ? HW : DW;  // overflow compare width

  initial begin
    if (LW <= QW) $error("cdiv_divider: NW + FRAC must exceed QW");
  end

  // Stage 0: magnitude, sign, overflow test, first remainder.
  logic [NW-1:0] mag;
  logic [LW-1:0] dividend;
  logic [HW-1:0] hi;
  logic          hi_ovf;

  always_comb begin
    mag      = num[NW-1] ? NW'(-num) : NW'(num);
    dividend = {mag, FRAC'(0)};
    hi       = dividend[LW-1:QW];
    hi_ovf   = CMPW'(hi) >= CMPW'(den);
  end

  // Pipeline registers, index k = stage number 0 .. QW.
  logic          v_q   [QW+1];
  logic          neg_q [QW+1];
  logic          ovf_q [QW+1];
  logic [RW-1:0] rem_q [QW+1];
  logic [QW-1:0] lq_q  [QW+1];   // remaining dividend bits, then quotient bits
  logic [DW-1:0] den_q [QW+1];

  // Next-stage values of stages 1 .. QW.
  logic [RW-1:0] rem_sh  [QW+1];
  logic [RW-1:0] rem_nxt [QW+1];
  logic          qbit    [QW+1];

  always_comb begin
    for (int k = 0; k <= QW; k++) begin
      rem_sh[k]  = '0;
      rem_nxt[k] = '0;
      qbit[k]    = 1'b0;
    end
    for (int k = 1; k <= QW; k++) begin
      rem_sh[k] = {rem_q[k-1][RW-2:0], lq_q[k-1][QW-1]};
      qbit[k]   = rem_sh[k] >= RW'(den_q[k-1]);
      rem_nxt[k] = qbit[k] ? rem_sh[k] - RW'(den_q[k-1]) : rem_sh[k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k <= QW; k++) v_q[k] <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v_q[0] <= in_valid;
      for (int k = 1; k <= QW; k++) v_q[k] <= v_q[k-1];
      out_valid <= v_q[QW];
    end
  end

  always_ff @(posedge clk) begin
    neg_q[0] <= num[NW-1];
    ovf_q[0] <= hi_ovf;
    rem_q[0] <= RW'(hi);
    lq_q[0]  <= dividend[QW-1:0];
    den_q[0] <= den;
    for (int k = 1; k <= QW; k++) begin
      neg_q[k] <= neg_q[k-1];
      ovf_q[k] <= ovf_q[k-1];
      den_q[k] <= den_q[k-1];
      rem_q[k] <= rem_nxt[k];
      lq_q[k]  <= {lq_q[k-1][QW-2:0], qbit[k]};
    end
    if (ovf_q[QW])     q <= neg_q[QW] ? -(QW+1)'({1'b0, {QW{1'b1}}}) : (QW+1)'({1'b0, {QW{1'b1}}});
    else if (neg_q[QW]) q <= -(QW+1)'({1'b0, lq_q[QW]});
    else               q <= (QW+1)'({1'b0, lq_q[QW]});
    ovf <= ovf_q[QW];
  end

  // A non-overflowing division keeps its partial remainder below den.
  always_ff @(posedge clk) begin
    for (int k = 1; k <= QW; k++) begin
      if (v_q[k] && !ovf_q[k])
        assert (rem_q[k] < RW'(den_q[k]))
          else $error("cdiv_divider: remainder not below divisor at stage %0d", k);
    end
  end

endmodule
