// cdiv_top: complex divider y = a / x with three real multipliers.
//
// Implements the factorisation Y = D2 * T2x3 * D3 * T3x2 * X of the
// schoolbook quotient
//   yr = (ar*xr + ai*xi) / R,   yi = (ai*xr - ar*xi) / R,   R = xr^2 + xi^2.
// Pre-adders form d0 = ar - ai, d1 = -(ar + ai), d2 = ai and the terms xr,
// xi, xr + xi; three multipliers form d0*xr, d1*xi, d2*(xr + xi); two
// post-adders share the third product; two squarers and an adder give R; two
// dividers scale both sums by 1/R. That is 3 multiplications, 6 additions,
// 2 squarings and 2 divisions, against the schoolbook's 4 multiplications.
// The structure follows the algorithm; the sign of the xi term into d1 is
// corrected (see cdiv_preadd), and the number format, the pipelining and the
// divider are this design's own.
//
// Interface: ar, ai, xr, xi are W-bit two's-complement integers (or any
// common fixed-point scaling of a and of x). yr and yi are signed with FRAC
// fraction bits: yr = trunc(real(a/x) * 2^FRAC), rounded toward zero, and
// likewise yi. For x = 0 div_by_zero is raised and both parts saturate to
// +/-(2^(W+FRAC) - 1), the sign being that of the numerator (0/0 gives the
// positive limit).
//
// Timing: fully pipelined, one division accepted per cycle, no back-pressure.
// The result leaves with out_valid W + FRAC + 5 cycles after in_valid
// (37 cycles at the defaults): pre-add 1, multiply 1, post-add 1, divide
// W + FRAC + 2. rst_n is an asynchronous active-low reset of the valid bits.
// The lock-step assertions at the end are disabled while rst_n is low, so
// lint notes rst_n being sampled by a clock as well as used asynchronously;
// that use is in checking code only and adds no logic.
module cdiv_top
  import cdiv_pkg::*;
#(
  parameter int unsigned W    = CDIV_W,
  parameter int unsigned FRAC = CDIV_FRAC
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic signed [W-1:0]            ar,
  input  logic signed [W-1:0]            ai,
  input  logic signed [W-1:0]            xr,
  input  logic signed [W-1:0]            xi,
  output logic                           out_valid,
  output logic signed [quot_w(W,FRAC):0] yr,
  output logic signed [quot_w(W,FRAC):0] yi,
  output logic                           div_by_zero
);

  localparam int unsigned CW = coef_w(W);
  localparam int unsigned XW = xterm_w(W);
  localparam int unsigned PW = prod_w(W);
  localparam int unsigned RW = norm_w(W);
  localparam int unsigned QW = quot_w(W, FRAC);

  logic                 v_pre, v_mul, v_post, v_norm, v_dr, v_di;
  logic signed [CW-1:0] d0, d1, d2;
  logic signed [XW-1:0] t0, t1, t2;
  logic signed [PW-1:0] m0, m1, m2;
  logic signed [PW-1:0] p_r, p_i;
  logic [RW-1:0]        r;
  logic                 ovf_r, ovf_i;

  // T3x2 and the diagonal of D3.
  cdiv_preadd #(.W(W)) u_preadd (
    .clk, .rst_n, .in_valid,
    .ar, .ai, .xr, .xi,
    .out_valid(v_pre), .d0, .d1, .d2, .t0, .t1, .t2
  );

  // D3: the three multipliers.
  cdiv_mult3 #(.W(W)) u_mult3 (
    .clk, .rst_n, .in_valid(v_pre),
    .d0, .d1, .d2, .t0, .t1, .t2,
    .out_valid(v_mul), .m0, .m1, .m2
  );

  // T2x3: the two post-adders.
  cdiv_postadd #(.W(W)) u_postadd (
    .clk, .rst_n, .in_valid(v_mul),
    .m0, .m1, .m2,
    .out_valid(v_post), .p_r, .p_i
  );

  // R = xr^2 + xi^2, two stages from the pre-adder's pass-through terms so
  // that it lines up with the post-adder outputs. t0 and t1 hold xr and xi
  // sign-extended by one bit; the low W bits are the values themselves.
  cdiv_norm #(.W(W)) u_norm (
    .clk, .rst_n, .in_valid(v_pre),
    .xr(t0[W-1:0]), .xi(t1[W-1:0]),
    .out_valid(v_norm), .r
  );

  // D2: both parts scaled by delta = 1/R.
  cdiv_divider #(.NW(PW), .DW(RW), .FRAC(FRAC), .QW(QW)) u_div_r (
    .clk, .rst_n, .in_valid(v_post),
    .num(p_r), .den(r),
    .out_valid(v_dr), .q(yr), .ovf(ovf_r)
  );

  cdiv_divider #(.NW(PW), .DW(RW), .FRAC(FRAC), .QW(QW)) u_div_i (
    .clk, .rst_n, .in_valid(v_post),
    .num(p_i), .den(r),
    .out_valid(v_di), .q(yi), .ovf(ovf_i)
  );

  always_comb begin
    out_valid   = v_dr;
    div_by_zero = ovf_r | ovf_i;
  end

  // Both branches run in lock step; with |a/x| < 2^W only R = 0 overflows,
  // and then both dividers do.
  a_norm_step: assert property (@(posedge clk) disable iff (!rst_n) v_norm == v_post)
    else $error("cdiv_top: R and numerators out of step");
  a_div_step: assert property (@(posedge clk) disable iff (!rst_n) v_di == v_dr)
    else $error("cdiv_top: divider valids out of step");
  a_ovf_pair: assert property (@(posedge clk) disable iff (!rst_n) v_dr |-> ovf_r == ovf_i)
    else $error("cdiv_top: one divider overflowed alone");

endmodule
