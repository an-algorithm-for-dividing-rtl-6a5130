// cdiv_preadd: pre-addition stage of the complex divider (T3x2 and D3).
//
// From the dividend a = ar + j*ai it forms the three multiplier coefficients
//   d0 = ar - ai,   d1 = -(ar + ai),   d2 = ai,
// which are the diagonal of D3, and from the divisor x = xr + j*xi the three
// multiplier operands t0 = xr, t1 = xi, t2 = xr + xi, which are T3x2 * X.
// Three adders in all (the negation of d1 folds into its adder).
//
// Sign of t1: the algorithm as published negates xi on the way to d1 (the
// -1 in T3x2, the dashed line of the data flow diagram) and also puts a minus
// into d1 itself. With both, y_i comes out as ar*xi + ai*xr + 2*ai*xi rather
// than ai*xr - ar*xi. This design keeps the printed coefficient
// d1 = -(ar + ai) and passes xi without negation, which makes the product
// equal to Eq. (2) of the schoolbook formula.
//
// Timing: one register stage. Inputs sampled with in_valid on a rising clk
// appear on the outputs, with out_valid, one cycle later. rst_n is an
// asynchronous active-low reset of the valid bit only; data registers are
// not reset. t0 and t1 also feed the squared-magnitude unit.
module cdiv_preadd
  import cdiv_pkg::*;
#(
  parameter int unsigned W = CDIV_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic signed [W-1:0]           ar,
  input  logic signed [W-1:0]           ai,
  input  logic signed [W-1:0]           xr,
  input  logic signed [W-1:0]           xi,
  output logic                          out_valid,
  output logic signed [coef_w(W)-1:0]   d0,
  output logic signed [coef_w(W)-1:0]   d1,
  output logic signed [coef_w(W)-1:0]   d2,
  output logic signed [xterm_w(W)-1:0]  t0,
  output logic signed [xterm_w(W)-1:0]  t1,
  output logic signed [xterm_w(W)-1:0]  t2
);

  localparam int unsigned CW = coef_w(W);
  localparam int unsigned XW = xterm_w(W);

  logic signed [CW-1:0] ar_e, ai_e;
  logic signed [XW-1:0] xr_e, xi_e;

  always_comb begin
    ar_e = CW'(ar);
    ai_e = CW'(ai);
    xr_e = XW'(xr);
    xi_e = XW'(xi);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      d0 <= ar_e - ai_e;
      d1 <= -(ar_e + ai_e);
      d2 <= ai_e;
      t0 <= xr_e;
      t1 <= xi_e;
      t2 <= xr_e + xi_e;
    end
  end

endmodule
