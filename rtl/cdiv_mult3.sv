// cdiv_mult3: the three real multipliers of the complex divider (D3).
//
// Multiplies each pre-added divisor term by its coefficient:
//   m0 = d0 * t0,   m1 = d1 * t1,   m2 = d2 * t2.
// These three products replace the four of the schoolbook formula; the
// algorithm's whole saving is here. The products are kept at full width
// (coefficient width plus term width), so nothing is lost.
//
// Timing: one register stage, in_valid to out_valid one cycle later, same
// reset convention as the other stages (asynchronous active-low, valid only).
module cdiv_mult3
  import cdiv_pkg::*;
#(
  parameter int unsigned W = CDIV_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic signed [coef_w(W)-1:0]   d0,
  input  logic signed [coef_w(W)-1:0]   d1,
  input  logic signed [coef_w(W)-1:0]   d2,
  input  logic signed [xterm_w(W)-1:0]  t0,
  input  logic signed [xterm_w(W)-1:0]  t1,
  input  logic signed [xterm_w(W)-1:0]  t2,
  output logic                          out_valid,
  output logic signed [prod_w(W)-1:0]   m0,
  output logic signed [prod_w(W)-1:0]   m1,
  output logic signed [prod_w(W)-1:0]   m2
);

  localparam int unsigned PW = prod_w(W);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      m0 <= PW'(d0) * PW'(t0);
      m1 <= PW'(d1) * PW'(t1);
      m2 <= PW'(d2) * PW'(t2);
    end
  end

endmodule
