// cdiv_postadd: post-addition stage of the complex divider (T2x3).
//
// Adds the shared product m2 = ai*(xr + xi) to each of the other two:
//   p_r = m0 + m2 = ar*xr + ai*xi
//   p_i = m1 + m2 = ai*xr - ar*xi
// which are the numerators of the quotient's real and imaginary parts before
// the division by R = xr^2 + xi^2. Two adders.
//
// Timing: one register stage, in_valid to out_valid one cycle later,
// asynchronous active-low reset of the valid bit only.
module cdiv_postadd
  import cdiv_pkg::*;
#(
  parameter int unsigned W = CDIV_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic signed [prod_w(W)-1:0]  m0,
  input  logic signed [prod_w(W)-1:0]  m1,
  input  logic signed [prod_w(W)-1:0]  m2,
  output logic                         out_valid,
  output logic signed [prod_w(W)-1:0]  p_r,
  output logic signed [prod_w(W)-1:0]  p_i
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      p_r <= m0 + m2;
      p_i <= m1 + m2;
    end
  end

endmodule
