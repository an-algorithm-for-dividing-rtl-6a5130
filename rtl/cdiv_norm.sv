// cdiv_norm: squared magnitude R = xr^2 + xi^2 of the divisor.
//
// Two squarers and one adder, the common denominator of both quotient parts.
// The squares are taken of the signed parts, so each lies in [0, 2^(2W-2)]
// and their sum fits in 2W unsigned bits.
//
// Timing: two register stages (squares, then sum), in_valid to out_valid two
// cycles later. In the complex divider the unit is fed from the pre-adder's
// pass-through terms, so R arrives in the same cycle as the post-adder's
// numerators. Asynchronous active-low reset of the valid bits only.
module cdiv_norm
  import cdiv_pkg::*;
#(
  parameter int unsigned W = CDIV_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [W-1:0]    xr,
  input  logic signed [W-1:0]    xi,
  output logic                   out_valid,
  output logic [norm_w(W)-1:0]   r
);

  localparam int unsigned RW = norm_w(W);

  logic signed [RW-1:0] sq_r_full, sq_i_full;
  logic [RW-1:0]        sq_r, sq_i;
  logic                 v1;

  always_comb begin
    sq_r_full = RW'(xr) * RW'(xr);
    sq_i_full = RW'(xi) * RW'(xi);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      sq_r <= RW'(sq_r_full);
      sq_i <= RW'(sq_i_full);
    end
    if (v1) r <= sq_r + sq_i;
  end

endmodule
