// tb_cdiv_preadd: self-checking test of the pre-addition stage.
//
// Drives random and extreme operand parts one per cycle and compares, one
// cycle later, d0 = ar - ai, d1 = -(ar + ai), d2 = ai, t0 = xr, t1 = xi and
// t2 = xr + xi against integer arithmetic done here. Also checks that
// out_valid follows in_valid by exactly one cycle.
module tb_cdiv_preadd;
  localparam int W = 16;
  localparam int N = 400;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [W-1:0] ar = '0, ai = '0, xr = '0, xi = '0;
  logic out_valid;
  logic signed [W+1:0] d0, d1, d2;
  logic signed [W:0]   t0, t1, t2;

  int checks = 0, failures = 0;

  cdiv_preadd #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic logic signed [W-1:0] pick(int n);
    case ($urandom_range(0, 5))
      0: return -(2 ** (W - 1));
      1: return 2 ** (W - 1) - 1;
      2: return 0;
      default: return W'($urandom);
    endcase
  endfunction

  initial begin
    longint a_r, a_i, x_r, x_i;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check("valid idle", out_valid, 0);
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      ar = pick(n); ai = pick(n); xr = pick(n); xi = pick(n);
      a_r = ar; a_i = ai; x_r = xr; x_i = xi;
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      check("valid", out_valid, 1);
      check("d0", d0, a_r - a_i);
      check("d1", d1, -(a_r + a_i));
      check("d2", d2, a_i);
      check("t0", t0, x_r);
      check("t1", t1, x_i);
      check("t2", t2, x_r + x_i);
      @(negedge clk);
      check("valid drop", out_valid, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
