// tb_cdiv_mult3: self-checking test of the three multipliers.
//
// Drives random coefficients and terms over their full ranges, back to
// back, and compares each product one cycle later with a 64-bit product
// computed here. out_valid must follow in_valid by one cycle.
module tb_cdiv_mult3;
  localparam int W = 16;
  localparam int N = 500;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [W+1:0] d0 = '0, d1 = '0, d2 = '0;
  logic signed [W:0]   t0 = '0, t1 = '0, t2 = '0;
  logic out_valid;
  logic signed [2*W+2:0] m0, m1, m2;

  int checks = 0, failures = 0;
  longint e0, e1, e2;
  logic   exp_valid = 1'b0;

  cdiv_mult3 #(.W(W)) dut (.*);

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

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      if (exp_valid) begin
        check("valid", out_valid, 1);
        check("m0", m0, e0);
        check("m1", m1, e1);
        check("m2", m2, e2);
      end
      in_valid = 1'b1;
      if (n % 7 == 0) begin
        d0 = -(2 ** (W + 1)) + 1; t0 = -(2 ** W);
        d1 = 2 ** (W + 1) - 1;    t1 = -(2 ** W);
        d2 = -(2 ** (W + 1));     t2 = 2 ** W - 1;
      end else begin
        d0 = (W+2)'($urandom); d1 = (W+2)'($urandom); d2 = (W+2)'($urandom);
        t0 = (W+1)'($urandom); t1 = (W+1)'($urandom); t2 = (W+1)'($urandom);
      end
      e0 = longint'(d0) * longint'(t0);
      e1 = longint'(d1) * longint'(t1);
      e2 = longint'(d2) * longint'(t2);
      exp_valid = 1'b1;
    end
    @(negedge clk);
    in_valid = 1'b0;
    check("valid", out_valid, 1);
    check("m0", m0, e0);
    check("m1", m1, e1);
    check("m2", m2, e2);
    @(negedge clk);
    check("valid drop", out_valid, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
