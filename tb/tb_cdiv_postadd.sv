// tb_cdiv_postadd: self-checking test of the post-addition stage.
//
// Feeds products in the range the multipliers can produce, back to back, and
// checks p_r = m0 + m2 and p_i = m1 + m2 one cycle later, plus the one-cycle
// valid delay.
module tb_cdiv_postadd;
  localparam int W = 16;
  localparam int PW = 2 * W + 3;
  localparam int N = 500;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [PW-1:0] m0 = '0, m1 = '0, m2 = '0;
  logic out_valid;
  logic signed [PW-1:0] p_r, p_i;

  int checks = 0, failures = 0;
  longint er, ei;
  logic exp_valid = 1'b0;

  cdiv_postadd #(.W(W)) dut (.*);

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

  // Random value in [-2^(PW-2), 2^(PW-2)), so that sums cannot wrap.
  function automatic longint rnd();
    longint v = longint'({$urandom, $urandom});
    return v >>> (64 - (PW - 1));
  endfunction

  initial begin
    longint v0, v1, v2;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      if (exp_valid) begin
        check("valid", out_valid, 1);
        check("p_r", p_r, er);
        check("p_i", p_i, ei);
      end
      v0 = rnd(); v1 = rnd(); v2 = rnd();
      m0 = PW'(v0); m1 = PW'(v1); m2 = PW'(v2);
      in_valid = 1'b1;
      er = v0 + v2;
      ei = v1 + v2;
      exp_valid = 1'b1;
    end
    @(negedge clk);
    in_valid = 1'b0;
    check("valid", out_valid, 1);
    check("p_r", p_r, er);
    check("p_i", p_i, ei);
    @(negedge clk);
    check("valid drop", out_valid, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
