// tb_cdiv_norm: self-checking test of the squared-magnitude unit.
//
// Streams random and extreme divisors, one per cycle, and checks
// R = xr^2 + xi^2 two cycles later against 64-bit arithmetic, including
// xr = xi = -2^(W-1), the largest R. Checks the two-cycle valid delay.
module tb_cdiv_norm;
  localparam int W = 16;
  localparam int N = 500;
  localparam int LAT = 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [W-1:0] xr = '0, xi = '0;
  logic out_valid;
  logic [2*W-1:0] r;

  int checks = 0, failures = 0;
  longint exp_q[$];
  int     sent = 0, got = 0;

  cdiv_norm #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint g, longint e);
    checks++;
    if (g != e) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, g, e);
    end
  endtask

  // Each result must arrive exactly LAT cycles after its operands.
  logic vpipe [LAT+1];
  always_ff @(posedge clk) begin
    vpipe[0] <= in_valid;
    for (int k = 1; k <= LAT; k++) vpipe[k] <= vpipe[k-1];
  end

  initial begin
    longint a, b;
    for (int k = 0; k <= LAT; k++) vpipe[k] = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < N + LAT + 2; n++) begin
      @(negedge clk);
      checks++;
      if (out_valid != vpipe[LAT - 1]) begin
        failures++;
        $display("FAIL valid timing at step %0d", n);
      end
      if (out_valid) begin
        check("r", longint'(r), exp_q.pop_front());
        got++;
      end
      if (n < N && (n % 5 != 4)) begin
        case (n % 11)
          0: begin xr = -(2 ** (W - 1)); xi = -(2 ** (W - 1)); end
          1: begin xr = 0; xi = 0; end
          default: begin xr = W'($urandom); xi = W'($urandom); end
        endcase
        a = xr; b = xi;
        exp_q.push_back(a * a + b * b);
        in_valid = 1'b1;
        sent++;
      end else begin
        in_valid = 1'b0;
      end
    end
    check("count", got, sent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
