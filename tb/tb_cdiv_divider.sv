// tb_cdiv_divider: self-checking test of the pipelined real divider.
//
// Runs the divider at the widths the complex divider uses (35-bit signed
// numerator, 32-bit denominator, 16 fraction bits, 32 quotient bits) with
// one division per cycle and gaps in between. Each result is compared with
// trunc(num * 2^16 / den) worked out here in 128-bit arithmetic, signs
// included, and with the saturated value and ovf for quotients that do not
// fit and for den = 0. Exact divisions, whose last partial remainder is
// zero, are mixed in so that a remainder equal to den occurs. Each result must come out QW + 2 cycles after its
// operands; the test counts how many overflowed, divided by zero, were
// negative and ran back to back, and fails if any of those never happened.
module tb_cdiv_divider;
  localparam int NW = 35, DW = 32, FRAC = 16, QW = 32;
  localparam int LAT = QW + 2;
  localparam int N = 3000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [NW-1:0] num = '0;
  logic [DW-1:0] den = '0;
  logic out_valid;
  logic signed [QW:0] q;
  logic ovf;

  int checks = 0, failures = 0;
  int n_ovf = 0, n_zero = 0, n_neg = 0, n_b2b = 0, n_exact = 0;
  int sent = 0, got = 0;
  longint exp_q[$];
  bit     exp_ovf[$];
  int     exp_t[$];
  int     cycle = 0;

  cdiv_divider #(.NW(NW), .DW(DW), .FRAC(FRAC), .QW(QW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #1000000;
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

  // Reference: quotient of |n| * 2^FRAC by d, rounded toward zero.
  task automatic reference(longint n, longint d, output longint qe, output bit oe);
    logic [127:0] mag, dd, qq, lim;
    mag = (n < 0) ? 128'(-n) : 128'(n);
    mag = mag << FRAC;
    dd  = 128'(d);
    lim = (128'(1) << QW) - 1;
    if (dd == 0) begin
      oe = 1'b1;
    end else begin
      qq = mag / dd;
      oe = (qq > lim);
    end
    if (oe) qe = (n < 0) ? -longint'(lim) : longint'(lim);
    else    qe = (n < 0) ? -longint'(qq) : longint'(qq);
  endtask

  initial begin
    longint n, d, qe;
    bit oe;
    bit last_sent;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    last_sent = 1'b0;
    for (int k = 0; k < N + LAT + 4; k++) begin
      @(negedge clk);
      if (out_valid) begin
        got++;
        check("latency", cycle - exp_t.pop_front(), LAT);
        check("q", longint'(q), exp_q.pop_front());
        check("ovf", ovf, exp_ovf.pop_front());
      end
      if (k < N && $urandom_range(0, 3) != 0) begin
        n = longint'({$urandom, $urandom}) >>> (64 - NW);
        case ($urandom_range(0, 9))
          0: d = 0;                                   // division by zero
          1: d = longint'($urandom_range(1, 40));      // mostly overflows
          2: d = longint'(32'hFFFF_FFFF);
          3: begin n = -(longint'(1) << (NW - 1)); d = longint'($urandom); end
          4: begin                                    // exact quotient
            d = longint'($urandom_range(1, 1 << 20));
            n = d * (longint'($urandom_range(0, 8191)) - 4096);
          end
          default: d = longint'($urandom);
        endcase
        num = NW'(n);
        den = DW'(d);
        reference(n, d, qe, oe);
        exp_q.push_back(qe);
        exp_ovf.push_back(oe);
        exp_t.push_back(cycle);
        in_valid = 1'b1;
        sent++;
        if (oe) n_ovf++;
        if (d == 0) n_zero++;
        if (d != 0 && n != 0 && ((n < 0 ? -n : n) << FRAC) % d == 0) n_exact++;
        if (qe < 0) n_neg++;
        if (last_sent) n_b2b++;
        last_sent = 1'b1;
      end else begin
        in_valid = 1'b0;
        last_sent = 1'b0;
      end
    end
    check("count", got, sent);
    $display("events: overflow=%0d div_by_zero=%0d negative=%0d back_to_back=%0d exact=%0d",
             n_ovf, n_zero, n_neg, n_b2b, n_exact);
    checks++; if (n_exact == 0) failures++;
    checks++; if (n_ovf == 0)  failures++;
    checks++; if (n_zero == 0) failures++;
    checks++; if (n_neg == 0)  failures++;
    checks++; if (n_b2b == 0)  failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
