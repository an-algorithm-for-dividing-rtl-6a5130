// tb_cdiv_top: end-to-end test of the complex divider at its default size.
//
// Streams complex divisions a / x through cdiv_top with no parameter
// overrides (16-bit parts, 16 fraction bits), one per cycle with random
// gaps. Every result is checked three ways:
//   - exactly against the schoolbook formula yr = (ar*xr + ai*xi) / R,
//     yi = (ai*xr - ar*xi) / R, R = xr^2 + xi^2, evaluated here with four
//     multiplications in 64-bit integers and rounded toward zero, which is
//     independent of the three-multiplier datapath;
//   - against a floating-point quotient, to within one unit in the last
//     place;
//   - for its latency, W + FRAC + 5 = 37 cycles.
// Divisions by zero must raise div_by_zero and saturate both parts. The
// test counts the cases that exercise each behaviour (division by zero,
// operand extremes, negative results, back-to-back issue, pipeline gaps)
// and fails if any of them never occurred.
module tb_cdiv_top;
  localparam int W = 16, FRAC = 16;
  localparam int QW = W + FRAC;
  localparam int LAT = QW + 5;
  localparam int N = 4000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [W-1:0] ar = '0, ai = '0, xr = '0, xi = '0;
  logic out_valid;
  logic signed [QW:0] yr, yi;
  logic div_by_zero;

  int checks = 0, failures = 0;
  int n_zero = 0, n_ext = 0, n_neg = 0, n_b2b = 0, n_gap = 0;
  int sent = 0, got = 0, cycle = 0;

  typedef struct {
    longint yr, yi;
    bit     dz;
    real    fr, fi;
    int     t;
  } exp_t;
  exp_t exp_q[$];

  cdiv_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #2000000;
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

  function automatic longint tdiv(longint n, longint d);
    longint m = (n < 0) ? -n : n;
    longint qq = (m << FRAC) / d;
    return (n < 0) ? -qq : qq;
  endfunction

  function automatic logic signed [W-1:0] pick(output bit ext);
    ext = 1'b1;
    case ($urandom_range(0, 9))
      0: return -(2 ** (W - 1));
      1: return 2 ** (W - 1) - 1;
      2: return W'($urandom_range(0, 6)) - 3;
      default: begin ext = 1'b0; return W'($urandom); end
    endcase
  endfunction

  initial begin
    longint a_r, a_i, x_r, x_i, r, nr, ni, lim;
    exp_t e;
    bit e0, e1, e2, e3, last;
    real rr, ir;
    lim = (longint'(1) << QW) - 1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    last = 1'b0;
    for (int k = 0; k < N + LAT + 4; k++) begin
      @(negedge clk);
      if (out_valid) begin
        got++;
        e = exp_q.pop_front();
        check("latency", cycle - e.t, LAT);
        check("yr", longint'(yr), e.yr);
        check("yi", longint'(yi), e.yi);
        check("div_by_zero", div_by_zero, e.dz);
        if (!e.dz) begin
          rr = real'(longint'(yr)) / real'(longint'(1) << FRAC);
          ir = real'(longint'(yi)) / real'(longint'(1) << FRAC);
          checks++;
          if ((rr - e.fr) > 1.0 / 65536.0 || (e.fr - rr) > 1.0 / 65536.0 ||
              (ir - e.fi) > 1.0 / 65536.0 || (e.fi - ir) > 1.0 / 65536.0) begin
            failures++;
            $display("FAIL float: got %f,%f expected %f,%f", rr, ir, e.fr, e.fi);
          end
        end
      end
      if (k < N && $urandom_range(0, 4) != 0) begin
        ar = pick(e0); ai = pick(e1); xr = pick(e2); xi = pick(e3);
        if (k % 97 == 0) begin xr = 0; xi = 0; end
        a_r = ar; a_i = ai; x_r = xr; x_i = xi;
        r  = x_r * x_r + x_i * x_i;
        nr = a_r * x_r + a_i * x_i;
        ni = a_i * x_r - a_r * x_i;
        e.t = cycle;
        if (r == 0) begin
          e.dz = 1'b1;
          e.yr = (nr < 0) ? -lim : lim;
          e.yi = (ni < 0) ? -lim : lim;
          n_zero++;
        end else begin
          e.dz = 1'b0;
          e.yr = tdiv(nr, r);
          e.yi = tdiv(ni, r);
          e.fr = real'(nr) / real'(r);
          e.fi = real'(ni) / real'(r);
        end
        exp_q.push_back(e);
        if (e0 || e1 || e2 || e3) n_ext++;
        if (e.yr < 0 || e.yi < 0) n_neg++;
        if (last) n_b2b++;
        last = 1'b1;
        in_valid = 1'b1;
        sent++;
      end else begin
        if (k < N) n_gap++;
        last = 1'b0;
        in_valid = 1'b0;
      end
    end
    check("count", got, sent);
    $display("events: div_by_zero=%0d extremes=%0d negative=%0d back_to_back=%0d gaps=%0d",
             n_zero, n_ext, n_neg, n_b2b, n_gap);
    checks++; if (n_zero == 0) failures++;
    checks++; if (n_ext == 0)  failures++;
    checks++; if (n_neg == 0)  failures++;
    checks++; if (n_b2b == 0)  failures++;
    checks++; if (n_gap == 0)  failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
