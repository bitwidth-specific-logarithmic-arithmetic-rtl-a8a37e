// tb_lns_add: self-checking test of the QAA-LNS adder.
// Operands come from normally distributed real values (variance 3), from
// random words, and from directed cases: zero operands, exact cancellation,
// saturation at the top of the range and distances beyond 12.  Every result
// must equal the reference model bit for bit.  Where the distance is at
// least 1 the result must also be within 0.06 + 2^-F (log2 units) of the
// exact sum of the two input values.  The default 12-bit format and the
// 14-bit format (T = 14, F = 8) are both tested.
module tb_lns_add;
  import lns_ref_pkg::*;

  int checks = 0, failures = 0;
  int n_plus = 0, n_minus = 0, n_cancel = 0, n_zero = 0, n_sat = 0, n_far = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [13:0] x6, y6, z6;
  logic [15:0] x8, y8, z8;
  lns_add                    dut6 (.x(x6), .y(y6), .z(z6));
  lns_add #(.T(14), .F(8))   dut8 (.x(x8), .y(y8), .z(z8));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real gauss(input real sigma);
    real u1 = (real'($urandom_range(1000000)) + 1.0) / 1000002.0;
    real u2 = real'($urandom_range(1000000)) / 1000001.0;
    return sigma * $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  task automatic check(input ref_lns_t x, input ref_lns_t y, input int t, input int f);
    ref_lns_t e, g;
    int       d;
    real      ex, gr, err;
    if (t == 12) begin
      x6 = 14'(pack(x, t)); y6 = 14'(pack(y, t)); #1; g = unpack(longint'(z6), t);
    end else begin
      x8 = 16'(pack(x, t)); y8 = 16'(pack(y, t)); #1; g = unpack(longint'(z8), t);
    end
    e = ref_add(x, y, t, f);
    checks++;
    if (g != e) begin
      failures++;
      if (failures < 20)
        $display("FAIL T=%0d (%0d,%0d,%0d)+(%0d,%0d,%0d): got (%0d,%0d,%0d) exp (%0d,%0d,%0d)", t,
                 x.zero, x.sign, x.mag, y.zero, y.sign, y.mag, g.zero, g.sign, g.mag, e.zero, e.sign, e.mag);
    end
    if (x.zero || y.zero) begin n_zero++; return; end
    d = x.mag > y.mag ? x.mag - y.mag : y.mag - x.mag;
    if (x.sign != y.sign && d == 0) begin n_cancel++; return; end
    if (x.sign != y.sign) n_minus++; else n_plus++;
    if (d >= 12 * (1 << f)) n_far++;
    if (longint'(x.mag > y.mag ? x.mag : y.mag) + ref_delta(d, x.sign != y.sign, f) > (1 << (t-1)) - 1) n_sat++;
    else if (d >= (1 << f) && !g.zero) begin
      ex  = to_real(x, f) + to_real(y, f);
      gr  = to_real(g, f);
      err = $ln((gr < 0 ? -gr : gr) / (ex < 0 ? -ex : ex)) / $ln(2.0);
      checks++;
      if (err > 0.06 + 1.0 / (2.0 ** f) || err < -0.06 - 1.0 / (2.0 ** f) || (gr < 0) != (ex < 0)) begin
        failures++;
        $display("FAIL T=%0d accuracy: %f + %f = %f, got %f", t, to_real(x, f), to_real(y, f), ex, gr);
      end
    end
  endtask

  initial begin
    ref_lns_t x, y;
    for (int ti = 0; ti < 2; ti++) begin
      int t = ti == 0 ? 12 : 14;
      int f = ti == 0 ? 6 : 8;
      for (int i = 0; i < 10000; i++) begin
        x = from_real(gauss(1.7320508), t, f);
        y = from_real(gauss(1.7320508), t, f);
        check(x, y, t, f);
      end
      for (int i = 0; i < 10000; i++) begin
        x = unpack(longint'($urandom), t);
        y = unpack(longint'($urandom), t);
        if (i % 10 != 0) begin x.zero = 0; y.zero = 0; end
        if (x.zero) begin x.sign = 0; x.mag = 0; end
        if (y.zero) begin y.sign = 0; y.mag = 0; end
        check(x, y, t, f);
      end
      for (int i = 0; i < 500; i++) begin
        x = unpack(longint'($urandom), t);
        x.zero = 0;
        y = x;
        y.sign = !x.sign;
        check(x, y, t, f);                              // cancellation
        x.mag = (1 << (t-1)) - 1 - $urandom_range(3);
        y = x;
        check(x, y, t, f);                              // saturation
        y.mag = x.mag - 12 * (1 << f) - $urandom_range(100);
        check(x, y, t, f);                              // beyond range
      end
    end
    checks++;
    if (n_plus == 0 || n_minus == 0 || n_cancel == 0 || n_zero == 0 || n_sat == 0 || n_far == 0) failures++;
    $display("coverage: Delta+=%0d Delta-=%0d cancel=%0d zero=%0d saturate=%0d beyond12=%0d",
             n_plus, n_minus, n_cancel, n_zero, n_sat, n_far);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
