// tb_lns_mul: self-checking test of the LNS multiplier.
// Random operands, the zero flag on either side, and sums beyond the T-bit
// range (saturation) are checked against the reference model; products of
// moderate operands are also checked against real multiplication.
module tb_lns_mul;
  import lns_ref_pkg::*;
  localparam int T = 12;
  localparam int F = 6;

  int checks = 0, failures = 0, n_sat = 0, n_zero = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [T+1:0] a, b, p;
  lns_mul #(.T(T)) dut (.a(a), .b(b), .p(p));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input ref_lns_t x, input ref_lns_t y);
    ref_lns_t e, g;
    a = (T+2)'(pack(x, T));
    b = (T+2)'(pack(y, T));
    #1;
    e = ref_mul(x, y, T);
    g = unpack(longint'(p), T);
    checks++;
    if (g != e) begin
      failures++;
      $display("FAIL mul %0d/%0d/%0d * %0d/%0d/%0d: got %0d/%0d/%0d exp %0d/%0d/%0d",
               x.zero, x.sign, x.mag, y.zero, y.sign, y.mag, g.zero, g.sign, g.mag, e.zero, e.sign, e.mag);
    end
    if (!x.zero && !y.zero && (longint'(x.mag) + y.mag > (1 << (T-1)) - 1 || longint'(x.mag) + y.mag < -(1 << (T-1)))) n_sat++;
    if (x.zero || y.zero) n_zero++;
  endtask

  initial begin
    ref_lns_t x, y;
    real rx, ry, rp, rg;
    for (int i = 0; i < 20000; i++) begin
      x = unpack(longint'($urandom), T);
      y = unpack(longint'($urandom), T);
      if (i % 7 != 0) begin x.zero = 0; y.zero = 0; end
      if (x.zero) begin x.sign = 0; x.mag = 0; end
      if (y.zero) begin y.sign = 0; y.mag = 0; end
      check(x, y);
    end
    // products in range against real arithmetic
    for (int i = 0; i < 2000; i++) begin
      rx = (real'($urandom_range(2000)) - 1000.0) / 37.0 + 0.001;
      ry = (real'($urandom_range(2000)) - 1000.0) / 53.0 + 0.001;
      x = from_real(rx, T, F);
      y = from_real(ry, T, F);
      check(x, y);
      rp = to_real(x, F) * to_real(y, F);
      rg = to_real(unpack(longint'(p), T), F);
      checks++;
      if ((rp - rg) > 1e-9 * (rp < 0 ? -rp : rp) + 1e-12 || (rg - rp) > 1e-9 * (rp < 0 ? -rp : rp) + 1e-12) begin
        failures++;
        $display("FAIL real product %f * %f: got %f exp %f", to_real(x, F), to_real(y, F), rg, rp);
      end
    end
    checks++;
    if (n_sat == 0 || n_zero == 0) begin
      failures++;
      $display("FAIL coverage: saturation %0d zero %0d", n_sat, n_zero);
    end
    $display("coverage: saturated=%0d zero-operand=%0d", n_sat, n_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
