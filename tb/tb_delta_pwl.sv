// tb_delta_pwl: self-checking test of the Delta+/Delta- approximation.
// For each of the three formats with tables (T/F = 11/5, 12/6, 14/8) every
// distance d representable in T+1 bits is applied with both curves.  Each
// output must equal the reference model bit for bit, must be 0 for d >= 12,
// and for d >= 1 must lie within 0.06 (log2 units) of the exact curve, the
// accuracy bound of the fitted tables.
module tb_delta_pwl;
  import lns_ref_pkg::*;

  int checks = 0, failures = 0;
  int n_plus = 0, n_minus = 0, n_beyond = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [11:0] d5;  logic sub5;  logic signed [12:0] dl5;
  logic [12:0] d6;  logic sub6;  logic signed [13:0] dl6;
  logic [14:0] d8;  logic sub8;  logic signed [15:0] dl8;

  delta_pwl #(.T(11), .F(5)) dut5 (.d(d5), .sub(sub5), .delta(dl5));
  delta_pwl                  dut6 (.d(d6), .sub(sub6), .delta(dl6));
  delta_pwl #(.T(14), .F(8)) dut8 (.d(d8), .sub(sub8), .delta(dl8));

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic judge(input int d, input bit sub, input int f, input int got);
    int  e;
    real err;
    if (sub && d == 0) return;
    e = ref_delta(d, sub, f);
    checks++;
    if (got != e) begin
      failures++;
      if (failures < 20) $display("FAIL F=%0d sub=%0d d=%0d got=%0d exp=%0d", f, sub, d, got, e);
    end
    if (d >= 12 * (1 << f)) begin
      n_beyond++;
      checks++;
      if (got != 0) begin
        failures++;
        $display("FAIL F=%0d d=%0d beyond range gives %0d", f, d, got);
      end
    end else if (d >= (1 << f)) begin
      err = real'(got) / (2.0 ** f) - true_delta(real'(d) / (2.0 ** f), sub);
      checks++;
      if (err > 0.06 || err < -0.06) begin
        failures++;
        $display("FAIL F=%0d sub=%0d d=%0d error %f", f, sub, d, err);
      end
    end
    if (sub) n_minus++; else n_plus++;
  endtask

  initial begin
    for (int s = 0; s < 2; s++) begin
      for (int d = 0; d < (1 << 12); d++) begin
        d5 = 12'(d); sub5 = s[0]; #1; judge(d, s[0], 5, int'(dl5));
      end
      for (int d = 0; d < (1 << 13); d++) begin
        d6 = 13'(d); sub6 = s[0]; #1; judge(d, s[0], 6, int'(dl6));
      end
      for (int d = 0; d < (1 << 15); d++) begin
        d8 = 15'(d); sub8 = s[0]; #1; judge(d, s[0], 8, int'(dl8));
      end
    end
    checks++;
    if (n_plus == 0 || n_minus == 0 || n_beyond == 0) failures++;
    $display("coverage: Delta+=%0d Delta-=%0d beyond-range=%0d", n_plus, n_minus, n_beyond);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
