// tb_lns_mac: end-to-end test of the QAA-LNS MAC at its default parameters
// (12-bit format: T = 12, F = 6, sign and zero flags).
// Dot products of normally distributed vectors (variance 3) of random length
// are streamed through the MAC, with random idle cycles and a clear at the
// start of each vector.  After every accepted pair the accumulator must equal
// a reference accumulation, the result must appear exactly one clock after
// in_valid (acc_valid with it), and idle cycles must hold it.  Directed
// vectors make every mechanism occur: Delta+ and Delta- additions, exact
// cancellation to zero, zero operands, saturation of product and sum, and
// distances beyond 12 where the correction is skipped.  Each is counted and
// a mechanism that never occurs counts as a failure.  The relative error of
// each dot product against real arithmetic is reported.
module tb_lns_mac;
  import lns_ref_pkg::*;
  localparam int T = 12;
  localparam int F = 6;

  int checks = 0, failures = 0;
  int n_plus = 0, n_minus = 0, n_cancel = 0, n_zero = 0, n_sat = 0, n_far = 0;
  int n_clear = 0, n_hold = 0, n_reset = 0;
  real err_sum = 0.0;
  int  n_dots = 0;

  logic         clk = 0;
  logic         rst_n = 0;
  logic         in_valid = 0, clear = 0;
  logic [T+1:0] a = '0, b = '0;
  logic [T+1:0] acc;
  logic         acc_valid;

  always #5 clk = ~clk;

  lns_mac dut (.*);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ref_lns_t model_acc;

  function automatic real gauss(input real sigma);
    real u1 = (real'($urandom_range(1000000)) + 1.0) / 1000002.0;
    real u2 = real'($urandom_range(1000000)) / 1000001.0;
    return sigma * $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // classify the addition the MAC is about to do
  task automatic count(input ref_lns_t x, input ref_lns_t p);
    int d;
    longint s;
    if (!p.zero && (longint'(unpack(longint'(a), T).mag) + unpack(longint'(b), T).mag > (1 << (T-1)) - 1)) n_sat++;
    if (x.zero || p.zero) begin n_zero++; return; end
    d = x.mag > p.mag ? x.mag - p.mag : p.mag - x.mag;
    if (x.sign != p.sign && d == 0) begin n_cancel++; return; end
    if (x.sign != p.sign) n_minus++; else n_plus++;
    if (d >= 12 * (1 << F)) n_far++;
    s = longint'(x.mag > p.mag ? x.mag : p.mag) + ref_delta(d, x.sign != p.sign, F);
    if (s > (1 << (T-1)) - 1) n_sat++;
  endtask

  // one MAC: drive at the falling edge, check after the next rising edge
  task automatic mac(input ref_lns_t x, input ref_lns_t y, input bit clr);
    ref_lns_t p, base;
    @(negedge clk);
    a = (T+2)'(pack(x, T));
    b = (T+2)'(pack(y, T));
    in_valid = 1;
    clear = clr;
    p = ref_mul(x, y, T);
    base = clr ? zero_word() : model_acc;
    count(base, p);
    if (clr) n_clear++;
    model_acc = ref_add(base, p, T, F);
    @(posedge clk);
    #1;
    checks++;
    if (unpack(longint'(acc), T) != model_acc || !acc_valid) begin
      failures++;
      if (failures < 20) $display("FAIL acc=%h exp=%h valid=%0d", acc, pack(model_acc, T), acc_valid);
    end
  endtask

  task automatic idle(input int n);
    @(negedge clk);
    in_valid = 0;
    clear = $urandom_range(1);  // clear alone must be ignored
    a = (T+2)'($urandom);
    b = (T+2)'($urandom);
    repeat (n) begin
      @(posedge clk);
      #1;
      checks++;
      if (unpack(longint'(acc), T) != model_acc || acc_valid) begin
        failures++;
        $display("FAIL hold: acc=%h exp=%h valid=%0d", acc, pack(model_acc, T), acc_valid);
      end
      n_hold++;
    end
  endtask

  initial begin
    ref_lns_t x, y, w;
    real exact, got;
    int  len;
    model_acc = zero_word();
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (unpack(longint'(acc), T) != zero_word() || acc_valid) failures++;
    n_reset++;
    rst_n = 1;

    // random dot products
    for (int v = 0; v < 400; v++) begin
      len = 1 + $urandom_range(63);
      exact = 0.0;
      for (int i = 0; i < len; i++) begin
        x = from_real(gauss(1.7320508), T, F);
        y = from_real(gauss(1.7320508), T, F);
        exact += to_real(x, F) * to_real(y, F);
        mac(x, y, i == 0);
        if ($urandom_range(7) == 0) idle(1 + $urandom_range(2));
      end
      got = to_real(model_acc, F);
      if (exact > 1.0 || exact < -1.0) begin
        err_sum += (got - exact) / exact < 0 ? (exact - got) / exact : (got - exact) / exact;
        n_dots++;
      end
    end

    // directed: cancellation, zero operands, saturation, far distances
    x = from_real(2.5, T, F); y = from_real(1.0, T, F); w = from_real(-1.0, T, F);
    mac(x, y, 1);
    mac(x, w, 0);                                   // 2.5 - 2.5 -> zero
    mac(zero_word(), y, 0);                         // zero operand
    mac(x, y, 1);
    mac(y, zero_word(), 0);
    x.mag = (1 << (T-1)) - 10; y.mag = 500;
    mac(x, y, 1);                                   // product saturates
    mac(x, y, 0);                                   // sum saturates
    x = from_real(1.0e6, T, F); y = from_real(1.0, T, F);
    w = from_real(1.0e-6, T, F);
    mac(x, y, 1);
    mac(w, y, 0);                                   // distance far beyond 12
    mac(w, from_real(-1.0, T, F), 0);

    // reset in the middle of a sum
    @(negedge clk);
    in_valid = 0;
    rst_n = 0;
    #1;
    model_acc = zero_word();
    checks++;
    if (unpack(longint'(acc), T) != zero_word()) failures++;
    n_reset++;
    @(negedge clk);
    rst_n = 1;
    mac(from_real(3.0, T, F), from_real(-0.5, T, F), 0);

    checks++;
    if (n_plus == 0 || n_minus == 0 || n_cancel == 0 || n_zero == 0 || n_sat == 0 ||
        n_far == 0 || n_clear == 0 || n_hold == 0 || n_reset < 2) begin
      failures++;
      $display("FAIL: a mechanism never occurred");
    end
    $display("coverage: Delta+=%0d Delta-=%0d cancel=%0d zero=%0d saturate=%0d beyond12=%0d clear=%0d hold=%0d reset=%0d",
             n_plus, n_minus, n_cancel, n_zero, n_sat, n_far, n_clear, n_hold, n_reset);
    $display("dot products: %0d, mean relative error against real arithmetic %f", n_dots, err_sum / n_dots);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
