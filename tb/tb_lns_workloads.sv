// tb_lns_workloads: convolution-sized dot products on the MAC in the three
// evaluated LNS formats: 11-bit (T = 11, F = 5), 12-bit (T = 12, F = 6) and
// 14-bit (T = 14, F = 8), each with sign and zero flags.
// The networks trained with these formats (VGG-11, VGG-16, ResNet-18) are
// built from 3x3 convolutions; one output activation of such a layer is a
// dot product of length 3*3*C_in.  This test runs lengths 27 (C_in = 3,
// first layer), 576 (C_in = 64) and 4608 (C_in = 512, deepest layers), with
// operands drawn from N(0, 3) and scaled by 1/sqrt(length) for the weights,
// all in the same accumulator width as the inputs.  The three MACs run side
// by side on the same real data, each quantized to its own format.  Every
// accumulator value is checked against the reference model bit for bit, and
// the mean relative error of each format against real arithmetic is printed
// (it is expected to shrink as F grows, and that ordering is checked).
module tb_lns_workloads;
  import lns_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  logic rst_n = 0;
  logic in_valid = 0, clear = 0;
  always #5 clk = ~clk;

  logic [12:0] a5, b5, acc5;  logic v5;
  logic [13:0] a6, b6, acc6;  logic v6;
  logic [15:0] a8, b8, acc8;  logic v8;

  lns_mac #(.T(11), .F(5)) mac5 (.clk, .rst_n, .in_valid, .clear, .a(a5), .b(b5), .acc(acc5), .acc_valid(v5));
  lns_mac #(.T(12), .F(6)) mac6 (.clk, .rst_n, .in_valid, .clear, .a(a6), .b(b6), .acc(acc6), .acc_valid(v6));
  lns_mac #(.T(14), .F(8)) mac8 (.clk, .rst_n, .in_valid, .clear, .a(a8), .b(b8), .acc(acc8), .acc_valid(v8));

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real gauss(input real sigma);
    real u1 = (real'($urandom_range(1000000)) + 1.0) / 1000002.0;
    real u2 = real'($urandom_range(1000000)) / 1000001.0;
    return sigma * $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  ref_lns_t m5, m6, m8;
  real      err5, err6, err8;
  int       nerr;

  task automatic step(input real x, input real w, input bit clr);
    ref_lns_t x5 = from_real(x, 11, 5), w5 = from_real(w, 11, 5);
    ref_lns_t x6 = from_real(x, 12, 6), w6 = from_real(w, 12, 6);
    ref_lns_t x8 = from_real(x, 14, 8), w8 = from_real(w, 14, 8);
    @(negedge clk);
    a5 = 13'(pack(x5, 11)); b5 = 13'(pack(w5, 11));
    a6 = 14'(pack(x6, 12)); b6 = 14'(pack(w6, 12));
    a8 = 16'(pack(x8, 14)); b8 = 16'(pack(w8, 14));
    in_valid = 1;
    clear = clr;
    m5 = ref_add(clr ? zero_word() : m5, ref_mul(x5, w5, 11), 11, 5);
    m6 = ref_add(clr ? zero_word() : m6, ref_mul(x6, w6, 12), 12, 6);
    m8 = ref_add(clr ? zero_word() : m8, ref_mul(x8, w8, 14), 14, 8);
    @(posedge clk);
    #1;
    checks += 3;
    if (unpack(longint'(acc5), 11) != m5 || !v5) begin failures++; $display("FAIL 11-bit acc=%h", acc5); end
    if (unpack(longint'(acc6), 12) != m6 || !v6) begin failures++; $display("FAIL 12-bit acc=%h", acc6); end
    if (unpack(longint'(acc8), 14) != m8 || !v8) begin failures++; $display("FAIL 14-bit acc=%h", acc8); end
  endtask

  function automatic real relerr(input real got, input real exact);
    real e = (got - exact) / exact;
    return e < 0 ? -e : e;
  endfunction

  initial begin
    int  lens[3] = '{27, 576, 4608};
    real x, w, exact;
    err5 = 0.0; err6 = 0.0; err8 = 0.0; nerr = 0;
    m5 = zero_word(); m6 = zero_word(); m8 = zero_word();
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 3; l++) begin
      for (int v = 0; v < (l == 2 ? 4 : 20); v++) begin
        exact = 0.0;
        for (int i = 0; i < lens[l]; i++) begin
          x = gauss(1.7320508);
          w = gauss(1.7320508) / $sqrt(real'(lens[l]));
          exact += x * w;
          step(x, w, i == 0);
        end
        if (exact > 0.5 || exact < -0.5) begin
          err5 += relerr(to_real(m5, 5), exact);
          err6 += relerr(to_real(m6, 6), exact);
          err8 += relerr(to_real(m8, 8), exact);
          nerr++;
        end
      end
      $display("length %0d done", lens[l]);
    end
    $display("mean relative error over %0d dot products: 11-bit %f, 12-bit %f, 14-bit %f",
             nerr, err5 / nerr, err6 / nerr, err8 / nerr);
    checks++;
    if (!(err8 < err6 && err6 < err5)) begin
      failures++;
      $display("FAIL: error does not fall with more fractional bits");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
