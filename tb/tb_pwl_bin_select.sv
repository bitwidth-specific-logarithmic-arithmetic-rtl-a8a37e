// tb_pwl_bin_select: self-checking test of the bin search.
// Random ascending boundary sets; d is drawn at random and also placed on,
// just below and just above every boundary.  The expected index is found by
// a linear scan for the last boundary not above d.
module tb_pwl_bin_select;
  localparam int DW = 13;
  localparam int NSEG = 16;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [DW-1:0]           d;
  logic [NSEG-2:0][DW-1:0] bounds;
  logic [$clog2(NSEG)-1:0] idx;

  pwl_bin_select #(.DW(DW), .NSEG(NSEG)) dut (.d(d), .bounds(bounds), .idx(idx));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int dv);
    int e = 0;
    d = DW'(dv);
    #1;
    for (int i = 0; i < NSEG-1; i++) if (int'(d) >= int'(bounds[i])) e = i + 1;
    checks++;
    if (int'(idx) != e) begin
      failures++;
      $display("FAIL d=%0d idx=%0d exp=%0d", d, idx, e);
    end
  endtask

  initial begin
    int b;
    for (int set = 0; set < 200; set++) begin
      b = 1 + $urandom_range(20);
      for (int i = 0; i < NSEG-1; i++) begin
        bounds[i] = DW'(b);
        b = b + 1 + $urandom_range(300);
      end
      for (int i = 0; i < NSEG-1; i++) begin
        check(int'(bounds[i]));
        check(int'(bounds[i]) - 1);
        check(int'(bounds[i]) + 1);
      end
      for (int i = 0; i < 50; i++) check($urandom_range((1 << DW) - 1));
      check(0);
      check((1 << DW) - 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
