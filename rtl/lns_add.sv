// lns_add: QAA-LNS adder.
//
// The sum of two LNS numbers is formed in the log domain as
//     lz = max(lx, ly) + Delta(|lx - ly|)
// with Delta+ when the signs agree and Delta- when they differ, and the sign
// of the operand with the larger magnitude (the sign of x when lx >= ly),
// as the paper defines LNS addition.  Delta comes from the bitwidth-specific
// piece-wise linear unit (delta_pwl).  The zero flag is handled around it:
// a zero operand returns the other one unchanged, and equal magnitudes of
// opposite sign cancel to zero.  A result outside the T-bit range saturates;
// the paper keeps adder outputs at the input width, and saturating rather
// than wrapping is this design's choice.
//
// Interface: x, y, z are LNS words {zero, sign, mag[T-1:0]} (lns_defs.svh).
// Timing: purely combinational.
`include "lns_defs.svh"

module lns_add #(
  parameter int unsigned T = 12,  // arithmetic bits
  parameter int unsigned F = 6    // fractional bits
) (
  input  logic [T+1:0] x,
  input  logic [T+1:0] y,
  output logic [T+1:0] z
);
  typedef `LNS_STRUCT(T) lns_t;

  localparam logic signed [T+2:0] MAX = (T+3)'((1 << (T-1)) - 1);
  localparam logic signed [T+2:0] MIN = -(T+3)'(1 << (T-1));

  lns_t                x_s, y_s, z_s;
  logic                x_ge_y;
  logic signed [T:0]   diff;
  logic [T:0]          d;
  logic signed [T-1:0] lmax;
  logic                sub;
  logic signed [T+1:0] delta;
  logic signed [T+2:0] sum;

  assign x_s = x;
  assign y_s = y;

  always_comb begin
    diff   = (T+1)'(x_s.mag) - (T+1)'(y_s.mag);
    x_ge_y = !diff[T];
    d      = x_ge_y ? unsigned'(diff) : unsigned'(-diff);
    lmax   = x_ge_y ? x_s.mag : y_s.mag;
    sub    = x_s.sign ^ y_s.sign;
  end

  delta_pwl #(.T(T), .F(F)) u_delta (
    .d     (d),
    .sub   (sub),
    .delta (delta)
  );

  always_comb begin
    sum = (T+3)'(lmax) + (T+3)'(delta);
    z_s = '0;
    if (x_s.zero) begin
      z_s = y_s;
    end else if (y_s.zero) begin
      z_s = x_s;
    end else if (sub && d == '0) begin
      z_s.zero = 1'b1;
    end else begin
      z_s.sign = x_ge_y ? x_s.sign : y_s.sign;
      if (sum > MAX)      z_s.mag = MAX[T-1:0];
      else if (sum < MIN) z_s.mag = MIN[T-1:0];
      else                z_s.mag = sum[T-1:0];
    end
  end

  assign z = z_s;
endmodule
