// lns_mul: LNS multiplier.
//
// In the log domain a product is a sum: the T-bit log magnitudes are added by
// a plain two's complement adder and the signs are XORed, as the paper
// defines LNS multiplication.  The output has the same T+2-bit format as the
// inputs; a sum outside the T-bit range saturates to the largest or smallest
// magnitude (the paper keeps outputs at the input width and clips in its
// quantizer; saturation rather than wrap-around is this design's choice).
// If either operand carries the zero flag the product is zero.
//
// Interface: a, b, p are LNS words {zero, sign, mag[T-1:0]} (lns_defs.svh).
// Timing: purely combinational.
`include "lns_defs.svh"

module lns_mul #(
  parameter int unsigned T = 12  // arithmetic bits of the log magnitude
) (
  input  logic [T+1:0] a,
  input  logic [T+1:0] b,
  output logic [T+1:0] p
);
  typedef `LNS_STRUCT(T) lns_t;

  localparam logic signed [T:0] MAX = (T+1)'((1 << (T-1)) - 1);
  localparam logic signed [T:0] MIN = -(T+1)'(1 << (T-1));

  lns_t             a_s, b_s, p_s;
  logic signed [T:0] sum;

  assign a_s = a;
  assign b_s = b;

  always_comb begin
    sum = (T+1)'(a_s.mag) + (T+1)'(b_s.mag);
    p_s = '0;
    if (a_s.zero || b_s.zero) begin
      p_s.zero = 1'b1;
    end else begin
      p_s.sign = a_s.sign ^ b_s.sign;
      if (sum > MAX)      p_s.mag = MAX[T-1:0];
      else if (sum < MIN) p_s.mag = MIN[T-1:0];
      else                p_s.mag = sum[T-1:0];
    end
  end

  assign p = p_s;
endmodule
