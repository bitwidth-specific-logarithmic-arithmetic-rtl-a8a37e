// lns_mac: QAA-LNS multiply-accumulate unit, the top of this design.
//
// Each accepted pair (a, b) is multiplied in the log domain (lns_mul: add the
// log magnitudes, XOR the signs) and added to the accumulator by the QAA-LNS
// adder (lns_add), whose Delta+/Delta- correction is the bitwidth-specific
// piece-wise linear approximation.  The accumulator keeps the input format,
// T+2 bits, with no wider accumulation, as in the paper.  The default
// format is the 12-bit one (T = 12, F = 6, plus sign and zero flags); F = 5
// and F = 8 select the 11- and 14-bit approximation tables.
//
// Interface and timing (this design's own choice; the paper only gives a
// 100 MHz single MAC): one MAC per clock.  When in_valid is high at a rising
// edge, acc becomes acc + a*b, or a*b alone when clear is also high; acc_valid
// is high in the cycle after.  rst_n (asynchronous, active low) sets acc to
// zero (zero flag set).  clear without in_valid is ignored.
`include "lns_defs.svh"

module lns_mac #(
  parameter int unsigned T = 12,  // arithmetic bits of the log magnitude
  parameter int unsigned F = 6    // fractional bits
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic         clear,
  input  logic [T+1:0] a,
  input  logic [T+1:0] b,
  output logic [T+1:0] acc,
  output logic         acc_valid
);
  typedef `LNS_STRUCT(T) lns_t;

  localparam lns_t LNS_ZERO = '{zero: 1'b1, sign: 1'b0, mag: '0};

  logic [T+1:0] prod, acc_in, sum;

  lns_mul #(.T(T)) u_mul (
    .a (a),
    .b (b),
    .p (prod)
  );

  assign acc_in = clear ? LNS_ZERO : acc;

  lns_add #(.T(T), .F(F)) u_add (
    .x (acc_in),
    .y (prod),
    .z (sum)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= LNS_ZERO;
      acc_valid <= 1'b0;
    end else begin
      acc_valid <= in_valid;
      if (in_valid) acc <= sum;
    end
  end
endmodule
