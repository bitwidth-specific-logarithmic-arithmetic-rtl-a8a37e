// delta_pwl: bitwidth-specific piece-wise linear approximation of the LNS
// addition correction terms
//     Delta+(d) = log2(1 + 2^-d)   (operands of equal sign)
//     Delta-(d) = log2(1 - 2^-d)   (operands of opposite sign)
//
// d = |lx - ly| is an unsigned fixed-point number with F fractional bits.
// The range [0, 12) is split into 16 bins; in bin i the correction is
// d * (+/-2^k_i) + o_i, where the multiply is only a shift (power-of-two
// slope, as in the paper) and the right shift truncates.  For d >= 12 both
// curves are below the resolution of the formats and the output is 0.
// Delta+ and Delta- have their own bins, slopes and offsets (lns_pkg); one
// comparator bank and one shifter serve both, with `sub` choosing the table.
// The coefficient values are chosen per format (F) at elaboration; they are
// this design's own fit, made by the paper's method (see lns_pkg).  The
// per-segment slope sign is this design's addition: the paper writes the
// slope as 2^k, but Delta+ falls with d and needs negative slopes.
//
// Interface: d (T+1 bits, unsigned), sub (1 = Delta-), delta (T+2 bits,
// signed, F fractional bits).  delta is meaningless for sub = 1 and d = 0
// (Delta-(0) = -inf); the adder handles that case itself.
// Timing: purely combinational.
module delta_pwl
  import lns_pkg::*;
#(
  parameter int unsigned T = 12,  // arithmetic bits
  parameter int unsigned F = 6    // fractional bits: selects the table
) (
  input  logic [T:0]          d,
  input  logic                sub,
  output logic signed [T+1:0] delta
);
  localparam int unsigned DW    = T + 1;
  localparam int unsigned W     = T + 8;     // room for d << 3 plus the offset
  localparam int unsigned LIMIT = DMAX << F; // 12.0 in units of 2^-F
  localparam pwl_tab_t    TAB_P = pwl_table(F, 1'b0);
  localparam pwl_tab_t    TAB_M = pwl_table(F, 1'b1);

  if (!pwl_has_table(F)) begin : g_no_table
    $error("delta_pwl: no Delta table for F=%0d (tables exist for F = 5, 6, 8)", F);
  end
  if (LIMIT >= (1 << DW)) begin : g_too_narrow
    $error("delta_pwl: T=%0d is too narrow for d up to %0d", T, LIMIT);
  end

  pwl_tab_t                     tab;
  logic [NSEG-2:0][DW-1:0]      bounds;
  logic [$clog2(NSEG)-1:0]      idx;
  logic signed [1:0]            seg_sgn;
  logic signed [4:0]            seg_k;
  logic signed [15:0]           seg_off;
  logic signed [W-1:0]          dd, shifted, term, val;

  assign tab = sub ? TAB_M : TAB_P;

  always_comb begin
    for (int i = 0; i < NSEG-1; i++) bounds[i] = tab[i+1].lo[DW-1:0];
  end

  pwl_bin_select #(.DW(DW), .NSEG(NSEG)) u_bins (
    .d      (d),
    .bounds (bounds),
    .idx    (idx)
  );

  assign seg_sgn = tab[idx].sgn;
  assign seg_k   = tab[idx].k;
  assign seg_off = tab[idx].off;

  always_comb begin
    dd = signed'(W'(d));
    if (seg_k >= 0) shifted = dd <<< seg_k;
    else            shifted = dd >>> (-seg_k);
    case (seg_sgn)
      2'sd1:   term = shifted;
      -2'sd1:  term = -shifted;
      default: term = '0;
    endcase
    val = term + W'(seg_off);
    if (32'(d) >= LIMIT) delta = '0;
    else                 delta = val[T+1:0];
  end

  // The tables keep every in-range correction within T+2 signed bits.
  always_comb begin
    if (32'(d) < LIMIT)
      assert (val == W'(signed'(val[T+1:0])))
        else $error("delta_pwl: correction %0d does not fit %0d bits", val, T+2);
  end
endmodule
