// lns_pkg: constants and coefficient tables shared by the QAA-LNS arithmetic.
//
// An LNS word here is (zero flag, sign, T-bit two's complement log2 magnitude
// with F fractional bits), i.e. T+2 bits, the "T-bit (F, o=2)" format.
//
// The tables hold the bitwidth-specific piece-wise linear (PWL) approximation
// of Delta+(d) = log2(1+2^-d) and Delta-(d) = log2(1-2^-d) on d in [0,12):
// 16 segments, each with a lower bin boundary `lo`, a slope +/-2^k and an
// offset, all in units of 2^-F.  Inside segment i the correction is
//     delta = sgn_i * (k_i >= 0 ? d << k_i : d >> -k_i) + off_i
// (the right shift truncates) and for d >= 12 it is zero.  16 segments over
// [0,12] and power-of-two slopes follow the paper's method.  The numbers
// themselves are this design's own: they were fitted offline, separately for
// F = 5, 6 and 8 (the 11-, 12- and 14-bit formats), by simulated annealing
// with a cosine cooling schedule.  The loss was the mean squared error, in
// the linear domain, between this approximate LNS sum and the exactly
// rounded LNS value of x+y, for 10,000 pairs x, y drawn from N(0, 3).  Each
// move redraws one boundary uniformly between its neighbours and refits the
// slope and offset of the two segments touching it by least squares on the
// curve.  A segment with sgn = 0 would be constant; the fit did not use it.
package lns_pkg;

  localparam int NSEG = 16;  // segments per curve
  localparam int DMAX = 12;  // approximation range d in [0, DMAX)

  typedef struct packed {
    logic        [15:0] lo;   // lower boundary of the segment, units 2^-F
    logic signed [1:0]  sgn;  // slope sign: +1, -1 (or 0 for a flat segment)
    logic signed [4:0]  k;    // slope magnitude 2^k
    logic signed [15:0] off;  // offset, units 2^-F
  } pwl_seg_t;

  // Element i is segment i; the literals below list segment 15 first.
  typedef pwl_seg_t [NSEG-1:0] pwl_tab_t;

  localparam pwl_tab_t TAB_PLUS_F5 = '{
    '{lo:16'd363, sgn:2'sd1, k:-5'sd10, off:16'sd0},
    '{lo:16'd325, sgn:2'sd1, k:-5'sd10, off:16'sd0},
    '{lo:16'd306, sgn:2'sd1, k:-5'sd10, off:16'sd0},
    '{lo:16'd228, sgn:2'sd1, k:-5'sd10, off:16'sd0},
    '{lo:16'd165, sgn:2'sd1, k:-5'sd10, off:16'sd1},
    '{lo:16'd142, sgn:-2'sd1, k:-5'sd5, off:16'sd6},
    '{lo:16'd135, sgn:2'sd1, k:-5'sd10, off:16'sd2},
    '{lo:16'd110, sgn:-2'sd1, k:-5'sd3, off:16'sd18},
    '{lo:16'd78, sgn:-2'sd1, k:-5'sd3, off:16'sd17},
    '{lo:16'd71, sgn:-2'sd1, k:-5'sd3, off:16'sd17},
    '{lo:16'd49, sgn:-2'sd1, k:-5'sd2, off:16'sd26},
    '{lo:16'd43, sgn:-2'sd1, k:-5'sd4, off:16'sd17},
    '{lo:16'd34, sgn:-2'sd1, k:-5'sd2, off:16'sd26},
    '{lo:16'd26, sgn:-2'sd1, k:-5'sd1, off:16'sd34},
    '{lo:16'd18, sgn:-2'sd1, k:-5'sd1, off:16'sd33},
    '{lo:16'd0, sgn:-2'sd1, k:-5'sd1, off:16'sd32}
  };

  localparam pwl_tab_t TAB_MINUS_F5 = '{
    '{lo:16'd356, sgn:2'sd1, k:-5'sd10, off:16'sd0},
    '{lo:16'd274, sgn:2'sd1, k:-5'sd10, off:16'sd0},
    '{lo:16'd259, sgn:2'sd1, k:-5'sd10, off:16'sd0},
    '{lo:16'd240, sgn:2'sd1, k:-5'sd10, off:16'sd0},
    '{lo:16'd228, sgn:2'sd1, k:-5'sd10, off:16'sd0},
    '{lo:16'd216, sgn:2'sd1, k:-5'sd10, off:16'sd0},
    '{lo:16'd155, sgn:2'sd1, k:-5'sd10, off:-16'sd1},
    '{lo:16'd138, sgn:2'sd1, k:-5'sd10, off:-16'sd2},
    '{lo:16'd120, sgn:2'sd1, k:-5'sd10, off:-16'sd3},
    '{lo:16'd96, sgn:2'sd1, k:-5'sd3, off:-16'sd18},
    '{lo:16'd62, sgn:2'sd1, k:-5'sd2, off:-16'sd29},
    '{lo:16'd37, sgn:2'sd1, k:-5'sd1, off:-16'sd44},
    '{lo:16'd25, sgn:2'sd1, k:5'sd0, off:-16'sd64},
    '{lo:16'd16, sgn:2'sd1, k:5'sd1, off:-16'sd89},
    '{lo:16'd6, sgn:2'sd1, k:5'sd2, off:-16'sd117},
    '{lo:16'd0, sgn:2'sd1, k:5'sd3, off:-16'sd158}
  };

  localparam pwl_tab_t TAB_PLUS_F6 = '{
    '{lo:16'd740, sgn:2'sd1, k:-5'sd10, off:16'sd0},
    '{lo:16'd642, sgn:2'sd1, k:-5'sd10, off:16'sd0},
    '{lo:16'd553, sgn:2'sd1, k:-5'sd10, off:16'sd0},
    '{lo:16'd471, sgn:2'sd1, k:-5'sd10, off:16'sd0},
    '{lo:16'd451, sgn:2'sd1, k:-5'sd10, off:16'sd1},
    '{lo:16'd329, sgn:-2'sd1, k:-5'sd7, off:16'sd4},
    '{lo:16'd284, sgn:-2'sd1, k:-5'sd4, off:16'sd22},
    '{lo:16'd226, sgn:-2'sd1, k:-5'sd4, off:16'sd21},
    '{lo:16'd216, sgn:2'sd1, k:-5'sd10, off:16'sd8},
    '{lo:16'd188, sgn:-2'sd1, k:-5'sd4, off:16'sd22},
    '{lo:16'd172, sgn:-2'sd1, k:-5'sd4, off:16'sd23},
    '{lo:16'd134, sgn:-2'sd1, k:-5'sd3, off:16'sd35},
    '{lo:16'd65, sgn:-2'sd1, k:-5'sd2, off:16'sd52},
    '{lo:16'd49, sgn:-2'sd1, k:-5'sd2, off:16'sd54},
    '{lo:16'd30, sgn:-2'sd1, k:-5'sd1, off:16'sd66},
    '{lo:16'd0, sgn:-2'sd1, k:-5'sd1, off:16'sd64}
  };

  localparam pwl_tab_t TAB_MINUS_F6 = '{
    '{lo:16'd560, sgn:2'sd1, k:-5'sd10, off:16'sd0},
    '{lo:16'd506, sgn:2'sd1, k:-5'sd10, off:16'sd0},
    '{lo:16'd496, sgn:2'sd1, k:-5'sd10, off:16'sd0},
    '{lo:16'd326, sgn:2'sd1, k:-5'sd7, off:-16'sd4},
    '{lo:16'd305, sgn:2'sd1, k:-5'sd10, off:-16'sd3},
    '{lo:16'd280, sgn:2'sd1, k:-5'sd10, off:-16'sd4},
    '{lo:16'd250, sgn:2'sd1, k:-5'sd8, off:-16'sd6},
    '{lo:16'd219, sgn:2'sd1, k:-5'sd4, off:-16'sd22},
    '{lo:16'd174, sgn:2'sd1, k:-5'sd3, off:-16'sd36},
    '{lo:16'd120, sgn:2'sd1, k:-5'sd2, off:-16'sd58},
    '{lo:16'd97, sgn:2'sd1, k:-5'sd1, off:-16'sd88},
    '{lo:16'd81, sgn:2'sd1, k:-5'sd1, off:-16'sd89},
    '{lo:16'd51, sgn:2'sd1, k:5'sd0, off:-16'sd129},
    '{lo:16'd29, sgn:2'sd1, k:5'sd1, off:-16'sd178},
    '{lo:16'd10, sgn:2'sd1, k:5'sd2, off:-16'sd235},
    '{lo:16'd0, sgn:2'sd1, k:5'sd3, off:-16'sd329}
  };

  localparam pwl_tab_t TAB_PLUS_F8 = '{
    '{lo:16'd3069, sgn:2'sd1, k:-5'sd10, off:-16'sd2},
    '{lo:16'd2852, sgn:2'sd1, k:-5'sd10, off:-16'sd2},
    '{lo:16'd2729, sgn:2'sd1, k:-5'sd10, off:-16'sd2},
    '{lo:16'd2266, sgn:-2'sd1, k:-5'sd9, off:16'sd5},
    '{lo:16'd1651, sgn:-2'sd1, k:-5'sd8, off:16'sd9},
    '{lo:16'd1632, sgn:2'sd1, k:-5'sd10, off:16'sd3},
    '{lo:16'd1426, sgn:-2'sd1, k:-5'sd6, off:16'sd29},
    '{lo:16'd1138, sgn:-2'sd1, k:-5'sd5, off:16'sd51},
    '{lo:16'd814, sgn:-2'sd1, k:-5'sd4, off:16'sd87},
    '{lo:16'd611, sgn:-2'sd1, k:-5'sd3, off:16'sd139},
    '{lo:16'd510, sgn:-2'sd1, k:-5'sd3, off:16'sd143},
    '{lo:16'd293, sgn:-2'sd1, k:-5'sd2, off:16'sd208},
    '{lo:16'd213, sgn:-2'sd1, k:-5'sd2, off:16'sd214},
    '{lo:16'd160, sgn:-2'sd1, k:-5'sd1, off:16'sd267},
    '{lo:16'd99, sgn:-2'sd1, k:-5'sd1, off:16'sd261},
    '{lo:16'd0, sgn:-2'sd1, k:-5'sd1, off:16'sd257}
  };

  localparam pwl_tab_t TAB_MINUS_F8 = '{
    '{lo:16'd3037, sgn:2'sd1, k:-5'sd10, off:-16'sd2},
    '{lo:16'd2927, sgn:2'sd1, k:-5'sd10, off:-16'sd2},
    '{lo:16'd2159, sgn:2'sd1, k:-5'sd9, off:-16'sd5},
    '{lo:16'd1684, sgn:2'sd1, k:-5'sd8, off:-16'sd9},
    '{lo:16'd1387, sgn:2'sd1, k:-5'sd6, off:-16'sd29},
    '{lo:16'd1200, sgn:2'sd1, k:-5'sd5, off:-16'sd51},
    '{lo:16'd890, sgn:2'sd1, k:-5'sd4, off:-16'sd88},
    '{lo:16'd710, sgn:2'sd1, k:-5'sd3, off:-16'sd145},
    '{lo:16'd514, sgn:2'sd1, k:-5'sd2, off:-16'sd232},
    '{lo:16'd466, sgn:2'sd1, k:-5'sd2, off:-16'sd236},
    '{lo:16'd335, sgn:2'sd1, k:-5'sd1, off:-16'sd354},
    '{lo:16'd308, sgn:2'sd1, k:-5'sd1, off:-16'sd361},
    '{lo:16'd204, sgn:2'sd1, k:5'sd0, off:-16'sd514},
    '{lo:16'd82, sgn:2'sd1, k:5'sd1, off:-16'sd718},
    '{lo:16'd11, sgn:2'sd1, k:5'sd3, off:-16'sd1206},
    '{lo:16'd0, sgn:2'sd1, k:5'sd3, off:-16'sd1672}
  };


  // Table for a format with F fractional bits; sub = 1 selects Delta-.
  // Only the three evaluated formats (F = 5, 6, 8) have tables.
  function automatic pwl_tab_t pwl_table(input int f, input bit sub);
    case (f)
      5:       return sub ? TAB_MINUS_F5 : TAB_PLUS_F5;
      6:       return sub ? TAB_MINUS_F6 : TAB_PLUS_F6;
      8:       return sub ? TAB_MINUS_F8 : TAB_PLUS_F8;
      default: return '0;
    endcase
  endfunction

  function automatic bit pwl_has_table(input int f);
    return (f == 5) || (f == 6) || (f == 8);
  endfunction

endpackage
