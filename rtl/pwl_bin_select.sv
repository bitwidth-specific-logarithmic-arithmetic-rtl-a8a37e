// pwl_bin_select: finds the PWL segment that a distance d falls into.
//
// The NSEG-1 inner bin boundaries are compared with d in parallel; the
// comparator outputs form a thermometer code (boundaries ascend) and the
// number of boundaries at or below d is the segment index.  The paper
// reports that this bin search is about half of the logic of its LNS MAC;
// the parallel-comparator structure is this design's choice, the paper only
// names the function.
//
// Interface: d is unsigned; bounds[i] is the lower boundary of segment i+1
// and must ascend with i.  idx is in 0..NSEG-1.
// Timing: purely combinational.
module pwl_bin_select #(
  parameter int unsigned DW   = 13,  // width of d and of each boundary
  parameter int unsigned NSEG = 16   // number of segments
) (
  input  logic [DW-1:0]               d,
  input  logic [NSEG-2:0][DW-1:0]     bounds,
  output logic [$clog2(NSEG)-1:0]     idx
);
  logic [NSEG-2:0] ge;

  always_comb begin
    idx = '0;
    for (int i = 0; i < NSEG-1; i++) begin
      ge[i] = (d >= bounds[i]);
      idx   = idx + $clog2(NSEG)'(ge[i]);
    end
  end
endmodule
