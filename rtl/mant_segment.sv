// mant_segment: mantissa pre-processing and segmentation of one operand.
//
// The explicit mantissa (hidden bit excluded) is cut into a high-significance
// segment hi (A for operand X, C for operand Y) made of its top N bits, and a
// low-significance segment lo (B or D) made of the next N bits, so that
// M = hi*2^-N + lo*2^-2N + (bits that are ignored). The mantissa is also
// truncated to its upper 3N bits (trun), which the accumulator adds in
// directly. For N=5 and a 23-bit mantissa: hi = M[22:18], lo = M[17:13],
// trun = M[22:8]; the bits below the top 3N are not used at all.
//
// Alongside the segments it produces the per-operand tests that the flag
// generator needs: hi_nz and lo_nz (segment non-zero) and lo_big, set when
// the upper N-2 bits of the low segment are not all zero, i.e. the low
// segment is too large to be replaced by a constant. Segment positions follow
// the paper; grouping these tests with the segmentation is this design's
// choice. Combinational.
module mant_segment #(
  parameter int unsigned MAN_W = 23,
  parameter int unsigned N     = 5
) (
  input  logic [MAN_W-1:0] man,
  output logic [N-1:0]     hi,
  output logic [N-1:0]     lo,
  output logic [3*N-1:0]   trun,
  output logic             hi_nz,
  output logic             lo_nz,
  output logic             lo_big
);

  initial begin
    if (3 * N > MAN_W) $error("mant_segment: 3*N must not exceed MAN_W");
    if (N < 3)         $error("mant_segment: N must be at least 3");
  end

  always_comb begin
    hi     = man[MAN_W-1 -: N];
    lo     = man[MAN_W-1-N -: N];
    trun   = man[MAN_W-1 -: 3*N];
    hi_nz  = |hi;
    lo_nz  = |lo;
    lo_big = |lo[N-1:2];
  end

endmodule
