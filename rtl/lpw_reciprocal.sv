// lpw_reciprocal: linear piece-wise reciprocal of the row's PowSum.
//
// 1/s is returned as a mantissa and a shift: 1/s ~= rcp / 2^7 * 2^(6 - lead),
// where lead is the position of the leading one of s (s in Q(10,6)).  The
// leading one normalises s to m = s / 2^(lead-6) in [1,2); the two bits after
// it pick one of four segments and the next bits are the position inside the
// segment, so 1/m = c_lut[seg] - m_lut[seg] * pos, with chord segments whose
// ends are exact.  The LPW is evaluated at Q(1,15) and rounded to the Q(1,7)
// reciprocal format, so rcp lies in [64, 128].
// The paper gives only the name "LPW Reciprocal" and the Q(1,7) width; the
// leading-one normalisation, the four segments and the chord fit are this
// design's own (the same LPW scheme the paper gives for 2^x).
// Purely combinational.  zero is set when s == 0 (rcp and lead are then 0).
module lpw_reciprocal
  import softermax_pkg::*;
(
  input  logic [SUM_W-1:0]          s,
  output logic [RCP_W-1:0]          rcp,
  output logic [$clog2(SUM_W)-1:0]  lead,
  output logic                      zero
);

  localparam int unsigned PB = SUM_W - 1 - SEG_BITS;   // position bits (13)
  localparam int unsigned LW = $clog2(SUM_W);

  logic [SUM_W-1:0] norm;
  logic [SEG_BITS-1:0] seg;
  logic [PB-1:0]    pos;
  logic [16+PB-1:0] prod;
  logic [16:0]      r15;

  always_comb begin
    lead = '0;
    for (int i = 0; i < SUM_W; i++) begin
      if (s[i]) lead = LW'(i);
    end
    zero = (s == '0);
    norm = s << (LW'(SUM_W - 1) - lead);
    seg  = norm[SUM_W-2 -: SEG_BITS];   // norm[SUM_W-1] is the leading one
    pos  = norm[PB-1:0];
    prod = RCP_M[seg] * pos;
    r15  = 17'(RCP_C[seg]) - 17'(prod >> PB);
    // round to Q(1,7); r15 <= 1.0 so the result fits in RCP_W bits
    rcp  = zero ? '0 : RCP_W'((r15 + 17'd128) >> 8);
  end

endmodule
