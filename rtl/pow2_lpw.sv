// pow2_lpw: one lane of the Power of Two unit (LPW Pow2).
//
// Computes 2^(x - m) for a fixed-point x and an integer m >= ceil(x), so the
// exponent d = x - m is never positive.  The difference is split into an
// integer part floor(d) and a fraction f in [0,1) ("Split Fixed").  The
// fraction is scaled by four (four LPW segments): its top two bits select a
// segment, whose intercept c_lut and slope m_lut approximate 2^f, and the
// remaining fraction bits are the position inside the segment.  The LPW value
// is then shifted right by -floor(d).
//
// With the paper's Q(6,2) input there are only two fraction bits, so the
// position inside the segment is always zero and only the intercept LUT is
// used (the generate branch IN_FRAC == 2); a wider fraction switches on the
// slope multiply.  Intercepts are 2^(k/4), slopes are chords between segment
// ends; their Q(1,15) rounding is this design's own choice.
//
// Interface: x signed Q(IN_W-IN_FRAC, IN_FRAC); m signed integer; y unsigned
// Q(1,15).  Purely combinational.
module pow2_lpw
  import softermax_pkg::POW2_C, softermax_pkg::POW2_M, softermax_pkg::SEG_BITS;
#(
  parameter int unsigned IN_W    = 8,
  parameter int unsigned IN_FRAC = 2,
  localparam int unsigned MAX_W  = IN_W - IN_FRAC + 1,
  localparam int unsigned UN_W   = 16
) (
  input  logic signed [IN_W-1:0]  x,
  input  logic signed [MAX_W-1:0] m,
  output logic        [UN_W-1:0]  y
);

  // d = x - m * 2^F, in the input's fixed-point grid, one bit wider than both
  localparam int unsigned D_W = IN_W + 2;
  localparam int unsigned IP_W = D_W - IN_FRAC;   // integer part width

  logic signed [D_W-1:0]  d;
  logic signed [IP_W-1:0] int_part;               // floor(d), <= 0
  logic [SEG_BITS-1:0]    seg;
  logic [IP_W-1:0]        rshift;
  logic [UN_W-1:0]        lpw;

  always_comb begin
    d        = D_W'(x) - (D_W'(m) <<< IN_FRAC);
    int_part = IP_W'(d >>> IN_FRAC);
    seg      = d[IN_FRAC-1 -: SEG_BITS];
    rshift   = IP_W'(-int_part);
  end

  if (IN_FRAC == SEG_BITS) begin : g_c_only
    // frac(x_scaled) is always zero: lpw = c_lut[int(x_scaled)]
    assign lpw = POW2_C[seg];
  end else begin : g_c_and_m
    localparam int unsigned PF = IN_FRAC - SEG_BITS;  // bits of frac(x_scaled)
    logic [PF-1:0]    pos;
    logic [16+PF-1:0] prod;
    assign pos  = d[PF-1:0];
    assign prod = POW2_M[seg] * pos;
    assign lpw  = POW2_C[seg] + UN_W'(prod >> PF);
  end

  // Shift by the integer part; shifting by the word width or more gives 0
  assign y = (rshift >= IP_W'(UN_W)) ? '0 : (lpw >> rshift);

endmodule
