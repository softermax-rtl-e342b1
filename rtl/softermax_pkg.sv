// softermax_pkg: number formats, operation codes and LUT constants shared by
// the Softermax units.
//
// Fixed-point formats are written Q(I,F): I integer bits (sign included for
// signed words) and F fraction bits.  The widths follow the bitwidth summary
// of the Softermax design:
//   input x            Q(6,2)  signed,   8 bits
//   LocalMax           integer (the fraction of a ceiling is always zero, so
//                      only the integer part is carried; one bit wider than
//                      the input's integer part so that ceil(31.75) = 32 fits)
//   UnnormedSoftmax    Q(1,15) unsigned, 16 bits  (1.0 = 16'h8000)
//   PowSum             Q(10,6) unsigned, 16 bits
//   Reciprocal         Q(1,7)  unsigned,  8 bits  (mantissa of 1/PowSum)
//   Output             Q(1,7)  unsigned,  8 bits  (1.0 = 8'h80)
// The LUT constants below are this design's own rounding of the exact values
// to the Q(1,15) grid.
package softermax_pkg;

  // Input word: Q(6,2)
  localparam int unsigned IN_W    = 8;
  localparam int unsigned IN_FRAC = 2;

  // Integer max: ceil of a Q(6,2) value lies in [-32, 32]
  localparam int unsigned MAX_W   = IN_W - IN_FRAC + 1;  // 7

  // UnnormedSoftmax: Q(1,15)
  localparam int unsigned UN_W    = 16;
  localparam int unsigned UN_FRAC = 15;

  // PowSum: Q(10,6)
  localparam int unsigned SUM_W    = 16;
  localparam int unsigned SUM_FRAC = 6;

  // Reciprocal and final output: Q(1,7)
  localparam int unsigned RCP_W    = 8;
  localparam int unsigned RCP_FRAC = 7;
  localparam int unsigned OUT_W    = 8;
  localparam int unsigned OUT_FRAC = 7;

  // Number of LPW segments for 2^f and 1/m (four in the paper)
  localparam int unsigned SEG_BITS = 2;
  localparam int unsigned NSEG     = 1 << SEG_BITS;

  typedef logic signed [MAX_W-1:0] imax_t;
  typedef logic        [UN_W-1:0]  unnormed_t;
  typedef logic        [SUM_W-1:0] powsum_t;
  typedef logic        [OUT_W-1:0] prob_t;

  // Operation on a row of the Unnormed Softmax unit.
  //   US_SLICE : fold the slice on the input port into the row at addr
  //   US_CROSS : fold the (max, sum) pair arriving from another PE into the row
  //   US_READ  : present the row's (max, sum) on the outputs, no update
  typedef enum logic [1:0] {
    US_NOP   = 2'd0,
    US_SLICE = 2'd1,
    US_CROSS = 2'd2,
    US_READ  = 2'd3
  } us_op_e;

  // Operation of the Normalization unit (ST/LD port of its buffers).
  typedef enum logic [1:0] {
    NU_NOP = 2'd0,
    NU_ST  = 2'd1,   // store GlobalMax and PowSum of a row
    NU_LD  = 2'd2    // normalise one slice of unnormed numerators of a row
  } nu_op_e;

  // 2^(k/4), k = 0..3, in Q(1,15): intercepts of the 2^f segments
  localparam logic [15:0] POW2_C [NSEG] = '{16'd32768, 16'd38968, 16'd46341, 16'd55109};
  // Chord slopes per segment, 2^((k+1)/4) - 2^(k/4), in Q(1,15)
  localparam logic [15:0] POW2_M [NSEG] = '{16'd6200, 16'd7373, 16'd8768, 16'd10427};

  // 1/(1 + k/4), k = 0..3, in Q(1,15): intercepts of the 1/m segments
  localparam logic [15:0] RCP_C [NSEG] = '{16'd32768, 16'd26214, 16'd21845, 16'd18725};
  // Chord slopes (magnitudes, the function falls): 1/(1+k/4) - 1/(1+(k+1)/4)
  localparam logic [15:0] RCP_M [NSEG] = '{16'd6554, 16'd4369, 16'd3120, 16'd2341};

endpackage
