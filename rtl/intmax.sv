// intmax: IntMax unit of the Unnormed Softmax unit.
//
// Takes one slice of LANES fixed-point inputs, rounds every element up to an
// integer (ceiling) in parallel and returns the largest of those integers,
// the slice's LocalMax.  Taking the max of ceilings instead of the plain max
// is what makes every later difference between two maxima an integer, so that
// renormalising by 2^(OldMax-NewMax) is a shift.  The ceiling and the max tree
// follow the paper; the max is written as a balanced comparison tree.
//
// Interface: x[LANES] signed Q(IN_W-IN_FRAC, IN_FRAC); local_max is a signed
// integer of IN_W-IN_FRAC+1 bits.  Purely combinational.
module intmax #(
  parameter int unsigned LANES   = 32,
  parameter int unsigned IN_W    = 8,
  parameter int unsigned IN_FRAC = 2,
  localparam int unsigned MAX_W  = IN_W - IN_FRAC + 1
) (
  input  logic signed [IN_W-1:0]  x [LANES],
  output logic signed [MAX_W-1:0] local_max
);

  localparam int unsigned NPOW = 1 << $clog2(LANES);

  logic signed [MAX_W-1:0] node [2*NPOW-1];
  logic signed [IN_W:0]    biased [LANES];

  // Leaves: ceil(x) = floor((x + 2^F - 1) / 2^F); padding leaves hold the
  // smallest integer so that they never win.
  always_comb begin
    biased = '{default: '0};
    for (int i = 0; i < NPOW; i++) begin
      if (i < LANES) begin
        biased[i]      = (IN_W+1)'(x[i]) + (IN_W+1)'(2**IN_FRAC - 1);
        node[NPOW-1+i] = MAX_W'(biased[i] >>> IN_FRAC);
      end else begin
        node[NPOW-1+i] = {1'b1, {(MAX_W-1){1'b0}}};
      end
    end
    for (int n = NPOW - 2; n >= 0; n--) begin
      node[n] = (node[2*n+1] > node[2*n+2]) ? node[2*n+1] : node[2*n+2];
    end
  end

  assign local_max = node[0];

endmodule
