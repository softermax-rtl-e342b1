// reduction_unit: Reduction unit of the Unnormed Softmax unit.
//
// Adds the LANES UnnormedSoftmax values of a slice with a summation tree (the
// local sum, all relative to the slice's LocalMax) and folds the result into
// the running (max, sum) of the slice's row, as the online-normalisation step
//     m_new = max(m_run, m_in),  d_new = d_run * 2^(m_run-m_new) + d_in * 2^(m_in-m_new)
// Because both maxima are integers, each factor is a right shift by an integer.
// Only the operand with the smaller max needs shifting, so one right shifter
// serves both cases and a mux picks its input (the figure draws one Right
// Shift fed from the PowSum Buffer; shifting the local sum when the running
// max is the larger one is this design's addition, needed for correctness).
// The mux in front of the max compare and the adder selects either this PE's
// slice or a (max, sum) pair from a neighbouring PE (CrossPE-MaxIn,
// CrossPE-ExpSum-In).  With `first` set the running values are ignored.
//
// The sum is carried at Q(10,15) through the shift and add and truncated to
// the PowSum format Q(10,6) once, with saturation at the format maximum.
// Purely combinational; the caller reads and writes the buffers.
module reduction_unit
  import softermax_pkg::*;
#(
  parameter int unsigned LANES = 32
) (
  input  logic [UN_W-1:0]         un [LANES],   // Q(1,15) numerators of the slice
  input  logic signed [MAX_W-1:0] local_max,
  input  logic                    use_cross,    // take the cross-PE pair instead
  input  logic signed [MAX_W-1:0] cross_max,
  input  logic [SUM_W-1:0]        cross_sum,    // Q(10,6)
  input  logic                    first,        // row starts: no running values
  input  logic signed [MAX_W-1:0] run_max,
  input  logic [SUM_W-1:0]        run_sum,      // Q(10,6)
  output logic signed [MAX_W-1:0] new_max,
  output logic [SUM_W-1:0]        new_sum,      // Q(10,6)
  output logic                    shift_run,    // running sum was shifted (new max found)
  output logic                    shift_in      // incoming sum was shifted (smaller max)
);

  localparam int unsigned LS_W  = UN_W + $clog2(LANES);              // local sum Q(.,15)
  localparam int unsigned WF    = UN_FRAC;                           // wide fraction
  localparam int unsigned WW    = SUM_W - SUM_FRAC + UN_FRAC;        // Q(10,15)
  localparam int unsigned ALIGN = UN_FRAC - SUM_FRAC;                // 9
  localparam int unsigned DW    = MAX_W + 1;

  logic [LS_W-1:0]        local_sum;
  logic signed [MAX_W-1:0] in_max;
  logic [WW-1:0]          in_sum_w, run_sum_w, sh_in, other, shifted;
  logic signed [DW-1:0]   diff;
  logic [DW-1:0]          amt;
  logic                   in_wins;
  logic [WW:0]            acc;
  logic [WW-ALIGN:0]      acc_q;

  // Summation tree (written as a loop; synthesis builds an adder tree)
  always_comb begin
    local_sum = '0;
    for (int i = 0; i < LANES; i++) local_sum = local_sum + LS_W'(un[i]);
  end

  always_comb begin
    in_max    = use_cross ? cross_max : local_max;
    in_sum_w  = use_cross ? (WW'(cross_sum) << ALIGN) : WW'(local_sum);
    run_sum_w = WW'(run_sum) << ALIGN;
    in_wins   = first || (in_max > run_max);
    diff      = DW'(in_max) - DW'(run_max);
    amt       = first ? '0 : (in_wins ? DW'(diff) : DW'(-diff));
    sh_in     = in_wins ? run_sum_w : in_sum_w;
    other     = in_wins ? in_sum_w  : run_sum_w;
    shifted   = (amt >= DW'(WW)) ? '0 : (sh_in >> amt);
    acc       = first ? (WW+1)'(in_sum_w) : ((WW+1)'(shifted) + (WW+1)'(other));
    acc_q     = (WW-ALIGN+1)'(acc >> ALIGN);
    new_max   = in_wins ? in_max : run_max;
    new_sum   = (acc_q > (WW-ALIGN+1)'({SUM_W{1'b1}})) ? {SUM_W{1'b1}} : acc_q[SUM_W-1:0];
    shift_run = !first &&  in_wins && (amt != 0);
    shift_in  = !first && !in_wins && (amt != 0);
  end

  // WF documents the wide format; it equals ALIGN + SUM_FRAC
  if (WF != ALIGN + SUM_FRAC) begin : g_bad_format
    $error("reduction_unit: inconsistent fixed-point formats");
  end

endmodule
