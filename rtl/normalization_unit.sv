// normalization_unit: the Normalization unit, shared by several PEs.
//
// Holds the final (GlobalMax, PowSum) of every row in a Max Buffer and a Sum
// Buffer, written with ST.  An LD brings one slice of stored UnnormedSoftmax
// numerators of a row, together with the LocalMax they were computed with.
// Each numerator is renormalised to the row's global max by a right shift of
// GlobalMax - LocalMax (an integer, thanks to IntMax), then multiplied by the
// LPW reciprocal of the row's PowSum.  This is lines 8-10 of the Softermax
// algorithm.  The buffers, the subtract, the shifter, the LPW reciprocal and
// the multiplier follow the paper's figure.
//
// Output arithmetic: numerator Q(1,15) x reciprocal mantissa Q(1,7) gives a
// Q(2,22) product, scaled by the reciprocal's exponent and rounded to the
// Q(1,7) output; results above 1.0 (possible only through rounding of the
// sum) are clamped to 1.0.  The rounding and clamp are this design's choice.
//
// Timing: ST writes at the clock edge and is visible to an LD in the next
// cycle; an LD's result (y_valid, y) appears one cycle after the LD.
// One operation per cycle.  The lane count and buffer depth are parameters
// the paper does not give.
module normalization_unit
  import softermax_pkg::*;
#(
  parameter int unsigned LANES = 32,
  parameter int unsigned ROWS  = 512,
  localparam int unsigned AW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  nu_op_e                  op,
  input  logic [AW-1:0]           addr,
  // ST operands
  input  logic [SUM_W-1:0]        pow_sum,
  input  logic signed [MAX_W-1:0] global_max,
  // LD operands
  input  logic signed [MAX_W-1:0] local_max,
  input  logic [UN_W-1:0]         un [LANES],
  // FinalSoftmax
  output logic                    y_valid,
  output logic [AW-1:0]           y_addr,
  output logic [OUT_W-1:0]        y [LANES]
);

  localparam int unsigned LW  = $clog2(SUM_W);
  localparam int unsigned PW  = UN_W + RCP_W;          // product width (24)
  localparam int unsigned DW  = MAX_W + 1;
  // Q(1,15) x Q(1,7) -> Q(1,7): drop UN_FRAC + RCP_FRAC - OUT_FRAC bits,
  // plus the reciprocal's exponent (lead - SUM_FRAC)
  localparam int unsigned BASE_SH = UN_FRAC + RCP_FRAC - OUT_FRAC - SUM_FRAC;  // 9
  localparam logic [OUT_W-1:0] ONE = OUT_W'(1) << OUT_FRAC;

  logic                    st, ld;
  logic [SUM_W-1:0]        row_sum;
  logic [MAX_W-1:0]        row_max_raw;
  logic signed [MAX_W-1:0] row_max;
  logic [RCP_W-1:0]        rcp;
  logic [LW-1:0]           lead;
  logic                    zero;
  logic signed [DW-1:0]    diff;
  logic [DW-1:0]           amt;
  logic [5:0]              out_sh;
  logic [OUT_W-1:0]        y_c [LANES];

  assign st = (op == NU_ST);
  assign ld = (op == NU_LD);

  row_buffer #(.DEPTH(ROWS), .W(SUM_W)) u_sum_buf (
    .clk(clk), .we(st), .waddr(addr), .wdata(pow_sum),
    .raddr(addr), .rdata(row_sum)
  );

  row_buffer #(.DEPTH(ROWS), .W(MAX_W)) u_max_buf (
    .clk(clk), .we(st), .waddr(addr), .wdata(global_max),
    .raddr(addr), .rdata(row_max_raw)
  );
  assign row_max = signed'(row_max_raw);

  lpw_reciprocal u_rcp (.s(row_sum), .rcp(rcp), .lead(lead), .zero(zero));

  always_comb begin
    diff   = DW'(row_max) - DW'(local_max);
    amt    = diff[DW-1] ? '0 : DW'(diff);             // GlobalMax >= LocalMax
    out_sh = 6'(BASE_SH) + 6'(lead);
  end

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    logic [UN_W-1:0] num;
    logic [PW-1:0]   prod;
    logic [PW:0]     rnd;
    logic [PW:0]     q;
    always_comb begin
      num  = (amt >= DW'(UN_W)) ? '0 : (un[i] >> amt);
      prod = PW'(num) * PW'(rcp);
      rnd  = (PW+1)'(prod) + ((PW+1)'(1) << (out_sh - 6'd1));
      q    = rnd >> out_sh;
      y_c[i] = zero ? '0 : ((q > (PW+1)'(ONE)) ? ONE : q[OUT_W-1:0]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) y_valid <= 1'b0;
    else        y_valid <= ld;
  end

  always_ff @(posedge clk) begin
    if (ld) begin
      y      <= y_c;
      y_addr <= addr;
    end
  end

  // A row must be normalised against a global max no smaller than the local
  // max its numerators were computed with
  always_ff @(posedge clk) begin
    if (ld) assert (!diff[DW-1])
      else $error("normalization_unit: LocalMax above GlobalMax of row %0d", addr);
  end

endmodule
