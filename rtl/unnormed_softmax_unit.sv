// unnormed_softmax_unit: the Unnormed Softmax unit of one PE.
//
// Per slice of LANES elements of a score row it finds the slice's integer
// LocalMax (intmax), raises 2 to each element minus LocalMax (pow2_lpw, one
// per lane) and folds the slice's sum into the row's running (max, PowSum)
// kept in the Max Buffer and the PowSum Buffer (reduction_unit, row_buffer).
// The UnnormedSoftmax values and LocalMax go out to be stored; the final
// normalisation happens later in the Normalization unit.  This is lines 4-6
// of the Softermax algorithm, slice by slice.
//
// Operations (op, one per cycle, all fully pipelined):
//   US_SLICE  x[] is one slice of row addr; first marks the row's first slice
//   US_CROSS  fold the pair (cross_max_in, cross_sum_in) from another PE into
//             row addr (first as above)
//   US_READ   show row addr's (max, sum) on max_out/sum_out unchanged
// Timing: stage 1 registers the slice's LocalMax, numerators and local sum
// operands; un_valid/un_out/local_max_out appear one cycle after the op.
// Stage 2 reads the row buffers, merges and writes back in the same cycle, so
// slices of the same row may follow each other back to back with no hazard;
// stat_valid/max_out/sum_out (Max-Out, ExpSum-Out) show the row's updated
// values two cycles after the op.
// The block structure follows the paper's figure; the two-stage pipeline,
// the op codes, the `first` flag and the buffer depth are this design's own.
module unnormed_softmax_unit
  import softermax_pkg::*;
#(
  parameter int unsigned LANES = 32,
  parameter int unsigned ROWS  = 128,
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // operation
  input  us_op_e                  op,
  input  logic                    first,
  input  logic [RW-1:0]           addr,
  input  logic signed [IN_W-1:0]  x [LANES],
  input  logic signed [MAX_W-1:0] cross_max_in,
  input  logic [SUM_W-1:0]        cross_sum_in,
  // UnnormedSoftmax of the slice, with its LocalMax (latency 1)
  output logic                    un_valid,
  output logic [RW-1:0]           un_addr,
  output logic [UN_W-1:0]         un_out [LANES],
  output logic signed [MAX_W-1:0] local_max_out,
  // row statistics after the op (Max-Out, ExpSum-Out; latency 2)
  output logic                    stat_valid,
  output us_op_e                  stat_op,
  output logic [RW-1:0]           stat_addr,
  output logic signed [MAX_W-1:0] max_out,
  output logic [SUM_W-1:0]        sum_out,
  output logic                    stat_shift_run,
  output logic                    stat_shift_in
);

  // ---------------- stage 0: IntMax and Pow2 (combinational) ----------------
  logic signed [MAX_W-1:0] lmax_c;
  logic [UN_W-1:0]         un_c [LANES];

  intmax #(.LANES(LANES), .IN_W(IN_W), .IN_FRAC(IN_FRAC)) u_intmax (
    .x(x), .local_max(lmax_c)
  );

  for (genvar i = 0; i < LANES; i++) begin : g_pow2
    pow2_lpw #(.IN_W(IN_W), .IN_FRAC(IN_FRAC)) u_pow2 (
      .x(x[i]), .m(lmax_c), .y(un_c[i])
    );
  end

  // ---------------- stage 1 registers ----------------
  us_op_e                  s1_op;
  logic                    s1_first;
  logic [RW-1:0]           s1_addr;
  logic [UN_W-1:0]         s1_un [LANES];
  logic signed [MAX_W-1:0] s1_lmax;
  logic signed [MAX_W-1:0] s1_cmax;
  logic [SUM_W-1:0]        s1_csum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_op <= US_NOP;
    end else begin
      s1_op <= op;
    end
  end

  always_ff @(posedge clk) begin
    s1_first <= first;
    s1_addr  <= addr;
    s1_lmax  <= lmax_c;
    s1_un    <= un_c;
    s1_cmax  <= cross_max_in;
    s1_csum  <= cross_sum_in;
  end

  assign un_valid      = (s1_op == US_SLICE);
  assign un_addr       = s1_addr;
  assign un_out        = s1_un;
  assign local_max_out = s1_lmax;

  // ---------------- stage 2: buffers and reduction ----------------
  logic [MAX_W-1:0]        run_max_raw;
  logic signed [MAX_W-1:0] run_max, new_max;
  logic [SUM_W-1:0]        run_sum, new_sum;
  logic                    shift_run, shift_in, upd;

  assign upd = (s1_op == US_SLICE) || (s1_op == US_CROSS);

  row_buffer #(.DEPTH(ROWS), .W(MAX_W)) u_max_buf (
    .clk(clk), .we(upd), .waddr(s1_addr), .wdata(new_max),
    .raddr(s1_addr), .rdata(run_max_raw)
  );
  assign run_max = signed'(run_max_raw);

  row_buffer #(.DEPTH(ROWS), .W(SUM_W)) u_powsum_buf (
    .clk(clk), .we(upd), .waddr(s1_addr), .wdata(new_sum),
    .raddr(s1_addr), .rdata(run_sum)
  );

  reduction_unit #(.LANES(LANES)) u_reduction (
    .un(s1_un), .local_max(s1_lmax),
    .use_cross(s1_op == US_CROSS), .cross_max(s1_cmax), .cross_sum(s1_csum),
    .first(s1_first), .run_max(run_max), .run_sum(run_sum),
    .new_max(new_max), .new_sum(new_sum),
    .shift_run(shift_run), .shift_in(shift_in)
  );

  // ---------------- stage 2 output registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_valid <= 1'b0;
      stat_op    <= US_NOP;
    end else begin
      stat_valid <= (s1_op != US_NOP);
      stat_op    <= s1_op;
    end
  end

  always_ff @(posedge clk) begin
    stat_addr      <= s1_addr;
    max_out        <= upd ? new_max : run_max;
    sum_out        <= upd ? new_sum : run_sum;
    stat_shift_run <= upd && shift_run;
    stat_shift_in  <= upd && shift_in;
  end

endmodule
