// softermax_top: Softermax in a tile of NUM_PE processing elements.
//
// Each PE carries its own Unnormed Softmax unit in its post-processing unit:
// the score slices that the PE's vector MAC produces (LANES per cycle, already
// scaled to the 8-bit Q(6,2) input format) enter pe_x, and the resulting
// UnnormedSoftmax numerators and LocalMax leave on pe_un*/pe_local_max to be
// written to the global buffer, which is outside this RTL.  When a row is
// spread over several PEs, the row statistics are combined along a chain:
// PE p's Max-Out/ExpSum-Out feed PE p+1's CrossPE-MaxIn/CrossPE-ExpSum-In, and
// a US_CROSS op on PE p+1 folds them into its own copy of the row.  PE 0's
// cross inputs come from the chain_* ports.
//
// One Normalization unit is shared by all PEs and sits between them and the
// global buffer.  Whenever a PE answers a US_READ, its (max, sum) for that row
// is stored (ST) into the Normalization unit at address {pe, row}.  A store
// has priority over a normalisation load on the ld_* port, which is then
// stalled for that cycle (ld_ready low); a load brings back one slice of
// numerators of a row from the global buffer and returns FinalSoftmax on y*.
// At most one PE may answer a US_READ in any cycle (asserted).
//
// The per-PE placement of the Unnormed Softmax unit and the placement of one
// shared Normalization unit between PEs and global buffer follow the paper;
// the PE count, the chain topology, the {pe, row} addressing and the
// store-over-load priority are this design's choices.
// Latencies: numerators 1 cycle after the op, statistics 2 cycles, and a
// FinalSoftmax 1 cycle after the load is accepted.
module softermax_top
  import softermax_pkg::*;
#(
  parameter int unsigned NUM_PE = 4,
  parameter int unsigned LANES  = 32,
  parameter int unsigned ROWS   = 128,
  localparam int unsigned RW    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned PW    = (NUM_PE > 1) ? $clog2(NUM_PE) : 1,
  localparam int unsigned NAW   = PW + RW
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // per-PE slice / cross / read operations
  input  us_op_e                  pe_op        [NUM_PE],
  input  logic                    pe_first     [NUM_PE],
  input  logic [RW-1:0]           pe_addr      [NUM_PE],
  input  logic signed [IN_W-1:0]  pe_x         [NUM_PE][LANES],
  input  logic signed [MAX_W-1:0] chain_max_in,
  input  logic [SUM_W-1:0]        chain_sum_in,
  // numerators towards the global buffer
  output logic                    pe_un_valid  [NUM_PE],
  output logic [RW-1:0]           pe_un_addr   [NUM_PE],
  output logic [UN_W-1:0]         pe_un        [NUM_PE][LANES],
  output logic signed [MAX_W-1:0] pe_local_max [NUM_PE],
  // row statistics of every PE
  output logic                    pe_stat_valid[NUM_PE],
  output logic signed [MAX_W-1:0] pe_max_out   [NUM_PE],
  output logic [SUM_W-1:0]        pe_sum_out   [NUM_PE],
  output logic                    pe_shift_run [NUM_PE],   // running sum renormalised
  output logic                    pe_shift_in  [NUM_PE],   // incoming sum renormalised
  // normalisation loads from the global buffer
  input  logic                    ld_valid,
  output logic                    ld_ready,
  input  logic [NAW-1:0]          ld_addr,
  input  logic signed [MAX_W-1:0] ld_local_max,
  input  logic [UN_W-1:0]         ld_un        [LANES],
  // FinalSoftmax
  output logic                    y_valid,
  output logic [NAW-1:0]          y_addr,
  output logic [OUT_W-1:0]        y            [LANES]
);

  us_op_e                  stat_op   [NUM_PE];
  logic [RW-1:0]           stat_addr [NUM_PE];
  logic signed [MAX_W-1:0] cmax      [NUM_PE];
  logic [SUM_W-1:0]        csum      [NUM_PE];

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    if (p == 0) begin : g_head
      assign cmax[p] = chain_max_in;
      assign csum[p] = chain_sum_in;
    end else begin : g_link
      assign cmax[p] = pe_max_out[p-1];
      assign csum[p] = pe_sum_out[p-1];
    end

    unnormed_softmax_unit #(.LANES(LANES), .ROWS(ROWS)) u_us (
      .clk(clk), .rst_n(rst_n),
      .op(pe_op[p]), .first(pe_first[p]), .addr(pe_addr[p]), .x(pe_x[p]),
      .cross_max_in(cmax[p]), .cross_sum_in(csum[p]),
      .un_valid(pe_un_valid[p]), .un_addr(pe_un_addr[p]), .un_out(pe_un[p]),
      .local_max_out(pe_local_max[p]),
      .stat_valid(pe_stat_valid[p]), .stat_op(stat_op[p]), .stat_addr(stat_addr[p]),
      .max_out(pe_max_out[p]), .sum_out(pe_sum_out[p]),
      .stat_shift_run(pe_shift_run[p]), .stat_shift_in(pe_shift_in[p])
    );
  end

  // ---------------- store path into the Normalization unit ----------------
  logic [NUM_PE-1:0]       rd_hit;
  logic                    st_req;
  logic [NAW-1:0]          st_addr;
  logic [SUM_W-1:0]        st_sum;
  logic signed [MAX_W-1:0] st_max;

  always_comb begin
    st_req  = 1'b0;
    st_addr = '0;
    st_sum  = '0;
    st_max  = '0;
    for (int p = NUM_PE - 1; p >= 0; p--) begin
      rd_hit[p] = pe_stat_valid[p] && (stat_op[p] == US_READ);
      if (rd_hit[p]) begin
        st_req  = 1'b1;
        st_addr = {PW'(p), stat_addr[p]};
        st_sum  = pe_sum_out[p];
        st_max  = pe_max_out[p];
      end
    end
  end

  assign ld_ready = !st_req;

  nu_op_e         nu_op;
  logic [NAW-1:0] nu_addr;

  always_comb begin
    if (st_req) begin
      nu_op   = NU_ST;
      nu_addr = st_addr;
    end else if (ld_valid) begin
      nu_op   = NU_LD;
      nu_addr = ld_addr;
    end else begin
      nu_op   = NU_NOP;
      nu_addr = ld_addr;
    end
  end

  normalization_unit #(.LANES(LANES), .ROWS(NUM_PE * ROWS)) u_norm (
    .clk(clk), .rst_n(rst_n), .op(nu_op), .addr(nu_addr),
    .pow_sum(st_sum), .global_max(st_max),
    .local_max(ld_local_max), .un(ld_un),
    .y_valid(y_valid), .y_addr(y_addr), .y(y)
  );

  // Only one PE may deliver row statistics to the shared unit per cycle
  // (rd_hit is low during reset, since stat_valid is reset)
  a_one_reader: assert property (@(posedge clk) $onehot0(rd_hit))
    else $error("softermax_top: several PEs answered US_READ in one cycle");

endmodule
