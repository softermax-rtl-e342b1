// tb_unnormed_softmax_unit: drives a back-to-back stream of slice, cross and
// read operations over several interleaved rows and checks, cycle by cycle,
//   - UnnormedSoftmax and LocalMax one cycle after each slice (un_valid),
//   - the row's running (max, PowSum) two cycles after each op (stat_valid),
// against a real-number model of the online-normalised softmax denominator.
// Numerators must be within 1.5 LSB of 2^(x-LocalMax); the running sum within
// (1/64 + 0.002) per slice merged so far.  One op enters every cycle, so the
// test also checks the one-slice-per-cycle rate and both latencies.
module tb_unnormed_softmax_unit;
  import softermax_pkg::*;
  localparam int LANES = 32, ROWS = 8, NOPS = 3000;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_run = 0, n_in = 0, n_cross = 0, n_read = 0, n_first = 0;

  function automatic real p2(int e);
    real r = 1.0;
    if (e >= 0) repeat (e) r = r * 2.0;
    else repeat (-e) r = r / 2.0;
    return r;
  endfunction
  function automatic real p2r(real e);
    return 2.0 ** e;
  endfunction

  logic rst_n;
  us_op_e op;
  logic first;
  logic [2:0] addr;
  logic signed [7:0] x [LANES];
  logic signed [6:0] cross_max_in;
  logic [15:0] cross_sum_in;
  logic un_valid, stat_valid, stat_shift_run, stat_shift_in;
  logic [2:0] un_addr, stat_addr;
  logic [15:0] un_out [LANES];
  logic signed [6:0] local_max_out, max_out;
  logic [15:0] sum_out;
  us_op_e stat_op;

  unnormed_softmax_unit #(.LANES(LANES), .ROWS(ROWS)) dut (.*);

  // model
  int   row_m [ROWS];
  real  row_s [ROWS];
  int   row_n [ROWS];
  bit   row_live [ROWS];
  // expectations, by pipeline distance
  bit   e1_v, e2_v;
  int   e1_lmax;  real e1_un [LANES];  int e1_addr;
  int   e2_m;     real e2_s;  real e2_tol;  int e2_addr; us_op_e e2_op;
  bit   n1_v;  int n1_lmax; real n1_un [LANES]; int n1_addr;
  bit   n2_v;  int n2_m; real n2_s; real n2_tol; int n2_addr; us_op_e n2_op;

  initial begin
    int r, lm, base;
    real ssum, cs;
    rst_n = 0; op = US_NOP; first = 0; addr = 0; cross_max_in = 0; cross_sum_in = 0;
    foreach (x[i]) x[i] = 0;
    foreach (row_live[i]) row_live[i] = 0;
    e1_v = 0; e2_v = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < NOPS + 2; k++) begin
      @(negedge clk);
      // ---- check what the previous ops produced ----
      checks++;
      if (un_valid != e1_v) begin failures++; $display("FAIL un_valid at op %0d", k); end
      if (e1_v) begin
        checks++;
        if (int'(local_max_out) != e1_lmax || int'(un_addr) != e1_addr) begin
          failures++; if (failures < 10) $display("FAIL lmax %0d exp %0d", local_max_out, e1_lmax);
        end
        for (int i = 0; i < LANES; i++) begin
          checks++;
          if (real'(un_out[i]) > e1_un[i] + 1.5 || real'(un_out[i]) < e1_un[i] - 1.5) begin
            failures++; if (failures < 10) $display("FAIL un[%0d]=%0d exp %f", i, un_out[i], e1_un[i]);
          end
        end
      end
      checks++;
      if (stat_valid != e2_v) begin failures++; $display("FAIL stat_valid at op %0d", k); end
      if (e2_v) begin
        checks++;
        if (int'(max_out) != e2_m || int'(stat_addr) != e2_addr || stat_op != e2_op ||
            real'(sum_out) / 64.0 > e2_s + e2_tol || real'(sum_out) / 64.0 < e2_s - e2_tol) begin
          failures++;
          if (failures < 10) $display("FAIL stat op=%0d row=%0d max=%0d exp %0d sum=%f exp %f", k, e2_addr, max_out, e2_m, real'(sum_out)/64.0, e2_s);
        end
        n_run += int'(stat_shift_run); n_in += int'(stat_shift_in);
      end
      e2_v = 0;
      // ---- issue the next op ----
      n1_v = 0; n2_v = 0;
      if (k < NOPS) begin
        r = $urandom_range(0, ROWS-1);
        addr = 3'(r);
        first = 0;
        if (!row_live[r] || $urandom_range(0, 15) == 0) begin
          op = US_SLICE; first = 1;
        end else begin
          case ($urandom_range(0, 9))
            0: op = US_CROSS;
            1: op = US_READ;
            default: op = US_SLICE;
          endcase
        end
        if (op == US_SLICE) begin
          base = $urandom_range(0, 120);
          lm = -100;
          foreach (x[i]) begin
            x[i] = 8'(int'($urandom_range(0, 40)) + base - 128);
            if (int'($ceil(real'(x[i]) / 4.0)) > lm) lm = int'($ceil(real'(x[i]) / 4.0));
          end
          n1_v = 1; n1_lmax = lm; n1_addr = r;
          ssum = 0.0;
          foreach (x[i]) begin
            n1_un[i] = p2r(real'(x[i]) / 4.0 - real'(lm)) * 32768.0;
            ssum += n1_un[i] / 32768.0;
          end
          if (first) begin
            row_m[r] = lm; row_s[r] = ssum; row_n[r] = 1; row_live[r] = 1; n_first++;
          end else begin
            if (lm > row_m[r]) begin row_s[r] = row_s[r] * p2(row_m[r] - lm) + ssum; row_m[r] = lm; end
            else row_s[r] = row_s[r] + ssum * p2(lm - row_m[r]);
            row_n[r]++;
          end
        end else if (op == US_CROSS) begin
          cross_max_in = 7'($urandom_range(0, 64) - 32);
          cross_sum_in = 16'($urandom_range(32, 4000));
          cs = real'(cross_sum_in) / 64.0;
          if (int'(cross_max_in) > row_m[r]) begin row_s[r] = row_s[r] * p2(row_m[r] - int'(cross_max_in)) + cs; row_m[r] = int'(cross_max_in); end
          else row_s[r] = row_s[r] + cs * p2(int'(cross_max_in) - row_m[r]);
          row_n[r]++; n_cross++;
        end else begin
          n_read++;
        end
        if (row_s[r] > 1023.0) row_live[r] = 0;   // keep the model inside the Q(10,6) range
        n2_v = 1; n2_m = row_m[r]; n2_s = row_s[r]; n2_tol = real'(row_n[r]) * (1.0/64.0 + 0.002) + 1.0e-6;
        n2_addr = r; n2_op = op;
      end else begin
        op = US_NOP;
      end
      // shift expectation pipeline: stat of this op is due 2 cycles later
      e2_v = p_v; e2_m = p_m; e2_s = p_s; e2_tol = p_tol; e2_addr = p_addr; e2_op = p_op;
      p_v = n2_v; p_m = n2_m; p_s = n2_s; p_tol = n2_tol; p_addr = n2_addr; p_op = n2_op;
      e1_v = n1_v; e1_lmax = n1_lmax; e1_un = n1_un; e1_addr = n1_addr;
    end
    if (n_run == 0 || n_in == 0 || n_cross == 0 || n_read == 0 || n_first == 0) begin
      failures++; $display("FAIL: a mechanism was never exercised");
    end
    $display("first=%0d cross=%0d read=%0d renorm-running=%0d renorm-incoming=%0d", n_first, n_cross, n_read, n_run, n_in);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  bit p_v = 0; int p_m; real p_s; real p_tol; int p_addr; us_op_e p_op;

  initial begin
    repeat (NOPS + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
