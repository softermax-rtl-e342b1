// tb_normalization_unit: stores random (GlobalMax, PowSum) rows with ST and
// then normalises random slices with LD, including an LD of a row in the
// cycle right after its ST.  The expected FinalSoftmax is
//   min(1, un * 2^(LocalMax - GlobalMax) / PowSum)   in Q(1,7),
// computed on reals; the hardware may differ by 2.5 % (LPW reciprocal) plus
// one output LSB.  y_valid must follow each LD by exactly one cycle.
module tb_normalization_unit;
  import softermax_pkg::*;
  localparam int LANES = 32, ROWS = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_shift = 0, n_clamp = 0, n_back2back = 0;

  function automatic real p2(int e);
    real r = 1.0;
    if (e >= 0) repeat (e) r = r * 2.0;
    else repeat (-e) r = r / 2.0;
    return r;
  endfunction

  logic rst_n;
  nu_op_e op;
  logic [3:0] addr;
  logic [15:0] pow_sum;
  logic signed [6:0] global_max, local_max;
  logic [15:0] un [LANES];
  logic y_valid;
  logic [3:0] y_addr;
  logic [7:0] y [LANES];

  normalization_unit #(.LANES(LANES), .ROWS(ROWS)) dut (.*);

  int  m_max [ROWS];
  int  m_sum [ROWS];
  bit  m_live [ROWS];
  bit  exp_v;  int exp_addr;  real exp_y [LANES];
  bit  nxt_v;  int nxt_addr;  real nxt_y [LANES];

  initial begin
    int r, lm, prev_st;
    real v;
    rst_n = 0; op = NU_NOP; addr = 0; pow_sum = 0; global_max = 0; local_max = 0;
    foreach (un[i]) un[i] = 0;
    foreach (m_live[i]) m_live[i] = 0;
    exp_v = 0; prev_st = -1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      checks++;
      if (y_valid != exp_v) begin failures++; $display("FAIL y_valid at %0d", k); end
      if (exp_v) begin
        checks++;
        if (int'(y_addr) != exp_addr) failures++;
        for (int i = 0; i < LANES; i++) begin
          checks++;
          if (real'(y[i]) > exp_y[i] * 1.025 + 1.0 || real'(y[i]) < exp_y[i] * 0.975 - 1.0) begin
            failures++;
            if (failures < 10) $display("FAIL y[%0d]=%0d exp %f (row %0d)", i, y[i], exp_y[i], exp_addr);
          end
        end
      end
      nxt_v = 0;
      r = (prev_st >= 0 && $urandom_range(0, 1) == 0) ? prev_st : $urandom_range(0, ROWS-1);
      addr = 4'(r);
      if (!m_live[r] || $urandom_range(0, 7) == 0) begin
        op = NU_ST;
        global_max = 7'($urandom_range(0, 64) - 32);
        pow_sum = (k % 13 == 0) ? 16'($urandom_range(32, 64)) : 16'($urandom_range(32, 65535));
        m_max[r] = int'(global_max); m_sum[r] = int'(pow_sum); m_live[r] = 1;
        prev_st = r;
      end else begin
        op = NU_LD;
        if (r == prev_st) n_back2back++;
        prev_st = -1;
        lm = m_max[r] - ((k % 3 == 0) ? 0 : $urandom_range(0, 18));
        if (lm < -32) lm = -32;
        local_max = 7'(lm);
        if (lm != m_max[r]) n_shift++;
        foreach (un[i]) begin
          un[i] = 16'($urandom_range(0, 32768));
          v = real'(un[i]) / 32768.0 * p2(lm - m_max[r]) / (real'(m_sum[r]) / 64.0);
          if (v > 1.0) begin v = 1.0; n_clamp++; end
          nxt_y[i] = v * 128.0;
        end
        nxt_v = 1; nxt_addr = r;
      end
      exp_v = nxt_v; exp_addr = nxt_addr; exp_y = nxt_y;
    end
    @(negedge clk);
    if (n_shift == 0 || n_clamp == 0 || n_back2back == 0) begin failures++; $display("FAIL: case not exercised"); end
    $display("renormalising shifts=%0d clamps=%0d LD right after ST=%0d", n_shift, n_clamp, n_back2back);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
