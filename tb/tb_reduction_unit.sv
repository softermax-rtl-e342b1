// tb_reduction_unit: checks the online-normalised merge against real numbers.
// Random slices of Q(1,15) numerators with random local, running and cross
// maxima and sums are applied in all three cases (first slice, new max larger,
// new max smaller or equal), for the slice and the cross-PE input.  The
// expected sum is run*2^(m_run-m_new) + in*2^(m_in-m_new) on reals; the
// hardware truncates once to Q(10,6), so it must lie in (ref-1.01, ref] LSB,
// or at the saturation value when ref exceeds the format.  The shift flags
// are checked against the case.
module tb_reduction_unit;
  import softermax_pkg::*;
  localparam int LANES = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  function automatic real p2(int e);
    real r = 1.0;
    if (e >= 0) repeat (e) r = r * 2.0;
    else repeat (-e) r = r / 2.0;
    return r;
  endfunction

  int n_run = 0, n_in = 0, n_sat = 0;

  logic [15:0] un [LANES];
  logic signed [6:0] local_max, cross_max, run_max, new_max;
  logic [15:0] cross_sum, run_sum, new_sum;
  logic use_cross, first, shift_run, shift_in;

  reduction_unit #(.LANES(LANES)) dut (.*);

  initial begin
    real in_sum, ref_sum, got;
    int in_m, nm;
    @(posedge clk);
    for (int t = 0; t < 20000; t++) begin
      for (int i = 0; i < LANES; i++) un[i] = 16'($urandom_range(0, 32768));
      local_max = 7'($urandom_range(0, 64) - 32);
      cross_max = 7'($urandom_range(0, 64) - 32);
      run_max   = (t % 5 == 0) ? local_max : 7'($urandom_range(0, 64) - 32);
      cross_sum = (t % 7 == 0) ? 16'hFFF0 : 16'($urandom);
      run_sum   = (t % 11 == 0) ? 16'hFFF0 : 16'($urandom);
      use_cross = ($urandom_range(0, 3) == 0);
      first     = ($urandom_range(0, 9) == 0);
      #1;
      in_sum = 0.0;
      if (use_cross) begin
        in_sum = real'(cross_sum) / 64.0;
        in_m = int'(cross_max);
      end else begin
        for (int i = 0; i < LANES; i++) in_sum += real'(un[i]) / 32768.0;
        in_m = int'(local_max);
      end
      if (first) begin
        nm = in_m; ref_sum = in_sum;
      end else begin
        nm = (in_m > int'(run_max)) ? in_m : int'(run_max);
        ref_sum = real'(run_sum) / 64.0 * p2(int'(run_max) - nm) + in_sum * p2(in_m - nm);
      end
      got = real'(new_sum) / 64.0;
      checks++;
      if (int'(new_max) != nm) begin
        failures++;
        if (failures < 10) $display("FAIL max: got %0d exp %0d", new_max, nm);
      end
      checks++;
      if (ref_sum * 64.0 >= 65535.0) begin
        n_sat++;
        if (new_sum != 16'hFFFF) begin
          failures++;
          if (failures < 10) $display("FAIL sat: got %h ref %f", new_sum, ref_sum);
        end
      end else if (got > ref_sum + 1.0e-9 || got < ref_sum - 1.01 / 64.0) begin
        failures++;
        if (failures < 10) $display("FAIL sum: t=%0d got %f ref %f first=%0d cross=%0d", t, got, ref_sum, first, use_cross);
      end
      checks++;
      if (shift_run != (!first && in_m > int'(run_max)) || shift_in != (!first && in_m < int'(run_max))) begin
        failures++;
        if (failures < 10) $display("FAIL flags");
      end
      n_run += int'(shift_run); n_in += int'(shift_in);
      @(posedge clk);
    end
    if (n_run == 0 || n_in == 0 || n_sat == 0) failures++;
    $display("renorm running=%0d renorm incoming=%0d saturations=%0d", n_run, n_in, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
