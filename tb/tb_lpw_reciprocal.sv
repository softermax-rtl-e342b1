// tb_lpw_reciprocal: every PowSum value 1..65535 (Q(10,6)) is applied; the
// leading-one position must be exact and rcp/128 * 2^(6-lead) must be within
// 2.5 % of 1/s (chord error up to 1.6 % plus rounding to Q(1,7)).  Also checks
// the zero flag and that rcp lies in [64,128].
module tb_lpw_reciprocal;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  function automatic real p2(int e);
    real r = 1.0;
    if (e >= 0) repeat (e) r = r * 2.0;
    else repeat (-e) r = r / 2.0;
    return r;
  endfunction

  logic [15:0] s;
  logic [7:0] rcp;
  logic [3:0] lead;
  logic zero;

  lpw_reciprocal dut (.s(s), .rcp(rcp), .lead(lead), .zero(zero));

  initial begin
    real ref_v, got;
    int l;
    @(posedge clk);
    s = 0; #1;
    checks++;
    if (!zero) failures++;
    for (int v = 1; v < 65536; v++) begin
      s = 16'(v);
      #1;
      l = $clog2(v + 1) - 1;
      ref_v = 64.0 / real'(v);
      got = real'(rcp) / 128.0 * p2(6 - int'(lead));
      checks++;
      if (int'(lead) != l || zero || rcp < 64 || rcp > 128 ||
          (got - ref_v) > 0.025 * ref_v || (ref_v - got) > 0.025 * ref_v) begin
        failures++;
        if (failures < 10) $display("FAIL: s=%0d lead=%0d rcp=%0d got=%g ref=%g", v, lead, rcp, got, ref_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
