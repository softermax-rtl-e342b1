// tb_pow2_lpw: checks the LPW power-of-two lane against 2.0**d on reals.
// Instance a uses the paper's Q(6,2) input (intercept LUT only, expected
// within 1.5 LSB of Q(1,15)); instance b uses a Q(6,4) input, which brings in
// the slope LUT and multiplier (expected within the chord error, 0.7 %, plus
// 2 LSB).  Every input value is tried against every integer max from ceil(x)
// up to ceil(x)+20.
module tb_pow2_lpw;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [7:0] xa;  logic signed [6:0] ma;  logic [15:0] ya;
  logic signed [9:0] xb;  logic signed [6:0] mb;  logic [15:0] yb;

  pow2_lpw #(.IN_W(8),  .IN_FRAC(2)) dut_a (.x(xa), .m(ma), .y(ya));
  pow2_lpw #(.IN_W(10), .IN_FRAC(4)) dut_b (.x(xb), .m(mb), .y(yb));

  initial begin
    real r, tol;
    int c;
    @(posedge clk);
    for (int v = -128; v < 128; v++) begin
      c = int'($ceil(real'(v) / 4.0));
      for (int k = 0; k <= 20; k++) begin
        xa = 8'(v); ma = 7'(c + k);
        #1;
        r = (2.0 ** (real'(v) / 4.0 - real'(c + k))) * 32768.0;
        checks++;
        if ((real'(ya) - r) > 1.5 || (r - real'(ya)) > 1.5) begin
          failures++;
          if (failures < 10) $display("FAIL a: x=%0d m=%0d y=%0d ref=%f", v, c + k, ya, r);
        end
      end
    end
    for (int v = -512; v < 512; v++) begin
      c = int'($ceil(real'(v) / 16.0));
      for (int k = 0; k <= 20; k++) begin
        xb = 10'(v); mb = 7'(c + k);
        #1;
        r = (2.0 ** (real'(v) / 16.0 - real'(c + k))) * 32768.0;
        tol = 0.007 * r + 2.0;
        checks++;
        if ((real'(yb) - r) > tol || (r - real'(yb)) > tol) begin
          failures++;
          if (failures < 20) $display("FAIL b: x=%0d m=%0d y=%0d ref=%f", v, c + k, yb, r);
        end
      end
    end
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
