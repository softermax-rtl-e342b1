// tb_intmax: checks the IntMax unit against a real-number model.
// Random slices (plus all-minimum, all-maximum and single-spike slices) are
// applied; the expected LocalMax is max(ceil(x/4)) computed with $ceil on
// reals.  The unit is combinational; a clock only paces the test and the
// watchdog.
module tb_intmax;
  localparam int LANES = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic signed [7:0] x [LANES];
  logic signed [6:0] lmax;
  int checks = 0, failures = 0;

  intmax #(.LANES(LANES)) dut (.x(x), .local_max(lmax));

  task automatic check_one();
    real best;
    best = -1.0e9;
    for (int i = 0; i < LANES; i++) if ($ceil(real'(x[i]) / 4.0) > best) best = $ceil(real'(x[i]) / 4.0);
    #1;
    checks++;
    if (real'(lmax) != best) begin
      failures++;
      if (failures < 10) $display("FAIL: local_max=%0d expected %0f", lmax, best);
    end
  endtask

  initial begin
    for (int t = 0; t < 3000; t++) begin
      @(posedge clk);
      for (int i = 0; i < LANES; i++) begin
        case (t)
          0: x[i] = -8'sd128;
          1: x[i] = 8'sd127;
          2: x[i] = (i == 17) ? 8'sd5 : -8'sd100;
          default: x[i] = 8'($urandom_range(0, 255));
        endcase
      end
      if (t > 2 && t % 3 == 0) x[$urandom_range(0, LANES-1)] = 8'($urandom_range(0, 255));
      check_one();
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
