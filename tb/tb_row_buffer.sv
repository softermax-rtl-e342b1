// tb_row_buffer: random writes and reads against a shadow array; checks that
// a write is visible on the asynchronous read port from the next cycle.
module tb_row_buffer;
  localparam int DEPTH = 16, W = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we;
  logic [3:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] shadow [DEPTH];
  logic [DEPTH-1:0] written;

  row_buffer #(.DEPTH(DEPTH), .W(W)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    written = '0;
    we = 0; waddr = 0; wdata = 0; raddr = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (written[raddr]) begin
        checks++;
        if (rdata !== shadow[raddr]) begin
          failures++;
          if (failures < 10) $display("FAIL: addr %0d read %h expected %h", raddr, rdata, shadow[raddr]);
        end
      end
      we    = ($urandom_range(0, 2) != 0);
      waddr = 4'($urandom_range(0, DEPTH-1));
      wdata = 16'($urandom);
      raddr = (t % 4 == 0) ? waddr : 4'($urandom_range(0, DEPTH-1));
      @(posedge clk);
      if (we) begin shadow[waddr] = wdata; written[waddr] = 1'b1; end
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
