// row_buffer: per-row statistics memory (Max Buffer, PowSum Buffer, Sum Buffer).
//
// A DEPTH x W array with one synchronous write port and one asynchronous read
// port, indexed by the row address.  Both the Unnormed Softmax unit (running
// max and PowSum of each row it is working on) and the Normalization unit
// (global max and final PowSum of each row) keep one value per row in such a
// buffer.  The paper names these buffers and the Address that indexes them;
// their depth, the read/write timing and the absence of a reset are this
// design's choices: a row is (re)initialised by its first write, not by reset.
//
// Timing: a write at a clock edge is visible on rdata from the next cycle.
module row_buffer #(
  parameter int unsigned DEPTH  = 128,
  parameter int unsigned W      = 16,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
